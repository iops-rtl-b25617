// tb_iops_dma: the DMA against the behavioural DRAM (latency 4, random
// stalls on both channels).
//  * Three tiles of random sizes: every word of the six arrays must reach
//    the encoder port once, at the right select and address, and load_done
//    must pulse once per tile.
//  * 200 C elements offered with random gaps: DRAM must hold, at
//    c_base + 2n, the value and then {row, column} of element n, and
//    c_count must end at 200.
module tb_iops_dma;
  import iops_pkg::*;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic load_start, load_busy, load_done, rd_req_valid, rd_req_ready, rd_resp_valid;
  logic enc_we, c_valid, c_ready, store_busy, wr_valid, wr_ready;
  tile_cmd_t cmd; enc_sel_e enc_sel;
  logic [31:0] rd_req_addr, wr_addr, c_base, c_count;
  logic [63:0] rd_resp_data, enc_data, wr_data;
  logic [15:0] enc_addr;
  c_elem_t c_elem;

  iops_dma dut (.*);
  dram_model #(.LAT(4), .STALL(4)) u_mem (.*);

  int checks = 0, failures = 0;
  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  logic [63:0] got [6][256];
  int          hits [6][256];
  int          done_n;
  always @(posedge clk) begin
    if (enc_we) begin got[enc_sel][enc_addr] = enc_data; hits[enc_sel][enc_addr]++; end
    if (load_done) done_n++;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    load_start = 0; cmd = '0; c_valid = 0; c_elem = '0; c_base = 32'h10_0000;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 3; t++) begin
      int len [6]; logic [31:0] base [6];
      cmd = '0;
      cmd.kt = 16'($urandom_range(1, 60)); cmd.a_nnz = 16'($urandom_range(0, 200)); cmd.b_nnz = 16'($urandom_range(1, 200));
      len = '{cmd.kt + 1, cmd.a_nnz, cmd.a_nnz, cmd.kt + 1, cmd.b_nnz, cmd.b_nnz};
      for (int s = 0; s < 6; s++) base[s] = 32'(1000 * (6 * t + s) + $urandom_range(0, 99));
      cmd.a_ptr_addr = base[0]; cmd.a_idx_addr = base[1]; cmd.a_val_addr = base[2];
      cmd.b_ptr_addr = base[3]; cmd.b_idx_addr = base[4]; cmd.b_val_addr = base[5];
      for (int s = 0; s < 6; s++)
        for (int i = 0; i < len[s]; i++) u_mem.mem[base[s] + i] = {$urandom, $urandom};
      foreach (hits[s, i]) hits[s][i] = 0;
      done_n = 0;
      @(negedge clk); load_start = 1; @(negedge clk); load_start = 0;
      while (load_busy) @(negedge clk);
      repeat (3) @(negedge clk);
      chk("load_done once", done_n, 1);
      for (int s = 0; s < 6; s++)
        for (int i = 0; i < 256; i++) begin
          chk($sformatf("hits %0d %0d", s, i), hits[s][i], i < len[s] ? 1 : 0);
          if (i < len[s]) chk("data", got[s][i], u_mem.mem[base[s] + i]);
        end
    end
    // C store
    for (int n = 0; n < 200; n++) begin
      c_valid = 1; c_elem.value = {$urandom, $urandom}; c_elem.row = $urandom; c_elem.col = $urandom;
      @(posedge clk); while (!c_ready) @(posedge clk);
      u_mem.mem[32'hFFFF_0000 + 2 * n]     = c_elem.value;         // reference copy
      u_mem.mem[32'hFFFF_0000 + 2 * n + 1] = {c_elem.row, c_elem.col};
      @(negedge clk); c_valid = 0;
      if ($urandom_range(0, 2) == 0) @(negedge clk);
    end
    while (store_busy) @(negedge clk);
    chk("c_count", c_count, 200);
    for (int n = 0; n < 400; n++) chk("c word", u_mem.mem[c_base + n], u_mem.mem[32'hFFFF_0000 + n]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
