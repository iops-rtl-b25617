// tb_top_ctrl: the three-stage controller with every stage replaced by a
// responder of random latency (DMA, both encoders, scheduler plus array
// drain, the NA address-mapping units). 40 tile commands are sent, tagged
// through a_row_base, with random last_k. Checks:
//  * the load, encode and compute stages see the tiles in order, and the
//    compute stage reads the buffer bank the tile was encoded into;
//  * the map stage sees exactly the last_k tiles, in order, reading the PE
//    bank that tile was computed into, and no PE bank is written while
//    being mapped;
//  * the stages overlap (more than one busy at once) and it ends idle.
module tb_top_ctrl;
  import iops_pkg::*;
  localparam int NA = GNA;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic cmd_valid, cmd_ready, dma_start, dma_done, enc_start, enc_a_done, enc_b_done, enc_bank;
  logic sched_start, sched_done, array_busy, cmp_bank, pe_wbank, map_start, map_bank, idle;
  logic [NA-1:0] map_done; logic [2:0] stage_busy;
  tile_cmd_t cmd, dma_cmd, enc_cmd, sched_cmd, map_cmd;

  top_ctrl dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  // responders
  int dma_t = -1, enc_a_t = -1, enc_b_t = -1, sch_t = -1, arr_t = -1;
  int map_t [NA];
  logic mapping;
  always @(posedge clk) begin
    dma_done <= 0; enc_a_done <= 0; enc_b_done <= 0; sched_done <= 0; map_done <= '0;
    if (dma_start) dma_t = $urandom_range(1, 20);
    else if (dma_t > 0) begin dma_t--; if (dma_t == 0) dma_done <= 1; end
    if (enc_start) begin enc_a_t = $urandom_range(1, 20); enc_b_t = $urandom_range(1, 20); end
    else begin
      if (enc_a_t > 0) begin enc_a_t--; if (enc_a_t == 0) enc_a_done <= 1; end
      if (enc_b_t > 0) begin enc_b_t--; if (enc_b_t == 0) enc_b_done <= 1; end
    end
    if (sched_start) sch_t = $urandom_range(1, 30);
    else if (sch_t > 0) begin sch_t--; if (sch_t == 0) begin sched_done <= 1; arr_t = $urandom_range(0, 8); end end
    if (arr_t > 0) arr_t--;
    if (map_start) foreach (map_t[g]) map_t[g] = $urandom_range(1, 40);
    else foreach (map_t[g]) if (map_t[g] > 0) begin map_t[g]--; if (map_t[g] == 0) map_done[g] <= 1; end
  end
  assign array_busy = arr_t > 0 || sch_t > 0;

  // bookkeeping
  int n_dma = 0, n_enc = 0, n_sch = 0, n_map = 0, overlap = 0;
  int enc_bank_of [64], pe_bank_of [64];
  int exp_map [$];
  int cur_pe_bank_tile = -1;
  bit lastk [64];
  int map_bank_busy = -1;
  always @(posedge clk) if (rst_n) begin
    if (dma_start) begin chk("dma order", dma_cmd.a_row_base, n_dma); n_dma++; end
    if (enc_start) begin chk("enc order", enc_cmd.a_row_base, n_enc); enc_bank_of[n_enc] = enc_bank; n_enc++; end
    if (sched_start) begin
      chk("sched order", sched_cmd.a_row_base, n_sch);
      chk("sched bank", cmp_bank, enc_bank_of[n_sch]);
      chk("pe bank not being mapped", (map_bank_busy == int'(pe_wbank)), 0);
      pe_bank_of[n_sch] = pe_wbank;
      if (sched_cmd.last_k) exp_map.push_back(n_sch);
      n_sch++;
    end
    if (map_start) begin
      chk("map has tile", exp_map.size() > 0, 1);
      if (exp_map.size() > 0) begin
        int t; t = exp_map.pop_front();
        chk("map order", map_cmd.a_row_base, t);
        chk("map bank", map_bank, pe_bank_of[t]);
      end
      map_bank_busy = map_bank; n_map++;
    end
    if (stage_busy[2] == 0) map_bank_busy = -1;
    if ($countones(stage_busy) > 1) overlap++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int nlast;
    cmd_valid = 0; cmd = '0; nlast = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 40; t++) begin
      cmd = '0; cmd.a_row_base = t; cmd.last_k = (t == 39) || ($urandom_range(0, 1) == 0);
      nlast += cmd.last_k;
      cmd_valid = 1;
      while (!cmd_ready) @(negedge clk);
      @(posedge clk); @(negedge clk);
      cmd_valid = 0;
      if ($urandom_range(0, 3) == 0) repeat ($urandom_range(1, 30)) @(negedge clk);
    end
    while (!idle) @(negedge clk);
    repeat (5) @(negedge clk);
    chk("all loaded", n_dma, 40); chk("all encoded", n_enc, 40); chk("all computed", n_sch, 40);
    chk("all mapped", n_map, nlast);
    chk("stages overlapped", overlap > 0, 1);
    chk("idle", idle, 1);
    $display("overlap cycles %0d", overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
