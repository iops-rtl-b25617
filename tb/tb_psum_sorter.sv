// tb_psum_sorter: random rows of 0..Z pairs (many equal columns) are
// inserted one per cycle; afterwards the sorter contents, read by
// position, must be the stable ascending sort of what went in, and the
// count must match. Inserting one pair more than Z raises full_err.
module tb_psum_sorter;
  import iops_pkg::*;
  localparam int Z = SORT_DEPTH;
  localparam int AW = $clog2(PSUM_DEPTH);
  localparam int ZW = $clog2(Z + 1);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic clear, ins_valid, full_err;
  logic [15:0] ins_idx, rd_idx;
  logic [AW-1:0] ins_addr, rd_addr;
  logic [ZW-1:0] count, rd_pos;

  psum_sorter dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    clear = 0; ins_valid = 0; ins_idx = 0; ins_addr = 0; rd_pos = 0;
    repeat (2) @(negedge clk); rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int n, idx [$], addr [$], key [$];
      idx.delete(); addr.delete(); key.delete();
      n = (t == 0) ? Z : $urandom_range(0, Z);
      @(negedge clk);   // resynchronise after the #1 reads
      clear = 1; @(negedge clk); clear = 0;
      for (int i = 0; i < n; i++) begin
        ins_valid = $urandom_range(0, 3) != 0;
        if (!ins_valid) begin @(negedge clk); ins_valid = 1; end
        ins_idx = 16'($urandom_range(0, (t % 2) ? 7 : 1000)); ins_addr = AW'(i);
        idx.push_back(ins_idx); addr.push_back(i);
        @(negedge clk);
      end
      ins_valid = 0;
      // stable sort reference: sort by (idx, arrival)
      for (int i = 0; i < n; i++) key.push_back(idx[i] * 1024 + addr[i]);
      key.sort();
      chk("count", count, n);
      for (int i = 0; i < n; i++) begin
        rd_pos = ZW'(i); #1;
        chk("idx", rd_idx, key[i] / 1024);
        chk("addr", rd_addr, key[i] % 1024);
      end
      chk("no full_err", full_err, 0);
    end
    // overflow
    for (int i = 0; i <= Z; i++) begin ins_valid = 1; ins_idx = 16'(i); @(negedge clk); end
    ins_valid = 0; #1;
    chk("full_err", full_err, 1);
    chk("count at Z", count, Z);
    clear = 1; @(negedge clk); clear = 0; #1;
    chk("cleared", count, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
