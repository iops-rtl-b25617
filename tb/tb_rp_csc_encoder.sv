// tb_rp_csc_encoder: encodes the 4 x 4 matrix A of the reference's
// encoding example into RP-CSC with 2 row groups of 2 rows and compares
// every buffer write with the expected format: group 0 holds a1,a3,a2
// (rows 0,1,0), group 1 holds a4,a5 (rows 0,1), all column lengths 1, the
// shared list holds columns 0..3 with bitmaps 01,01,11,10. A fifth row
// (row 4, outside the block) must be skipped. Also checks the cycle count
// (one per element, one per column end, one to finish) and a second
// encoding of a block starting at row 2.
module tb_rp_csc_encoder;
  import iops_pkg::*;
  localparam int G = 2;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic in_we; logic [1:0] in_sel; logic [7:0] in_addr; logic [63:0] in_data;
  logic start, busy, done, overflow;
  logic [15:0] kt; logic [31:0] blk_base; logic [15:0] grp_size;
  logic el_we; logic [0:0] el_grp; logic [7:0] el_addr; logic [63:0] el_val; logic [15:0] el_idx;
  logic [G-1:0] len_we; logic [G-1:0][7:0] len_addr; logic [G-1:0][7:0] len_val;
  logic list_we; logic [12:0] list_addr; logic [15:0] list_idx; logic [G-1:0] list_bm;
  logic all_len_we; logic [13:0] all_len;

  partition_encoder #(.G(G)) dut (.*);

  int checks = 0, failures = 0;
  real    vals [G][8];
  int     idxs [G][8];
  int     lens [G][8];
  int     lidx [16];
  int     lbm  [16];
  int     all_n;

  always @(posedge clk) begin
    if (el_we) begin vals[el_grp][el_addr] = $bitstoreal(el_val); idxs[el_grp][el_addr] = el_idx; end
    for (int g = 0; g < G; g++) if (len_we[g]) lens[g][len_addr[g]] = len_val[g];
    if (list_we) begin lidx[list_addr] = list_idx; lbm[list_addr] = list_bm; end
    if (all_len_we) all_n = all_len;
  end

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic load(input int sel, input int addr, input logic [63:0] d);
    @(negedge clk); in_we = 1; in_sel = 2'(sel); in_addr = 8'(addr); in_data = d;
    @(negedge clk); in_we = 0;
  endtask

  task automatic run(output int cyc);
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    @(negedge clk);
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cyc;
    // CSC of A: a1(0,0) a3(1,1) a2(0,2) a4(2,2) a5(3,3), plus x(4,0) outside
    int rows [6] = '{0, 4, 1, 0, 2, 3};
    int ptrs [5] = '{0, 2, 3, 5, 6};
    real v   [6] = '{1.0, 99.0, 3.0, 2.0, 4.0, 5.0};   // a1, x, a3, a2, a4, a5
    in_we = 0; start = 0; in_sel = 0; in_addr = 0; in_data = 0;
    kt = 4; blk_base = 0; grp_size = 2;
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (ptrs[i]) load(0, i, 64'(ptrs[i]));
    foreach (rows[i]) load(1, i, 64'(rows[i]));
    foreach (v[i])    load(2, i, $realtobits(v[i]));
    run(cyc);
    chk("cycles", cyc, 1 + 6 + 4 + 1);   // start cycle, elements, column ends, finish
    chk("g0 v0", int'(vals[0][0]), 1); chk("g0 r0", idxs[0][0], 0);
    chk("g0 v1", int'(vals[0][1]), 3); chk("g0 r1", idxs[0][1], 1);
    chk("g0 v2", int'(vals[0][2]), 2); chk("g0 r2", idxs[0][2], 0);
    chk("g1 v0", int'(vals[1][0]), 4); chk("g1 r0", idxs[1][0], 0);
    chk("g1 v1", int'(vals[1][1]), 5); chk("g1 r1", idxs[1][1], 1);
    for (int i = 0; i < 3; i++) chk("g0 len", lens[0][i], 1);
    for (int i = 0; i < 2; i++) chk("g1 len", lens[1][i], 1);
    chk("list0", lidx[0], 0); chk("bm0", lbm[0], 1);
    chk("list1", lidx[1], 1); chk("bm1", lbm[1], 1);
    chk("list2", lidx[2], 2); chk("bm2", lbm[2], 3);
    chk("list3", lidx[3], 3); chk("bm3", lbm[3], 2);
    chk("all_len", all_n, 4);
    chk("overflow", int'(overflow), 0);
    // block of rows 2..5 (one row per group): a4 -> g0, a5 -> g1, x(4) -> g2 out of block? no: G*1 = rows 2,3
    blk_base = 2; grp_size = 1;
    run(cyc);
    chk("cycles 2", cyc, 1 + 6 + 4 + 1);
    chk("all_len 2", all_n, 2);
    chk("b2 list0", lidx[0], 2); chk("b2 bm0", lbm[0], 1);
    chk("b2 list1", lidx[1], 3); chk("b2 bm1", lbm[1], 2);
    chk("b2 g0 v", int'(vals[0][0]), 4); chk("b2 g0 r", idxs[0][0], 0);
    chk("b2 g1 v", int'(vals[1][0]), 5); chk("b2 g1 r", idxs[1][0], 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
