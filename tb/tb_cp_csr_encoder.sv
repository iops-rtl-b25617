// tb_cp_csr_encoder: encodes the 4 x 4 matrix B of the reference's
// encoding example into CP-CSR with 2 column groups of 2 columns.
// Expected: group 0 values b1,b3,b5,b8 with local columns 1,0,1,0 and row
// lengths 1,1,1,1; group 1 values b2,b4,b6,b7 with local columns 1,1,0,1
// and row lengths 1,1,2; shared list rows 0..3 with bitmaps 11,11,11,01.
// Then a random matrix is encoded and compared with a software encoding.
module tb_cp_csr_encoder;
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
  int vals [G][256];
  int idxs [G][256];
  int lens [G][256];
  int lidx [256];
  int lbm  [256];
  int all_n;

  always @(posedge clk) begin
    if (el_we) begin vals[el_grp][el_addr] = int'($bitstoreal(el_val)); idxs[el_grp][el_addr] = el_idx; end
    for (int g = 0; g < G; g++) if (len_we[g]) lens[g][len_addr[g]] = len_val[g];
    if (list_we) begin lidx[list_addr] = list_idx; lbm[list_addr] = list_bm; end
    if (all_len_we) all_n = all_len;
  end

  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  task automatic load(input int sel, input int addr, input logic [63:0] d);
    @(negedge clk); in_we = 1; in_sel = 2'(sel); in_addr = 8'(addr); in_data = d;
    @(negedge clk); in_we = 0;
  endtask

  task automatic run();
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int cols [8] = '{1, 3, 0, 3, 1, 2, 3, 0};
    int ptrs [5] = '{0, 2, 4, 7, 8};
    int v    [8] = '{1, 2, 3, 4, 5, 6, 7, 8};   // b1..b8
    int e_v0 [4] = '{1, 3, 5, 8};
    int e_c0 [4] = '{1, 0, 1, 0};
    int e_v1 [4] = '{2, 4, 6, 7};
    int e_c1 [4] = '{1, 1, 0, 1};
    int e_l1 [3] = '{1, 1, 2};
    int e_bm [4] = '{3, 3, 3, 1};
    in_we = 0; start = 0; in_sel = 0; in_addr = 0; in_data = 0;
    kt = 4; blk_base = 0; grp_size = 2;
    repeat (2) @(negedge clk); rst_n = 1;
    foreach (ptrs[i]) load(0, i, 64'(ptrs[i]));
    foreach (cols[i]) load(1, i, 64'(cols[i]));
    foreach (v[i])    load(2, i, $realtobits(real'(v[i])));
    run();
    for (int i = 0; i < 4; i++) begin
      chk("g0 val", vals[0][i], e_v0[i]); chk("g0 col", idxs[0][i], e_c0[i]); chk("g0 len", lens[0][i], 1);
      chk("g1 val", vals[1][i], e_v1[i]); chk("g1 col", idxs[1][i], e_c1[i]);
      chk("row idx", lidx[i], i); chk("bitmap", lbm[i], e_bm[i]);
    end
    for (int i = 0; i < 3; i++) chk("g1 len", lens[1][i], e_l1[i]);
    chk("all_len", all_n, 4);

    // random 20 x 12 CSR, block of columns [3, 3 + 2*4)
    begin
      int n = 0, ecnt [G], elen [G], nl = 0;
      int mcol [20][12];
      int pp [21];
      kt = 20; blk_base = 3; grp_size = 4;
      for (int r = 0; r < 20; r++) begin
        pp[r] = n;
        for (int c = 0; c < 12; c++) begin
          mcol[r][c] = ($urandom_range(0, 3) == 0) ? 100 * r + c + 1 : 0;
          if (mcol[r][c] != 0) begin
            load(1, n, 64'(c)); load(2, n, $realtobits(real'(mcol[r][c]))); n++;
          end
        end
      end
      pp[20] = n;
      foreach (pp[i]) load(0, i, 64'(pp[i]));
      run();
      ecnt = '{0, 0}; elen = '{0, 0};
      for (int r = 0; r < 20; r++) begin
        int bm; bm = 0;
        for (int g = 0; g < G; g++) begin
          int l; l = 0;
          for (int c = 3 + 4 * g; c < 7 + 4 * g; c++)
            if (mcol[r][c] != 0) begin
              chk("rnd val", vals[g][ecnt[g]], mcol[r][c]);
              chk("rnd col", idxs[g][ecnt[g]], c - 3 - 4 * g);
              ecnt[g]++; l++;
            end
          if (l > 0) begin chk("rnd len", lens[g][elen[g]], l); elen[g]++; bm |= 1 << g; end
        end
        if (bm != 0) begin chk("rnd row", lidx[nl], r); chk("rnd bm", lbm[nl], bm); nl++; end
      end
      chk("rnd all_len", all_n, nl);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
