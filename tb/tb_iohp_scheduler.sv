// tb_iohp_scheduler: drives the scheduler from behavioural models of the
// two group buffers (combinational reads, like the real buffers) and
// records every (A element, B element) pair that meets in each PE.
//  * SSMM, 2 x 2 groups, the reference's 4 x 4 example: the pairs must be
//    exactly the outer products of Fig. 5 and dispatch must take 5 cycles.
//  * SSMM, 2 x 2 groups, random 8 x 12 by 12 x 8 matrices: the pairs must
//    be exactly the nonzero products of A x B, each with its C coordinate.
//  * SDMM, the reference's 2 x 4 by dense 4 x 2 example on PE row 0 (with
//    a second dense B group beside it): all products in 6 cycles.
module tb_iohp_scheduler;
  import iops_pkg::*;
  localparam int G = 2;
  localparam int GAW = $clog2(GRP_DEPTH);
  localparam int LAW = $clog2(LIST_DEPTH);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  task automatic chk(input string what, input int got, input int exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  // ---- buffer models ----
  int a_val [G][64], a_idx [G][64], a_len [G][64], a_list [64], a_bm [64], a_n;
  int b_val [G][64], b_idx [G][64], b_len [G][64], b_list [64], b_bm [64], b_n;

  logic start; mode_e mode; logic [15:0] nt; logic busy, done;
  logic [LAW-1:0] a_list_raddr, b_list_raddr;
  logic [15:0] a_list_idx, b_list_idx;
  logic [G-1:0] a_list_bm, b_list_bm;
  logic [LAW:0] a_all_len, b_all_len;
  logic [G-1:0][GAW-1:0] a_len_raddr, a_el_raddr, b_len_raddr, b_el_raddr;
  logic [G-1:0][7:0] a_len_r, b_len_r;
  logic [G-1:0][63:0] a_el_val, b_el_val, pa_val, pb_val;
  logic [G-1:0][15:0] a_el_idx, b_el_idx, pa_row, pb_col;
  logic [G-1:0] pa_valid, pb_valid;

  always_comb begin
    a_list_idx = 16'(a_list[a_list_raddr % 64]); a_list_bm = G'(a_bm[a_list_raddr % 64]);
    b_list_idx = 16'(b_list[b_list_raddr % 64]); b_list_bm = G'(b_bm[b_list_raddr % 64]);
    a_all_len = (LAW+1)'(a_n); b_all_len = (LAW+1)'(b_n);
    for (int g = 0; g < G; g++) begin
      a_len_r[g]  = 8'(a_len[g][a_len_raddr[g] % 64]);
      a_el_val[g] = 64'(a_val[g][a_el_raddr[g] % 64]);
      a_el_idx[g] = 16'(a_idx[g][a_el_raddr[g] % 64]);
      b_len_r[g]  = 8'(b_len[g][b_len_raddr[g] % 64]);
      b_el_val[g] = 64'(b_val[g][b_el_raddr[g] % 64]);
      b_el_idx[g] = 16'(b_idx[g][b_el_raddr[g] % 64]);
    end
  end

  iohp_scheduler #(.NA(G), .NB(G)) dut (
    .clk, .rst_n, .start, .mode, .nt, .busy, .done,
    .a_list_raddr, .a_list_idx, .a_list_bm, .a_all_len, .a_len_raddr, .a_len(a_len_r),
    .a_el_raddr, .a_el_val, .a_el_idx,
    .b_list_raddr, .b_list_idx, .b_list_bm, .b_all_len, .b_len_raddr, .b_len(b_len_r),
    .b_el_raddr, .b_el_val, .b_el_idx,
    .pa_valid, .pa_val, .pa_row, .pb_valid, .pb_val, .pb_col);

  // values are small integers stored as raw bits so pairs can be identified
  int pairs [string];
  int dispatch;
  always @(posedge clk) begin
    if (pa_valid != 0 || pb_valid != 0) dispatch++;
    for (int g = 0; g < G; g++)
      for (int h = 0; h < G; h++)
        if (pa_valid[g] && pb_valid[h])
          pairs[$sformatf("%0d %0d %0d %0d %0d %0d", g, h, pa_val[g], pb_val[h], pa_row[g], pb_col[h])]++;
  end

  // encode dense A (m x k, rows in G groups of m/G) to RP-CSC and dense B
  // (k x n, columns in G groups of n/G) to CP-CSR, values = matrix entries
  int A [16][16], B [16][16];
  task automatic encode(input int m, input int k, input int n, input int ga, input int gb);
    int ca [G], cb [G], la [G], lb [G];
    a_n = 0; b_n = 0;
    for (int g = 0; g < G; g++) begin ca[g] = 0; cb[g] = 0; la[g] = 0; lb[g] = 0; end
    for (int c = 0; c < k; c++) begin
      int bm; bm = 0;
      for (int g = 0; g < ga; g++) begin
        int l; l = 0;
        for (int r = g * (m / ga); r < (g + 1) * (m / ga); r++)
          if (A[r][c] != 0) begin a_val[g][ca[g]] = A[r][c]; a_idx[g][ca[g]] = r - g * (m / ga); ca[g]++; l++; end
        if (l > 0) begin a_len[g][la[g]] = l; la[g]++; bm |= 1 << g; end
      end
      if (bm != 0) begin a_list[a_n] = c; a_bm[a_n] = bm; a_n++; end
    end
    for (int r = 0; r < k; r++) begin
      int bm; bm = 0;
      for (int h = 0; h < gb; h++) begin
        int l; l = 0;
        for (int c = h * (n / gb); c < (h + 1) * (n / gb); c++)
          if (B[r][c] != 0) begin b_val[h][cb[h]] = B[r][c]; b_idx[h][cb[h]] = c - h * (n / gb); cb[h]++; l++; end
        if (l > 0) begin b_len[h][lb[h]] = l; lb[h]++; bm |= 1 << h; end
      end
      if (bm != 0) begin b_list[b_n] = r; b_bm[b_n] = bm; b_n++; end
    end
  endtask

  task automatic run();
    pairs.delete(); dispatch = 0;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    @(negedge clk);
  endtask

  // every nonzero product must appear exactly once
  task automatic check_pairs(input int m, input int k, input int n, input int ga, input int gb);
    int exp_n; exp_n = 0;
    for (int r = 0; r < m; r++)
      for (int c = 0; c < n; c++)
        for (int x = 0; x < k; x++)
          if (A[r][x] != 0 && B[x][c] != 0) begin
            string key;
            key = $sformatf("%0d %0d %0d %0d %0d %0d", r / (m / ga), c / (n / gb), A[r][x], B[x][c],
                            r % (m / ga), c % (n / gb));
            chk({"pair ", key}, pairs.exists(key) ? pairs[key] : 0, 1);
            exp_n++;
          end
    chk("pair count", pairs.num(), exp_n);
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; mode = MODE_SSMM; nt = 0;
    foreach (A[i, j]) begin A[i][j] = 0; B[i][j] = 0; end
    repeat (2) @(negedge clk); rst_n = 1;

    // reference example: a1..a5 = 1..5, b1..b8 = 11..18
    A[0][0] = 1; A[1][1] = 3; A[0][2] = 2; A[2][2] = 4; A[3][3] = 5;
    B[0][1] = 11; B[0][3] = 12; B[1][0] = 13; B[1][3] = 14;
    B[2][1] = 15; B[2][2] = 16; B[2][3] = 17; B[3][0] = 18;
    encode(4, 4, 4, 2, 2);
    run();
    chk("fig5 dispatch cycles", dispatch, 5);
    check_pairs(4, 4, 4, 2, 2);

    // random SSMM
    for (int t = 0; t < 20; t++) begin
      foreach (A[i, j]) begin
        A[i][j] = (i < 8 && j < 12 && $urandom_range(0, 3) == 0) ? 16 * i + j + 1 : 0;
        B[j][i] = (i < 8 && j < 12 && $urandom_range(0, 3) == 0) ? 1000 + 16 * j + i : 0;
      end
      encode(8, 12, 8, 2, 2);
      run();
      check_pairs(8, 12, 8, 2, 2);
    end

    // SDMM reference example on one PE: A = [a1 0 0 a2; 0 a3 0 0], B dense
    foreach (A[i, j]) begin A[i][j] = 0; B[i][j] = 0; end
    A[0][0] = 1; A[0][3] = 2; A[1][1] = 3;
    // B is 4 x 4 dense, two column groups of N_t = 2 (group 0 is the
    // reference's 4 x 2 B); A occupies PE row 0 only
    for (int r = 0; r < 4; r++) for (int c = 0; c < 4; c++) B[r][c] = 11 + 4 * r + c;
    encode(2, 4, 4, 1, 2);
    mode = MODE_SDMM; nt = 2;
    run();
    chk("fig7 dispatch cycles", dispatch, 6);
    check_pairs(2, 4, 4, 1, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
