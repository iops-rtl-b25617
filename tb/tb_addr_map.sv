// tb_addr_map: one address-mapping unit reading a behavioural model of its
// PE row (two PEs), with random back-pressure on the C output.
//  * The reference's mapping example (Fig. 6) in PE 0: psums a1*b2 (col 1,
//    row 0), a3*b4 (col 1, row 1), a2*b6 (col 0, row 0), a2*b7 (col 1,
//    row 0) must become C = (a2*b6, 0, 0), (a1*b2 + a2*b7, 0, 1),
//    (a3*b4, 1, 1).
//  * Random SSMM contents in both PEs: every (row, column) of C must come
//    out exactly once with the sum of its psums, rows ascending within a PE and
//    columns ascending within a row.
//  * SDMM: both PEs' dense blocks come out in full (unwritten = 0).
//  * clr must pulse once per run, before done.
module tb_addr_map;
  import iops_pkg::*;
  localparam int NB = 2;
  localparam int AW = $clog2(PSUM_DEPTH);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic start, busy, done, sort_err, clr, c_valid, c_ready;
  mode_e mode; logic [15:0] mt, nt; logic [7:0] max_row_len; logic [31:0] row_base, col_base;
  logic [0:0] rd_sel; logic [AW-1:0] rd_row, rd_vc_addr, rd_vc, rd_col_addr;
  logic [7:0] rd_row_len; logic [15:0] rd_col; logic [AW:0] rd_val_addr; logic [63:0] rd_val;
  c_elem_t c_elem;

  addr_map #(.NB(NB)) dut (.*);

  // PE row model
  int  m_len [NB][PSUM_DEPTH], m_vc [NB][PSUM_DEPTH], m_col [NB][PSUM_DEPTH], m_n [NB];
  real m_val [NB][2 * PSUM_DEPTH];
  always_comb begin
    rd_row_len = 8'(m_len[rd_sel][rd_row]);
    rd_vc      = AW'(m_vc[rd_sel][rd_vc_addr]);
    rd_col     = 16'(m_col[rd_sel][rd_col_addr]);
    rd_val     = $realtobits(m_val[rd_sel][rd_val_addr]);
  end

  int checks = 0, failures = 0;
  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  real got [string]; int clr_n, last_row, last_col;
  always @(posedge clk) begin
    c_ready <= $urandom_range(0, 3) != 0;
    if (clr) clr_n++;
    if (c_valid && c_ready) begin
      string k; k = $sformatf("%0d,%0d", c_elem.row, c_elem.col);
      chk("duplicate", got.exists(k), 0);
      got[k] = $bitstoreal(c_elem.value);
      // order within one PE: rows ascending, columns ascending in a row
      if (mode == MODE_SSMM && (int'(c_elem.col) - int'(col_base)) / int'(nt) ==
                               (last_col - int'(col_base)) / int'(nt)) begin
        chk("row order", int'(c_elem.row) >= last_row, 1);
        if (int'(c_elem.row) == last_row) chk("col order", int'(c_elem.col) > last_col, 1);
      end
      last_row = c_elem.row; last_col = c_elem.col;
    end
  end

  task automatic clear_model();
    foreach (m_len[h, i]) begin m_len[h][i] = 0; m_vc[h][i] = 0; m_col[h][i] = 0; end
    foreach (m_val[h, i]) m_val[h][i] = 0.0;
    m_n = '{0, 0};
  endtask

  task automatic add_psum(input int h, input int row, input int col, input real v);
    m_val[h][m_n[h]] = v; m_col[h][m_n[h]] = col;
    m_vc[h][row * max_row_len + m_len[h][row]] = m_n[h];
    m_len[h][row]++; m_n[h]++;
  endtask

  task automatic run();
    got.delete(); clr_n = 0; last_row = -1; last_col = -1;
    @(negedge clk); start = 1; @(negedge clk); start = 0;
    while (!done) @(negedge clk);
    chk("clr once", clr_n, 1);
    chk("sort_err", sort_err, 0);
  endtask

  task automatic expect_c(input int row, input int col, input real v);
    string k; k = $sformatf("%0d,%0d", row, col);
    chk({"present ", k}, got.exists(k), 1);
    if (got.exists(k)) chk({"value ", k}, $realtobits(got[k]), $realtobits(v));
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    start = 0; mode = MODE_SSMM; row_base = 0; col_base = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    // Fig. 6: a1=1, a2=2, a3=3; b2=0.75, b4=0.75, b6=1.5, b7=0.25
    clear_model(); mt = 2; nt = 2; max_row_len = 4;
    add_psum(0, 0, 1, 1.0 * 0.75);
    add_psum(0, 1, 1, 3.0 * 0.75);
    add_psum(0, 0, 0, 2.0 * 1.5);
    add_psum(0, 0, 1, 2.0 * 0.25);
    run();
    chk("fig6 count", got.num(), 3);
    expect_c(0, 0, 3.0); expect_c(0, 1, 0.75 + 0.5); expect_c(1, 1, 2.25);

    // random SSMM, offsets applied
    for (int t = 0; t < 10; t++) begin
      real exp_v [string];
      exp_v.delete();
      clear_model(); mt = 16; nt = 8; max_row_len = 12; row_base = 100 * t; col_base = 7;
      for (int n = 0; n < 150; n++) begin
        int h, r, c; real v; string k;
        h = $urandom_range(0, 1); r = $urandom_range(0, 15); c = $urandom_range(0, 7);
        v = real'($urandom_range(1, 64)) / 16.0;
        if (m_len[h][r] < 12) begin
          add_psum(h, r, c, v);
          k = $sformatf("%0d,%0d", 100 * t + r, 7 + h * 8 + c);
          if (exp_v.exists(k)) exp_v[k] += v; else exp_v[k] = v;
        end
      end
      run();
      chk("ssmm count", got.num(), exp_v.num());
      foreach (exp_v[k]) begin
        checks++;
        if (!got.exists(k) || got[k] != exp_v[k]) begin failures++; $display("C %s wrong", k); end
      end
    end

    // SDMM: 5 x 6 dense per PE
    clear_model(); mode = MODE_SDMM; mt = 5; nt = 6; max_row_len = 6; row_base = 3; col_base = 0;
    for (int h = 0; h < NB; h++) for (int i = 0; i < 30; i++) m_val[h][i] = real'(h * 100 + i) + 0.5;
    run();
    chk("sdmm count", got.num(), 60);
    for (int h = 0; h < NB; h++)
      for (int r = 0; r < 5; r++)
        for (int c = 0; c < 6; c++) expect_c(3 + r, h * 6 + c, real'(h * 100 + r * 6 + c) + 0.5);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
