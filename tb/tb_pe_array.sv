// tb_pe_array: a 3 x 3 array driven the way the scheduler drives it: each
// cycle a random subset of PE rows gets an A element and a random subset
// of PE columns a B element. Every PE(g,h) must compute exactly the
// products of the pairs issued together on row g and column h, despite
// the skewed forwarding through the grid.
//  * SDMM into bank 0: the dense psum block of every PE, read through the
//    per-row read port (rd_sel), must equal the model's accumulation.
//  * SSMM into bank 1: every PE's row lengths and the (value, column) list
//    of each row, in arrival order, must match the model.
//  * busy must fall once the last psum is written; clr empties one row.
module tb_pe_array;
  import iops_pkg::*;
  localparam int NA = 3, NB = 3;
  localparam int AW = $clog2(PSUM_DEPTH);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mode_e mode; logic wbank, rbank, rd_dense, busy, overflow, clr_bank;
  logic [7:0] max_row_len;
  logic [NA-1:0] pa_valid, clr; logic [NA-1:0][63:0] pa_val, rd_val; logic [NA-1:0][15:0] pa_row, rd_col;
  logic [NB-1:0] pb_valid; logic [NB-1:0][63:0] pb_val; logic [NB-1:0][15:0] pb_col;
  logic [NA-1:0][1:0] rd_sel; logic [NA-1:0][AW-1:0] rd_row, rd_vc_addr, rd_vc, rd_col_addr;
  logic [NA-1:0][7:0] rd_row_len; logic [NA-1:0][AW:0] rd_val_addr;

  pe_array #(.NA(NA), .NB(NB)) dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  real dense [NA][NB][64];
  real sv_val [NA][NB][8][$];
  int  sv_col [NA][NB][8][$];

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic issue(input int n, input int nrow, input int ncol, input bit dense_mode);
    for (int t = 0; t < n; t++) begin
      real av [NA], bv [NB];
      for (int g = 0; g < NA; g++) begin
        pa_valid[g] = $urandom_range(0, 2) != 0; pa_row[g] = 16'($urandom_range(0, nrow - 1));
        av[g] = real'($urandom_range(1, 40)) / 4.0; pa_val[g] = $realtobits(av[g]);
      end
      for (int h = 0; h < NB; h++) begin
        pb_valid[h] = $urandom_range(0, 2) != 0; pb_col[h] = 16'($urandom_range(0, ncol - 1));
        bv[h] = real'($urandom_range(1, 40)) / 8.0; pb_val[h] = $realtobits(bv[h]);
      end
      // keep rows within max_row_len: drop an A element whose row is full
      if (!dense_mode)
        for (int g = 0; g < NA; g++)
          for (int h = 0; h < NB; h++)
            if (pb_valid[h] && sv_val[g][h][pa_row[g]].size() >= 8) pa_valid[g] = 1'b0;
      for (int g = 0; g < NA; g++)
        for (int h = 0; h < NB; h++)
          if (pa_valid[g] && pb_valid[h]) begin
            if (dense_mode) dense[g][h][pa_row[g] * ncol + pb_col[h]] += av[g] * bv[h];
            else begin
              sv_val[g][h][pa_row[g]].push_back(av[g] * bv[h]);
              sv_col[g][h][pa_row[g]].push_back(pb_col[h]);
            end
          end
      @(negedge clk);
    end
    pa_valid = '0; pb_valid = '0;
  endtask

  initial begin
    int waitc;
    mode = MODE_SDMM; wbank = 0; rbank = 0; rd_dense = 1; clr = '0; clr_bank = 0;
    max_row_len = 8; pa_valid = '0; pb_valid = '0; pa_val = '0; pb_val = '0; pa_row = '0; pb_col = '0;
    rd_sel = '0; rd_row = '0; rd_vc_addr = '0; rd_col_addr = '0; rd_val_addr = '0;
    foreach (dense[g, h, i]) dense[g][h][i] = 0.0;
    repeat (2) @(negedge clk); rst_n = 1;

    // SDMM: 6 rows x 8 columns per PE
    issue(400, 6, 8, 1);
    waitc = 0;
    while (busy) begin @(negedge clk); waitc++; end
    chk("busy falls", waitc <= NA + NB + 3, 1);
    for (int h = 0; h < NB; h++)
      for (int i = 0; i < 48; i++) begin
        for (int g = 0; g < NA; g++) begin rd_sel[g] = 2'(h); rd_val_addr[g] = (AW+1)'(i); end
        #1;
        for (int g = 0; g < NA; g++) chk($sformatf("dense %0d %0d %0d", g, h, i), rd_val[g], $realtobits(dense[g][h][i]));
      end
    chk("no overflow", overflow, 0);

    // SSMM into bank 1: 8 rows, max_row_len 8
    @(negedge clk);
    mode = MODE_SSMM; wbank = 1;
    issue(150, 8, 30, 0);
    while (busy) @(negedge clk);
    rbank = 1; rd_dense = 0;
    for (int h = 0; h < NB; h++)
      for (int r = 0; r < 8; r++)
        for (int g = 0; g < NA; g++) begin
          rd_sel[g] = 2'(h); rd_row[g] = AW'(r); #1;
          chk("row_len", rd_row_len[g], sv_val[g][h][r].size());
          for (int i = 0; i < sv_val[g][h][r].size(); i++) begin
            rd_vc_addr[g] = AW'(r * 8 + i); #1;
            rd_col_addr[g] = rd_vc[g]; rd_val_addr[g] = (AW+1)'(rd_vc[g]); #1;
            chk("ssmm col", rd_col[g], sv_col[g][h][r][i]);
            chk("ssmm val", rd_val[g], $realtobits(sv_val[g][h][r][i]));
          end
        end
    // clr row 1, bank 1
    @(negedge clk); clr = 3'b010; clr_bank = 1; @(negedge clk); clr = '0;
    for (int h = 0; h < NB; h++)
      for (int g = 0; g < NA; g++) begin
        int tot; tot = 0;
        rd_sel[g] = 2'(h);
        for (int r = 0; r < 8; r++) begin rd_row[g] = AW'(r); #1; tot += rd_row_len[g]; end
        if (g == 1) chk("cleared row", tot, 0);
        else begin
          int e; e = 0;
          for (int r = 0; r < 8; r++) e += sv_val[g][h][r].size();
          chk("other rows kept", tot, e);
        end
      end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
