// tb_iops_pe: checks one processing element on its own.
//  * SSMM: a random stream of (A, B) pairs, some cycles with only one side
//    valid, goes into bank 0. Through the read port every row's length,
//    every vc_addr entry, and the value and column it points at must match
//    a software model of the append-and-link scheme.
//  * Forwarding: a_*_o / b_*_o must equal the previous cycle's inputs.
//  * SDMM: a random stream into bank 1 accumulates onto a dense M_t x N_t
//    block (including addresses beyond PSUM_DEPTH, the merged second value
//    buffer); every entry is compared with the model, unwritten ones read
//    zero. Meanwhile bank 0 must still hold the SSMM data.
//  * Overflow: exceeding max_row_len in one row sets `overflow`; clr resets
//    the bank (row lengths read zero) and the flag.
module tb_iops_pe;
  import iops_pkg::*;
  localparam int DEPTH = PSUM_DEPTH;
  localparam int AW = $clog2(DEPTH);
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  mode_e mode; logic wbank, rbank, rd_dense, clr, clr_bank, overflow, active;
  logic [7:0] max_row_len;
  logic a_valid, b_valid, a_valid_o, b_valid_o;
  logic [63:0] a_val, b_val, a_val_o, b_val_o, rd_val;
  logic [15:0] a_row, b_col, a_row_o, b_col_o, rd_col;
  logic [AW-1:0] rd_row, rd_vc_addr, rd_vc, rd_col_addr;
  logic [7:0] rd_row_len;
  logic [AW:0] rd_val_addr;

  iops_pe dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // forwarding check
  logic pv_a, pv_b; logic [63:0] pa, pb;
  always @(posedge clk) begin
    #1;
    if (rst_n) begin
      chk("fwd a valid", a_valid_o, pv_a); chk("fwd b valid", b_valid_o, pv_b);
      if (pv_a) chk("fwd a val", a_val_o, pa);
      if (pv_b) chk("fwd b val", b_val_o, pb);
    end
  end
  always @(negedge clk) begin pv_a = a_valid; pv_b = b_valid; pa = a_val; pb = b_val; end

  function automatic logic [63:0] r2b(input real r); return $realtobits(r); endfunction

  real sv_val [64][$];   // SSMM model: per row, list of values in arrival order
  int  sv_col [64][$];
  real dense [512];
  bit  dw [512];

  initial begin
    mode = MODE_SSMM; wbank = 0; rbank = 0; rd_dense = 0; clr = 0; clr_bank = 0;
    max_row_len = 8; a_valid = 0; b_valid = 0; a_val = 0; b_val = 0; a_row = 0; b_col = 0;
    rd_row = 0; rd_vc_addr = 0; rd_col_addr = 0; rd_val_addr = 0;
    repeat (2) @(negedge clk); rst_n = 1;

    // ---- SSMM into bank 0: 16 rows x up to 8 psums ----
    for (int n = 0; n < 300; n++) begin
      int r; real av, bv;
      r = $urandom_range(0, 15);
      av = real'($urandom_range(1, 50)) / 4.0; bv = real'($urandom_range(1, 50)) / 8.0;
      a_valid = $urandom_range(0, 5) != 0; b_valid = $urandom_range(0, 5) != 0;
      if (a_valid && b_valid && sv_val[r].size() >= 8) a_valid = 0;
      a_val = r2b(av); b_val = r2b(bv); a_row = 16'(r); b_col = 16'($urandom_range(0, 40));
      if (a_valid && b_valid) begin sv_val[r].push_back(av * bv); sv_col[r].push_back(b_col); end
      @(negedge clk);
    end
    a_valid = 0; b_valid = 0;
    repeat (3) @(negedge clk);
    chk("active idle", active, 0);
    for (int r = 0; r < 16; r++) begin
      rd_row = AW'(r); #1;
      chk($sformatf("row_len %0d", r), rd_row_len, sv_val[r].size());
      for (int i = 0; i < sv_val[r].size(); i++) begin
        rd_vc_addr = AW'(r * 8 + i); #1;
        rd_col_addr = rd_vc; rd_val_addr = (AW+1)'(rd_vc); #1;
        chk("ssmm col", rd_col, sv_col[r][i]);
        chk("ssmm val", rd_val, r2b(sv_val[r][i]));
      end
    end
    chk("no overflow", overflow, 0);

    // ---- SDMM into bank 1: M_t = 12 rows x N_t = 40 columns (480 > 256) ----
    mode = MODE_SDMM; wbank = 1; max_row_len = 40;
    foreach (dense[i]) begin dense[i] = 0.0; dw[i] = 0; end
    for (int n = 0; n < 1500; n++) begin
      int r, c; real av, bv;
      r = $urandom_range(0, 11); c = $urandom_range(0, 39);
      av = real'($urandom_range(1, 50)) / 4.0; bv = real'($urandom_range(1, 50)) / 8.0;
      a_valid = $urandom_range(0, 3) != 0; b_valid = $urandom_range(0, 3) != 0;
      a_val = r2b(av); b_val = r2b(bv); a_row = 16'(r); b_col = 16'(c);
      if (a_valid && b_valid) begin dense[r * 40 + c] += av * bv; dw[r * 40 + c] = 1; end
      @(negedge clk);
    end
    a_valid = 0; b_valid = 0;
    repeat (3) @(negedge clk);
    rbank = 1; rd_dense = 1;
    for (int i = 0; i < 480; i++) begin
      rd_val_addr = (AW+1)'(i); #1;
      chk("sdmm val", rd_val, r2b(dense[i]));
    end
    chk("no overflow sdmm", overflow, 0);
    // bank 0 untouched
    rbank = 0; rd_dense = 0; rd_row = 3; #1;
    chk("bank0 kept", rd_row_len, sv_val[3].size());

    // ---- overflow: 9 psums into a row of max_row_len 8 (bank 1, SSMM) ----
    @(negedge clk); clr = 1; clr_bank = 1; @(negedge clk); clr = 0;
    mode = MODE_SSMM; max_row_len = 8;
    for (int n = 0; n < 9; n++) begin
      a_valid = 1; b_valid = 1; a_val = r2b(1.0); b_val = r2b(2.0); a_row = 5; b_col = 16'(n);
      @(negedge clk);
      if (n == 7) begin a_valid = 1; end
    end
    a_valid = 0; b_valid = 0;
    repeat (3) @(negedge clk);
    chk("overflow raised", overflow, 1);
    rbank = 1; rd_row = 5; #1;
    chk("row kept at max", rd_row_len, 8);
    @(negedge clk); clr = 1; clr_bank = 1; @(negedge clk); clr = 0; #1;
    chk("overflow cleared", overflow, 0);
    chk("row cleared", rd_row_len, 0);
    rbank = 0; rd_row = 3; #1;
    chk("other bank kept", rd_row_len, sv_val[3].size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
