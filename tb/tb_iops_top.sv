// tb_iops_top: end-to-end test of the accelerator at its default size
// (8 x 8 PEs, full buffer depths).
//
// The testbench plays the host: it generates random matrices, cuts them
// into tiles, writes each tile's CSC slice of A and CSR slice of B into the
// DRAM model and sends one tile command per tile. It then reads C back from
// DRAM and compares every element with a product computed here in real
// arithmetic. Values are small multiples of 1/4, so every sum is exact and
// independent of the order of addition.
//
// Workload 1 (SSMM): A 32 x 12 and B 12 x 16, both sparse; two A row
//   blocks (M_t = 2), one B column block (N_t = 2), K split in two slices,
//   so psums of two tiles accumulate in one PE bank. A slices carry whole
//   columns, so the encoder must drop rows outside the block.
// Workload 2 (SDMM): A 288 x 16 sparse, B 16 x 64 dense; M_t = 36,
//   N_t = 8, K in four slices. 36 x 8 psums per PE exceed one value buffer,
//   so the merged extension is used.
// Mechanisms counted (each must occur): both modes, K accumulation,
// stage overlap (pipelining), scheduler index mismatch skips, encoder
// out-of-block skips, equal-column psum accumulation, SDMM merged-buffer
// use, DRAM back-pressure, arbitration between address-mapping units.
module tb_iops_top;
  import iops_pkg::*;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic               cmd_valid, cmd_ready;
  tile_cmd_t          cmd;
  logic               rd_req_valid, rd_req_ready, rd_resp_valid;
  logic [31:0]        rd_req_addr;
  logic [63:0]        rd_resp_data;
  logic               wr_valid, wr_ready;
  logic [31:0]        wr_addr;
  logic [63:0]        wr_data;
  logic [31:0]        c_count;
  logic               idle, overflow;
  localparam logic [31:0] C_BASE = 32'h0010_0000;

  iops_top dut (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data,
    .c_base(C_BASE), .c_count, .idle, .overflow
  );

  dram_model #(.LAT(5), .STALL(5)) dram (
    .clk, .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  int checks = 0, failures = 0;
  int cycles = 0;

  // ---------------- matrices ----------------
  localparam int MAXD = 320;
  real A [MAXD][16];
  real B [16][64];
  int  M, K, N;
  int unsigned next_addr = 32'h100;

  function automatic real rnd_val();
    int v;
    v = $urandom_range(1, 14) - 7;
    if (v <= 0) v = v - 1;
    return real'(v) / 4.0;
  endfunction

  task automatic gen(input int m, input int k, input int n,
                     input int dens_a, input int dens_b);  // densities in percent
    M = m; K = k; N = n;
    for (int r = 0; r < m; r++)
      for (int c = 0; c < k; c++)
        A[r][c] = ($urandom_range(0, 99) < dens_a) ? rnd_val() : 0.0;
    for (int r = 0; r < k; r++)
      for (int c = 0; c < n; c++)
        B[r][c] = ($urandom_range(0, 99) < dens_b) ? rnd_val() : 0.0;
  endtask

  function automatic int unsigned put(input logic [63:0] w);
    dram.mem[next_addr] = w;
    next_addr++;
    return next_addr - 1;
  endfunction

  tile_cmd_t cmd_q [$];

  // build one tile: A rows via the encoder filter, B columns [cb, cb + NB*nt)
  task automatic make_tile(input mode_e mode, input int rb, input int cb,
                           input int mt, input int nt, input int maxlen,
                           input int k0, input int kt, input bit last);
    tile_cmd_t t;
    int unsigned a_ptr, a_idx, a_val, b_ptr, b_idx, b_val;
    int na = 0, nb = 0;
    int ai [$], bi [$];
    real av [$], bv [$];
    int ap [$], bp [$];
    for (int d = 0; d < kt; d++) begin
      ap.push_back(na);
      for (int r = 0; r < M; r++)
        if (A[r][k0+d] != 0.0) begin ai.push_back(r); av.push_back(A[r][k0+d]); na++; end
      bp.push_back(nb);
      for (int c = 0; c < N; c++) begin
        if (mode == MODE_SDMM) begin
          if (c >= cb && c < cb + GNB * nt) begin bi.push_back(c); bv.push_back(B[k0+d][c]); nb++; end
        end else if (B[k0+d][c] != 0.0) begin
          bi.push_back(c); bv.push_back(B[k0+d][c]); nb++;
        end
      end
    end
    ap.push_back(na);
    bp.push_back(nb);
    if (na > ENC_DEPTH || nb > ENC_DEPTH) begin
      $display("tile too large for the encoders: %0d %0d", na, nb);
      failures++;
    end
    a_ptr = next_addr; foreach (ap[i]) void'(put(64'(ap[i])));
    a_idx = next_addr; foreach (ai[i]) void'(put(64'(ai[i])));
    a_val = next_addr; foreach (av[i]) void'(put($realtobits(av[i])));
    b_ptr = next_addr; foreach (bp[i]) void'(put(64'(bp[i])));
    b_idx = next_addr; foreach (bi[i]) void'(put(64'(bi[i])));
    b_val = next_addr; foreach (bv[i]) void'(put($realtobits(bv[i])));
    t = '0;
    t.mode = mode; t.last_k = last;
    t.mt = IDX_W'(mt); t.nt = IDX_W'(nt); t.max_row_len = LEN_W'(maxlen);
    t.kt = OPTR_W'(kt); t.a_nnz = OPTR_W'(na); t.b_nnz = OPTR_W'(nb);
    t.a_row_base = rb; t.b_col_base = cb;
    t.a_ptr_addr = a_ptr; t.a_idx_addr = a_idx; t.a_val_addr = a_val;
    t.b_ptr_addr = b_ptr; t.b_idx_addr = b_idx; t.b_val_addr = b_val;
    cmd_q.push_back(t);
  endtask

  // expected result of one output block
  real exp_val [int];   // key = row * 65536 + col
  int  products;

  task automatic expect_block(input mode_e mode, input int rb, input int rows,
                              input int cb, input int cols);
    for (int r = rb; r < rb + rows; r++)
      for (int c = cb; c < cb + cols; c++) begin
        real s = 0.0;
        bit any = 0;
        for (int k = 0; k < K; k++)
          if (A[r][k] != 0.0 && B[k][c] != 0.0) begin
            s += A[r][k] * B[k][c];
            any = 1;
            products++;
          end
        if (any || mode == MODE_SDMM) exp_val[r * 65536 + c] = s;
      end
  endtask

  task automatic run_and_check(input string name);
    int base_count;
    int got [int];
    base_count = c_count;
    fork
      begin
        // drive at the falling edge, where cmd_ready is settled
        while (cmd_q.size() > 0) begin
          @(negedge clk);
          cmd       = cmd_q[0];
          cmd_valid = 1'b1;
          while (!cmd_ready) @(negedge clk);
          @(posedge clk);
          void'(cmd_q.pop_front());
        end
        @(negedge clk);
        cmd_valid = 1'b0;
      end
    join
    repeat (5) @(posedge clk);
    while (!idle) @(posedge clk);
    repeat (5) @(posedge clk);
    checks++;
    if (c_count - base_count != exp_val.size()) begin
      failures++;
      $display("%s: %0d elements of C, expected %0d", name, c_count - base_count, exp_val.size());
    end
    for (int n = base_count; n < c_count; n++) begin
      real v;
      int r, c, key;
      v   = $bitstoreal(dram.mem[C_BASE + 2 * n]);
      r   = int'(dram.mem[C_BASE + 2 * n + 1][63:32]);
      c   = int'(dram.mem[C_BASE + 2 * n + 1][31:0]);
      key = r * 65536 + c;
      checks++;
      if (!exp_val.exists(key) || got.exists(key) || exp_val[key] != v) begin
        failures++;
        if (failures < 10)
          $display("%s: bad C element (%0d,%0d) = %f expected %f present=%0d dup=%0d", name, r, c, v,
                   exp_val.exists(key) ? exp_val[key] : 0.0, exp_val.exists(key), got.exists(key));
      end
      got[key] = 1;
    end
    checks++;
    if (overflow) begin
      failures++;
      $display("%s: overflow flagged", name);
    end
    $display("%s: %0d elements of C checked", name, c_count - base_count);
  endtask

  // ---------------- mechanism counters ----------------
  int n_ssmm = 0, n_sdmm = 0, n_kacc = 0, n_overlap = 0, n_skip = 0, n_enc_skip = 0;
  int n_merged = 0, n_arb = 0;

  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (dut.u_ctrl.sched_start) begin
      if (dut.sched_cmd.mode == MODE_SDMM) n_sdmm++; else n_ssmm++;
    end
    if (dut.u_ctrl.c_release && !dut.sched_cmd.last_k) n_kacc++;
    if ($countones(dut.u_ctrl.stage_busy) >= 2) n_overlap++;
    if (dut.u_sched.busy && !dut.u_sched.finished && (dut.u_sched.a_lt || dut.u_sched.a_gt)) n_skip++;
    if (dut.u_enc_a.busy && dut.u_enc_a.d < dut.u_enc_a.kt && !dut.u_enc_a.at_line_end && !dut.u_enc_a.in_blk)
      n_enc_skip++;
    if (|dut.u_array.g_row[0].g_pe[0].u_pe.written[0][511:256] ||
        |dut.u_array.g_row[0].g_pe[0].u_pe.written[1][511:256]) n_merged++;
    if ($countones(dut.am_valid) >= 2) n_arb++;
  end

  task automatic need(input string what, input int n);
    checks++;
    if (n == 0) begin
      failures++;
      $display("mechanism never exercised: %s", what);
    end else begin
      $display("  %-34s %0d", what, n);
    end
  endtask

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cmd_valid = 1'b0;
    cmd       = '0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;

    // ---------- SSMM ----------
    gen(32, 12, 16, 25, 30);
    products = 0;
    exp_val.delete();
    for (int rbk = 0; rbk < 2; rbk++) begin
      make_tile(MODE_SSMM, rbk * 16, 0, 2, 2, 24, 0, 6, 1'b0);
      make_tile(MODE_SSMM, rbk * 16, 0, 2, 2, 24, 6, 6, 1'b1);
      expect_block(MODE_SSMM, rbk * 16, 16, 0, 16);
    end
    run_and_check("SSMM");
    $display("  psum pairs %0d, elements of C %0d", products, exp_val.size());
    checks++;
    if (products <= exp_val.size()) begin
      failures++;
      $display("SSMM workload has no equal-column psums to accumulate");
    end

    // ---------- SDMM ----------
    gen(288, 16, 64, 3, 100);
    products = 0;
    exp_val.delete();
    for (int kk = 0; kk < 4; kk++)
      make_tile(MODE_SDMM, 0, 0, 36, 8, 0, kk * 4, 4, kk == 3);
    expect_block(MODE_SDMM, 0, 288, 0, 64);
    run_and_check("SDMM");

    $display("cycles %0d; mechanisms:", cycles);
    need("SSMM tiles", n_ssmm);
    need("SDMM tiles", n_sdmm);
    need("K-slice accumulation in PE bank", n_kacc);
    need("cycles with stages overlapped", n_overlap);
    need("scheduler index mismatch steps", n_skip);
    need("encoder out-of-block skips", n_enc_skip);
    need("SDMM merged value buffer in use", n_merged);
    need("address-map arbitration conflicts", n_arb);
    need("DRAM read stalls", dram.rd_stalls);
    need("DRAM write stalls", dram.wr_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
