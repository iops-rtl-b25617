// iops_top: the IOPS sparse matrix multiplication accelerator.
//
// C = A x B is computed tile by tile. The host splits A into row blocks
// and B into column blocks (and both along K) and sends one tile command
// per (A block, B block, K slice); each command names the tile's CSC slice
// of A and CSR slice of B in DRAM. Per tile:
//   1. the DMA copies both slices into the RP-CSC encoder (A) and the
//      CP-CSR encoder (B), which split them into GNA row groups and GNB
//      column groups and write Buffer A and Buffer B;
//   2. the scheduler matches non-empty A columns with non-empty B rows and
//      streams the group elements into the GNA x GNB PE array; PE(g,h)
//      forms the outer product of A group g and B group h (SSMM) or adds
//      it into a dense psum block (SDMM);
//   3. one address-mapping unit per PE row sorts each output row's psums
//      by column, adds equal columns and emits elements of C, which a
//      round-robin arbiter passes to the DMA for storing.
// The top controller overlaps the three steps on consecutive tiles using
// the ping-pong banks of the buffers and PEs.
//
// Interface: tile commands on cmd_valid/cmd_ready; a simple DRAM port with
// an in-order read channel and a write channel (the DRAM itself is
// outside); C goes to DRAM at c_base as (value, {row, col}) word pairs and
// c_count counts the elements written. `idle` is high when no tile is in
// flight. `overflow` reports a dropped element in an encoder or a PE
// (the reference instead spills such data to DRAM, not built here).
//
// Lint notes: each stage uses only the command fields it needs, so parts
// of the per-stage command copies, the busy outputs of the encoders and
// scheduler, stage_busy and the upper bits of the 16-bit encoder address
// (the encoders hold 256 entries) are left unread on purpose. rst_n is
// reported as used both asynchronously (flops) and synchronously; the
// synchronous use is the `disable iff` of the assertions in the blocks.
module iops_top
  import iops_pkg::*;
#(
  parameter int unsigned NA = GNA,
  parameter int unsigned NB = GNB
) (
  input  logic               clk,
  input  logic               rst_n,
  // tile commands
  input  logic               cmd_valid,
  output logic               cmd_ready,
  input  tile_cmd_t          cmd,
  // DRAM read channel
  output logic               rd_req_valid,
  input  logic               rd_req_ready,
  output logic [ADDR_W-1:0]  rd_req_addr,
  input  logic               rd_resp_valid,
  input  logic [DATA_W-1:0]  rd_resp_data,
  // DRAM write channel
  output logic               wr_valid,
  input  logic               wr_ready,
  output logic [ADDR_W-1:0]  wr_addr,
  output logic [DATA_W-1:0]  wr_data,
  // output placement and status
  input  logic [ADDR_W-1:0]  c_base,
  output logic [31:0]        c_count,
  output logic               idle,
  output logic               overflow
);
  localparam int unsigned GAW = $clog2(GRP_DEPTH);
  localparam int unsigned LAW = $clog2(LIST_DEPTH);
  localparam int unsigned AWE = $clog2(ENC_DEPTH);
  localparam int unsigned PAW = $clog2(PSUM_DEPTH);
  localparam int unsigned NAW = (NA > 1) ? $clog2(NA) : 1;
  localparam int unsigned NBW = (NB > 1) ? $clog2(NB) : 1;

  // ---------------- control ----------------
  logic      dma_start, dma_done, enc_start, sched_start, sched_done, map_start;
  tile_cmd_t dma_cmd, enc_cmd, sched_cmd, map_cmd;
  logic      enc_a_done, enc_b_done, enc_bank, cmp_bank, pe_wbank, map_bank;
  logic      array_busy;
  logic [NA-1:0] map_done;
  logic [2:0]    stage_busy;
  logic          ctrl_idle, store_busy, dma_busy;

  top_ctrl #(.NA(NA)) u_ctrl (
    .clk, .rst_n, .cmd_valid, .cmd_ready, .cmd,
    .dma_start, .dma_cmd, .dma_done,
    .enc_start, .enc_cmd, .enc_a_done, .enc_b_done, .enc_bank,
    .sched_start, .sched_cmd, .sched_done, .array_busy, .cmp_bank, .pe_wbank,
    .map_start, .map_cmd, .map_done, .map_bank,
    .stage_busy, .idle(ctrl_idle)
  );

  // ---------------- DMA ----------------
  logic          enc_we;
  enc_sel_e      enc_sel;
  logic [OPTR_W-1:0] enc_addr;
  logic [DATA_W-1:0] enc_data;
  logic          c_valid, c_ready;
  c_elem_t       c_elem;

  iops_dma u_dma (
    .clk, .rst_n,
    .load_start(dma_start), .cmd(dma_cmd), .load_busy(dma_busy), .load_done(dma_done),
    .rd_req_valid, .rd_req_ready, .rd_req_addr, .rd_resp_valid, .rd_resp_data,
    .enc_we, .enc_sel, .enc_addr, .enc_data,
    .c_base, .c_valid, .c_ready, .c_elem, .c_count, .store_busy,
    .wr_valid, .wr_ready, .wr_addr, .wr_data
  );

  // ---------------- encoders and buffers ----------------
  logic ovf_a, ovf_b, ovf_pe;

  logic                   a_el_we, b_el_we;
  logic [NAW-1:0]         a_el_grp;
  logic [NBW-1:0]         b_el_grp;
  logic [GAW-1:0]         a_el_addr, b_el_addr;
  logic [DATA_W-1:0]      a_el_val, b_el_val;
  logic [IDX_W-1:0]       a_el_idx, b_el_idx;
  logic [NA-1:0]          a_len_we;
  logic [NB-1:0]          b_len_we;
  logic [NA-1:0][GAW-1:0] a_len_addr;
  logic [NB-1:0][GAW-1:0] b_len_addr;
  logic [NA-1:0][LEN_W-1:0] a_len_val;
  logic [NB-1:0][LEN_W-1:0] b_len_val;
  logic                   a_list_we, b_list_we, a_all_we, b_all_we;
  logic [LAW-1:0]         a_list_addr, b_list_addr;
  logic [IDX_W-1:0]       a_list_idx, b_list_idx;
  logic [NA-1:0]          a_list_bm;
  logic [NB-1:0]          b_list_bm;
  logic [LAW:0]           a_all_len, b_all_len;
  logic                   enc_a_busy, enc_b_busy;

  partition_encoder #(.G(NA)) u_enc_a (
    .clk, .rst_n,
    .in_we(enc_we && (enc_sel inside {ENC_A_PTR, ENC_A_IDX, ENC_A_VAL})),
    .in_sel(2'(enc_sel)), .in_addr(enc_addr[AWE-1:0]), .in_data(enc_data),
    .start(enc_start), .kt(enc_cmd.kt), .blk_base(enc_cmd.a_row_base), .grp_size(enc_cmd.mt),
    .busy(enc_a_busy), .done(enc_a_done), .overflow(ovf_a),
    .el_we(a_el_we), .el_grp(a_el_grp), .el_addr(a_el_addr), .el_val(a_el_val), .el_idx(a_el_idx),
    .len_we(a_len_we), .len_addr(a_len_addr), .len_val(a_len_val),
    .list_we(a_list_we), .list_addr(a_list_addr), .list_idx(a_list_idx), .list_bm(a_list_bm),
    .all_len_we(a_all_we), .all_len(a_all_len)
  );

  partition_encoder #(.G(NB)) u_enc_b (
    .clk, .rst_n,
    .in_we(enc_we && (enc_sel inside {ENC_B_PTR, ENC_B_IDX, ENC_B_VAL})),
    .in_sel(2'(enc_sel - ENC_B_PTR)), .in_addr(enc_addr[AWE-1:0]), .in_data(enc_data),
    .start(enc_start), .kt(enc_cmd.kt), .blk_base(enc_cmd.b_col_base), .grp_size(enc_cmd.nt),
    .busy(enc_b_busy), .done(enc_b_done), .overflow(ovf_b),
    .el_we(b_el_we), .el_grp(b_el_grp), .el_addr(b_el_addr), .el_val(b_el_val), .el_idx(b_el_idx),
    .len_we(b_len_we), .len_addr(b_len_addr), .len_val(b_len_val),
    .list_we(b_list_we), .list_addr(b_list_addr), .list_idx(b_list_idx), .list_bm(b_list_bm),
    .all_len_we(b_all_we), .all_len(b_all_len)
  );

  // read side of the buffers
  logic [LAW-1:0]            ra_list_addr, rb_list_addr;
  logic [IDX_W-1:0]          ra_list_idx, rb_list_idx;
  logic [NA-1:0]             ra_list_bm;
  logic [NB-1:0]             rb_list_bm;
  logic [LAW:0]              ra_all_len, rb_all_len;
  logic [NA-1:0][GAW-1:0]    ra_len_addr, ra_el_addr;
  logic [NB-1:0][GAW-1:0]    rb_len_addr, rb_el_addr;
  logic [NA-1:0][LEN_W-1:0]  ra_len;
  logic [NB-1:0][LEN_W-1:0]  rb_len;
  logic [NA-1:0][DATA_W-1:0] ra_el_val;
  logic [NB-1:0][DATA_W-1:0] rb_el_val;
  logic [NA-1:0][IDX_W-1:0]  ra_el_idx;
  logic [NB-1:0][IDX_W-1:0]  rb_el_idx;

  group_buffer #(.G(NA)) u_buf_a (
    .clk, .wbank(enc_bank), .rbank(cmp_bank),
    .el_we(a_el_we), .el_grp(a_el_grp), .el_addr(a_el_addr), .el_val(a_el_val), .el_idx(a_el_idx),
    .len_we(a_len_we), .len_addr(a_len_addr), .len_val(a_len_val),
    .list_we(a_list_we), .list_addr(a_list_addr), .list_idx(a_list_idx), .list_bm(a_list_bm),
    .all_len_we(a_all_we), .all_len(a_all_len),
    .list_raddr(ra_list_addr), .list_ridx(ra_list_idx), .list_rbm(ra_list_bm), .all_len_r(ra_all_len),
    .len_raddr(ra_len_addr), .len_r(ra_len), .el_raddr(ra_el_addr), .el_rval(ra_el_val), .el_ridx(ra_el_idx)
  );

  group_buffer #(.G(NB)) u_buf_b (
    .clk, .wbank(enc_bank), .rbank(cmp_bank),
    .el_we(b_el_we), .el_grp(b_el_grp), .el_addr(b_el_addr), .el_val(b_el_val), .el_idx(b_el_idx),
    .len_we(b_len_we), .len_addr(b_len_addr), .len_val(b_len_val),
    .list_we(b_list_we), .list_addr(b_list_addr), .list_idx(b_list_idx), .list_bm(b_list_bm),
    .all_len_we(b_all_we), .all_len(b_all_len),
    .list_raddr(rb_list_addr), .list_ridx(rb_list_idx), .list_rbm(rb_list_bm), .all_len_r(rb_all_len),
    .len_raddr(rb_len_addr), .len_r(rb_len), .el_raddr(rb_el_addr), .el_rval(rb_el_val), .el_ridx(rb_el_idx)
  );

  // ---------------- scheduler and PE array ----------------
  logic [NA-1:0]             pa_valid;
  logic [NA-1:0][DATA_W-1:0] pa_val;
  logic [NA-1:0][IDX_W-1:0]  pa_row;
  logic [NB-1:0]             pb_valid;
  logic [NB-1:0][DATA_W-1:0] pb_val;
  logic [NB-1:0][IDX_W-1:0]  pb_col;
  logic                      sched_busy;

  iohp_scheduler #(.NA(NA), .NB(NB)) u_sched (
    .clk, .rst_n, .start(sched_start), .mode(sched_cmd.mode), .nt(sched_cmd.nt),
    .busy(sched_busy), .done(sched_done),
    .a_list_raddr(ra_list_addr), .a_list_idx(ra_list_idx), .a_list_bm(ra_list_bm), .a_all_len(ra_all_len),
    .a_len_raddr(ra_len_addr), .a_len(ra_len), .a_el_raddr(ra_el_addr), .a_el_val(ra_el_val), .a_el_idx(ra_el_idx),
    .b_list_raddr(rb_list_addr), .b_list_idx(rb_list_idx), .b_list_bm(rb_list_bm), .b_all_len(rb_all_len),
    .b_len_raddr(rb_len_addr), .b_len(rb_len), .b_el_raddr(rb_el_addr), .b_el_val(rb_el_val), .b_el_idx(rb_el_idx),
    .pa_valid, .pa_val, .pa_row, .pb_valid, .pb_val, .pb_col
  );

  logic [NA-1:0][NBW-1:0]    m_sel;
  logic [NA-1:0][PAW-1:0]    m_row, m_vc_addr, m_vc, m_col_addr;
  logic [NA-1:0][LEN_W-1:0]  m_row_len;
  logic [NA-1:0][IDX_W-1:0]  m_col;
  logic [NA-1:0][PAW:0]      m_val_addr;
  logic [NA-1:0][DATA_W-1:0] m_val;
  logic [NA-1:0]             m_clr;

  pe_array #(.NA(NA), .NB(NB)) u_array (
    .clk, .rst_n, .mode(sched_cmd.mode), .wbank(pe_wbank),
    .max_row_len((sched_cmd.mode == MODE_SDMM) ? LEN_W'(sched_cmd.nt) : sched_cmd.max_row_len),
    .pa_valid, .pa_val, .pa_row, .pb_valid, .pb_val, .pb_col,
    .busy(array_busy), .overflow(ovf_pe),
    .rbank(map_bank), .rd_dense(map_cmd.mode == MODE_SDMM),
    .rd_sel(m_sel), .rd_row(m_row), .rd_row_len(m_row_len),
    .rd_vc_addr(m_vc_addr), .rd_vc(m_vc), .rd_col_addr(m_col_addr), .rd_col(m_col),
    .rd_val_addr(m_val_addr), .rd_val(m_val),
    .clr(m_clr), .clr_bank(map_bank)
  );

  // ---------------- address mapping ----------------
  logic [NA-1:0]  am_valid, am_ready, am_busy, am_err;
  c_elem_t        am_elem [NA];

  for (genvar g = 0; g < NA; g++) begin : g_map
    addr_map #(.NB(NB)) u_map (
      .clk, .rst_n, .start(map_start), .mode(map_cmd.mode),
      .mt(map_cmd.mt), .nt(map_cmd.nt), .max_row_len(map_cmd.max_row_len),
      .row_base(map_cmd.a_row_base + OIDX_W'(g) * OIDX_W'(map_cmd.mt)),
      .col_base(map_cmd.b_col_base),
      .busy(am_busy[g]), .done(map_done[g]), .sort_err(am_err[g]),
      .rd_sel(m_sel[g]), .rd_row(m_row[g]), .rd_row_len(m_row_len[g]),
      .rd_vc_addr(m_vc_addr[g]), .rd_vc(m_vc[g]), .rd_col_addr(m_col_addr[g]), .rd_col(m_col[g]),
      .rd_val_addr(m_val_addr[g]), .rd_val(m_val[g]), .clr(m_clr[g]),
      .c_valid(am_valid[g]), .c_ready(am_ready[g]), .c_elem(am_elem[g])
    );
  end

  // round-robin arbiter from the NA address-mapping units to the DMA
  logic [NAW-1:0] rr_ptr, pick;
  logic           any;
  always_comb begin
    any  = 1'b0;
    pick = rr_ptr;
    for (int k = 0; k < NA; k++) begin
      logic [NAW-1:0] cand;
      cand = NAW'((32'(rr_ptr) + k) % NA);
      if (!any && am_valid[cand]) begin
        any  = 1'b1;
        pick = cand;
      end
    end
    c_valid  = any;
    c_elem   = am_elem[pick];
    am_ready = '0;
    am_ready[pick] = any && c_ready;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                  rr_ptr <= '0;
    else if (c_valid && c_ready) rr_ptr <= NAW'((32'(pick) + 1) % NA);
  end

  assign idle     = ctrl_idle && !store_busy && !dma_busy;
  assign overflow = ovf_a || ovf_b || ovf_pe || (|am_err);
endmodule
