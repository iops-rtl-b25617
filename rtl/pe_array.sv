// pe_array: the NA x NB grid of processing elements.
//
// The scheduler presents one A element per PE row and one B element per PE
// column each cycle. A moves to the right through the PEs of its row and B
// moves down through the PEs of its column, one register per PE. So that
// the pair issued together meets in every PE, row g's A input is delayed by
// g cycles and column h's B input by h cycles on entry; both then reach
// PE(g,h) g+h cycles after issue. This is the forwarding drawn in the
// reference's top-level figure; the input skew registers that make it
// line up are this implementation's.
//
// The address-mapping unit of PE row g reads that row's PEs through one
// shared read port: rd_sel[g] picks the PE, the returned data is muxed
// back. clr[g] clears bank clr_bank of every PE in row g.
// `busy` stays high while any data or psum write is still in the grid.
module pe_array
  import iops_pkg::*;
#(
  parameter int unsigned NA    = GNA,
  parameter int unsigned NB    = GNB,
  parameter int unsigned DEPTH = PSUM_DEPTH,
  localparam int unsigned AW  = $clog2(DEPTH),
  localparam int unsigned VAW = AW + 1,
  localparam int unsigned BW  = (NB > 1) ? $clog2(NB) : 1
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  mode_e                      mode,
  input  logic                       wbank,
  input  logic [LEN_W-1:0]           max_row_len,
  input  logic [NA-1:0]              pa_valid,
  input  logic [NA-1:0][DATA_W-1:0]  pa_val,
  input  logic [NA-1:0][IDX_W-1:0]   pa_row,
  input  logic [NB-1:0]              pb_valid,
  input  logic [NB-1:0][DATA_W-1:0]  pb_val,
  input  logic [NB-1:0][IDX_W-1:0]   pb_col,
  output logic                       busy,
  output logic                       overflow,
  // per-row read ports for the address-mapping units
  input  logic                       rbank,
  input  logic                       rd_dense,
  input  logic [NA-1:0][BW-1:0]      rd_sel,
  input  logic [NA-1:0][AW-1:0]      rd_row,
  output logic [NA-1:0][LEN_W-1:0]   rd_row_len,
  input  logic [NA-1:0][AW-1:0]      rd_vc_addr,
  output logic [NA-1:0][AW-1:0]      rd_vc,
  input  logic [NA-1:0][AW-1:0]      rd_col_addr,
  output logic [NA-1:0][IDX_W-1:0]   rd_col,
  input  logic [NA-1:0][VAW-1:0]     rd_val_addr,
  output logic [NA-1:0][DATA_W-1:0]  rd_val,
  input  logic [NA-1:0]              clr,
  input  logic                       clr_bank
);
  typedef struct packed {
    logic              v;
    logic [DATA_W-1:0] val;
    logic [IDX_W-1:0]  idx;
  } elem_t;

  // grid wiring: a_w[g][h] enters PE(g,h) from the left, b_w[g][h] from above
  elem_t a_w [NA][NB+1];
  elem_t b_w [NA+1][NB];
  logic [NA-1:0][NB-1:0]             pe_active, pe_ovf;
  logic [NA-1:0][NB-1:0][LEN_W-1:0]  g_row_len;
  logic [NA-1:0][NB-1:0][AW-1:0]     g_vc;
  logic [NA-1:0][NB-1:0][IDX_W-1:0]  g_col;
  logic [NA-1:0][NB-1:0][DATA_W-1:0] g_val;
  logic [NA-1:0]                     skew_busy_a;
  logic [NB-1:0]                     skew_busy_b;

  // input skew for A: row g delayed by g cycles
  for (genvar g = 0; g < NA; g++) begin : g_skew_a
    if (g == 0) begin : g_direct
      assign a_w[0][0] = '{v: pa_valid[0], val: pa_val[0], idx: pa_row[0]};
      assign skew_busy_a[0] = 1'b0;
    end else begin : g_delay
      elem_t sr [g];
      logic [g-1:0] vbits;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < g; k++) sr[k] <= '0;
        end else begin
          sr[0] <= '{v: pa_valid[g], val: pa_val[g], idx: pa_row[g]};
          for (int k = 1; k < g; k++) sr[k] <= sr[k-1];
        end
      end
      always_comb for (int k = 0; k < g; k++) vbits[k] = sr[k].v;
      assign a_w[g][0] = sr[g-1];
      assign skew_busy_a[g] = |vbits;
    end
  end

  // input skew for B: column h delayed by h cycles
  for (genvar h = 0; h < NB; h++) begin : g_skew_b
    if (h == 0) begin : g_direct
      assign b_w[0][0] = '{v: pb_valid[0], val: pb_val[0], idx: pb_col[0]};
      assign skew_busy_b[0] = 1'b0;
    end else begin : g_delay
      elem_t sr [h];
      logic [h-1:0] vbits;
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) begin
          for (int k = 0; k < h; k++) sr[k] <= '0;
        end else begin
          sr[0] <= '{v: pb_valid[h], val: pb_val[h], idx: pb_col[h]};
          for (int k = 1; k < h; k++) sr[k] <= sr[k-1];
        end
      end
      always_comb for (int k = 0; k < h; k++) vbits[k] = sr[k].v;
      assign b_w[0][h] = sr[h-1];
      assign skew_busy_b[h] = |vbits;
    end
  end

  for (genvar g = 0; g < NA; g++) begin : g_row
    for (genvar h = 0; h < NB; h++) begin : g_pe
      logic               ao_v, bo_v;
      logic [DATA_W-1:0]  ao_val, bo_val;
      logic [IDX_W-1:0]   ao_idx, bo_idx;
      iops_pe #(.DEPTH(DEPTH)) u_pe (
        .clk, .rst_n, .mode, .wbank, .max_row_len,
        .a_valid(a_w[g][h].v), .a_val(a_w[g][h].val), .a_row(a_w[g][h].idx),
        .b_valid(b_w[g][h].v), .b_val(b_w[g][h].val), .b_col(b_w[g][h].idx),
        .a_valid_o(ao_v), .a_val_o(ao_val), .a_row_o(ao_idx),
        .b_valid_o(bo_v), .b_val_o(bo_val), .b_col_o(bo_idx),
        .rbank, .rd_dense,
        .rd_row(rd_row[g]),           .rd_row_len(g_row_len[g][h]),
        .rd_vc_addr(rd_vc_addr[g]),   .rd_vc(g_vc[g][h]),
        .rd_col_addr(rd_col_addr[g]), .rd_col(g_col[g][h]),
        .rd_val_addr(rd_val_addr[g]), .rd_val(g_val[g][h]),
        .clr(clr[g]), .clr_bank,
        .overflow(pe_ovf[g][h]), .active(pe_active[g][h])
      );
      assign a_w[g][h+1] = '{v: ao_v, val: ao_val, idx: ao_idx};
      assign b_w[g+1][h] = '{v: bo_v, val: bo_val, idx: bo_idx};
    end
  end

  always_comb begin
    for (int g = 0; g < NA; g++) begin
      rd_row_len[g] = g_row_len[g][rd_sel[g]];
      rd_vc[g]      = g_vc[g][rd_sel[g]];
      rd_col[g]     = g_col[g][rd_sel[g]];
      rd_val[g]     = g_val[g][rd_sel[g]];
    end
    busy     = (|pe_active) || (|skew_busy_a) || (|skew_busy_b) ||
               (|pa_valid) || (|pb_valid);
    overflow = |pe_ovf;
  end
endmodule
