// group_buffer: ping-pong input buffer holding one partitioned submatrix.
// Used as Buffer A (RP-CSC: value, row_idx, col_len per group; col_idx and
// group bitmap shared) and as Buffer B (CP-CSR: value, col_idx, row_len per
// group; row_idx and group bitmap shared).
//
// Each of the two banks holds, for each of the G groups, GDEPTH elements
// (value + 16-bit local location) and GDEPTH 8-bit line lengths, plus one
// shared list of LDEPTH line indices with their G-bit group bitmaps and the
// list length. The encoder fills bank `wbank` while the PE array reads bank
// `rbank`; the top controller flips them, which is the ping-pong structure
// of the reference. Writes take effect at the clock edge; reads are
// combinational (an array read; a synchronous SRAM macro would add one
// pipeline stage in the reader). Depths per bank follow the reference's
// table of buffer sizes, divided among the groups; the shared list stores
// 16-bit indices and G-bit bitmaps, this implementation's reading of the
// 32-bit and 16-bit list widths printed in that table.
module group_buffer
  import iops_pkg::*;
#(
  parameter int unsigned G      = GNA,
  parameter int unsigned GDEPTH = GRP_DEPTH,
  parameter int unsigned LDEPTH = LIST_DEPTH,
  localparam int unsigned GAW = $clog2(GDEPTH),
  localparam int unsigned LAW = $clog2(LDEPTH),
  localparam int unsigned GW  = (G > 1) ? $clog2(G) : 1
) (
  input  logic                    clk,
  input  logic                    wbank,
  input  logic                    rbank,
  // write side (from the encoder)
  input  logic                    el_we,
  input  logic [GW-1:0]           el_grp,
  input  logic [GAW-1:0]          el_addr,
  input  logic [DATA_W-1:0]       el_val,
  input  logic [IDX_W-1:0]        el_idx,
  input  logic [G-1:0]            len_we,
  input  logic [G-1:0][GAW-1:0]   len_addr,
  input  logic [G-1:0][LEN_W-1:0] len_val,
  input  logic                    list_we,
  input  logic [LAW-1:0]          list_addr,
  input  logic [IDX_W-1:0]        list_idx,
  input  logic [G-1:0]            list_bm,
  input  logic                    all_len_we,
  input  logic [LAW:0]            all_len,
  // read side (to the scheduler and PE array)
  input  logic [LAW-1:0]          list_raddr,
  output logic [IDX_W-1:0]        list_ridx,
  output logic [G-1:0]            list_rbm,
  output logic [LAW:0]            all_len_r,
  input  logic [G-1:0][GAW-1:0]   len_raddr,
  output logic [G-1:0][LEN_W-1:0] len_r,
  input  logic [G-1:0][GAW-1:0]   el_raddr,
  output logic [G-1:0][DATA_W-1:0] el_rval,
  output logic [G-1:0][IDX_W-1:0] el_ridx
);
  logic [DATA_W-1:0] val_mem  [2][G][GDEPTH];
  logic [IDX_W-1:0]  idx_mem  [2][G][GDEPTH];
  logic [LEN_W-1:0]  len_mem  [2][G][GDEPTH];
  logic [IDX_W-1:0]  list_mem [2][LDEPTH];
  logic [G-1:0]      bm_mem   [2][LDEPTH];
  logic [LAW:0]      all_len_q [2];

  always_ff @(posedge clk) begin
    if (el_we) begin
      val_mem[wbank][el_grp][el_addr] <= el_val;
      idx_mem[wbank][el_grp][el_addr] <= el_idx;
    end
    for (int g = 0; g < G; g++)
      if (len_we[g]) len_mem[wbank][g][len_addr[g]] <= len_val[g];
    if (list_we) begin
      list_mem[wbank][list_addr] <= list_idx;
      bm_mem[wbank][list_addr]   <= list_bm;
    end
    if (all_len_we) all_len_q[wbank] <= all_len;
  end

  always_comb begin
    list_ridx = list_mem[rbank][list_raddr];
    list_rbm  = bm_mem[rbank][list_raddr];
    all_len_r = all_len_q[rbank];
    for (int g = 0; g < G; g++) begin
      len_r[g]   = len_mem[rbank][g][len_raddr[g]];
      el_rval[g] = val_mem[rbank][g][el_raddr[g]];
      el_ridx[g] = idx_mem[rbank][g][el_raddr[g]];
    end
  end
endmodule
