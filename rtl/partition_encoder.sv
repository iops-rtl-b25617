// partition_encoder: converts one slice of a compressed sparse matrix into
// the group-partitioned format the PE array reads. The same module serves
// as the RP-CSC encoder of A (rows split into G groups of GRP rows) and the
// CP-CSR encoder of B (columns split into G groups of GRP columns).
//
// How it works. The DMA first writes the slice in its original form into
// three local arrays: ptr (K_t + 1 column/row pointers), idx (32-bit
// row/column locations) and val (doubles). After `start` the encoder walks
// the K_t lines (columns of A, rows of B) one element per cycle. An element
// whose location lies inside the block [blk_base, blk_base + G*grp_size)
// goes to group g = (loc - blk_base) / grp_size, found by comparing with the
// G group boundaries, and its value and local location (loc - g*grp_size -
// blk_base, as in the reference's worked example) are written to that
// group's next free entry. Elements outside the block are skipped. At the
// end of each line, one extra cycle writes the line's index and group
// bitmap to the shared list (only when some group is non-empty) and each
// non-empty group's element count to that group's length list. After the
// last line the list length (col_all_len / row_all_len) is written.
// This follows the reference's encoding flow line by line; the boundary
// comparators instead of a divider, the one cycle per element and per line
// end, and the overflow flag are this implementation's choices.
//
// Timing: busy from the cycle after `start` until the `done` pulse;
// nnz_in_slice + K_t + 1 cycles.
module partition_encoder
  import iops_pkg::*;
#(
  parameter int unsigned G         = GNA,
  parameter int unsigned DEPTH     = ENC_DEPTH,
  parameter int unsigned GDEPTH    = GRP_DEPTH,
  parameter int unsigned LDEPTH    = LIST_DEPTH,
  localparam int unsigned AW  = $clog2(DEPTH),
  localparam int unsigned GAW = $clog2(GDEPTH),
  localparam int unsigned LAW = $clog2(LDEPTH),
  localparam int unsigned GW  = (G > 1) ? $clog2(G) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  // load port (from DMA): sel 0 = ptr, 1 = idx, 2 = val
  input  logic                 in_we,
  input  logic [1:0]           in_sel,
  input  logic [AW-1:0]        in_addr,
  input  logic [DATA_W-1:0]    in_data,
  // control
  input  logic                 start,
  input  logic [OPTR_W-1:0]    kt,
  input  logic [OIDX_W-1:0]    blk_base,
  input  logic [IDX_W-1:0]     grp_size,
  output logic                 busy,
  output logic                 done,
  output logic                 overflow,
  // element write port of the group buffer
  output logic                 el_we,
  output logic [GW-1:0]        el_grp,
  output logic [GAW-1:0]       el_addr,
  output logic [DATA_W-1:0]    el_val,
  output logic [IDX_W-1:0]     el_idx,
  // per-group length write ports
  output logic [G-1:0]         len_we,
  output logic [G-1:0][GAW-1:0] len_addr,
  output logic [G-1:0][LEN_W-1:0] len_val,
  // shared list write port
  output logic                 list_we,
  output logic [LAW-1:0]       list_addr,
  output logic [IDX_W-1:0]     list_idx,
  output logic [G-1:0]         list_bm,
  output logic                 all_len_we,
  output logic [LAW:0]         all_len
);
  logic [OPTR_W-1:0] ptr_mem [DEPTH];
  logic [OIDX_W-1:0] idx_mem [DEPTH];
  logic [DATA_W-1:0] val_mem [DEPTH];

  always_ff @(posedge clk) begin
    if (in_we) begin
      unique case (in_sel)
        2'd0:    ptr_mem[in_addr] <= in_data[OPTR_W-1:0];
        2'd1:    idx_mem[in_addr] <= in_data[OIDX_W-1:0];
        default: val_mem[in_addr] <= in_data;
      endcase
    end
  end

  typedef enum logic [1:0] {S_IDLE, S_RUN, S_LAST} state_e;
  state_e state;

  logic [OPTR_W-1:0]  d;             // current line
  logic [OPTR_W-1:0]  p;             // current element
  logic [OIDX_W-1:0]  bound [G+1];   // group boundaries
  logic [G-1:0][LEN_W-1:0] cnt;      // elements of the current line per group
  logic [G-1:0]       bm;            // group bitmap of the current line
  logic [G-1:0][GAW:0] eptr;         // next free element entry per group
  logic [G-1:0][GAW:0] lptr;         // next free length entry per group
  logic [LAW:0]       list_cnt;      // non-empty lines so far

  // element classification
  logic [OIDX_W-1:0] cur_loc;
  logic              in_blk;
  logic [GW-1:0]     grp;
  logic [OIDX_W-1:0] grp_lo;     // first location of group grp
  logic [OPTR_W-1:0] line_end;
  logic              at_line_end;

  always_comb begin
    cur_loc     = idx_mem[p[AW-1:0]];
    line_end    = ptr_mem[AW'(d + 1'b1)];
    at_line_end = (p >= line_end);
    in_blk      = (cur_loc >= bound[0]) && (cur_loc < bound[G]);
    grp         = '0;
    grp_lo      = bound[0];
    for (int g = 1; g < G; g++)
      if (cur_loc >= bound[g]) begin
        grp    = GW'(g);
        grp_lo = bound[g];
      end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      d        <= '0;
      p        <= '0;
      cnt      <= '0;
      bm       <= '0;
      eptr     <= '0;
      lptr     <= '0;
      list_cnt <= '0;
      overflow <= 1'b0;
      for (int g = 0; g <= G; g++) bound[g] <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_RUN;
          d        <= '0;
          p        <= ptr_mem[0];
          cnt      <= '0;
          bm       <= '0;
          eptr     <= '0;
          lptr     <= '0;
          list_cnt <= '0;
          overflow <= 1'b0;
          for (int g = 0; g <= G; g++)
            bound[g] <= blk_base + OIDX_W'(g) * OIDX_W'(grp_size);
        end
        S_RUN: begin
          if (d >= kt) begin
            state <= S_LAST;
          end else if (!at_line_end) begin
            p <= p + 1'b1;
            if (in_blk) begin
              if (eptr[grp] < (GAW+1)'(GDEPTH) && cnt[grp] != '1) begin
                eptr[grp] <= eptr[grp] + 1'b1;
                cnt[grp]  <= cnt[grp] + 1'b1;
                bm[grp]   <= 1'b1;
              end else begin
                overflow  <= 1'b1;
              end
            end
          end else begin
            // end of line: record it, then start the next one
            if (bm != '0) begin
              if (list_cnt < (LAW+1)'(LDEPTH)) list_cnt <= list_cnt + 1'b1;
              else                             overflow <= 1'b1;
              for (int g = 0; g < G; g++)
                if (bm[g]) lptr[g] <= lptr[g] + 1'b1;
            end
            cnt <= '0;
            bm  <= '0;
            d   <= d + 1'b1;
            p   <= line_end;
          end
        end
        default: state <= S_IDLE;   // S_LAST: all_len written this cycle
      endcase
    end
  end

  // write ports
  always_comb begin
    el_we      = (state == S_RUN) && (d < kt) && !at_line_end && in_blk &&
                 (eptr[grp] < (GAW+1)'(GDEPTH)) && (cnt[grp] != '1);
    el_grp     = grp;
    el_addr    = eptr[grp][GAW-1:0];
    el_val     = val_mem[p[AW-1:0]];
    el_idx     = IDX_W'(cur_loc - grp_lo);
    list_we    = (state == S_RUN) && (d < kt) && at_line_end && (bm != '0) &&
                 (list_cnt < (LAW+1)'(LDEPTH));
    list_addr  = list_cnt[LAW-1:0];
    list_idx   = IDX_W'(d);
    list_bm    = bm;
    for (int g = 0; g < G; g++) begin
      len_we[g]   = (state == S_RUN) && (d < kt) && at_line_end && bm[g];
      len_addr[g] = lptr[g][GAW-1:0];
      len_val[g]  = cnt[g];
    end
    all_len_we = (state == S_LAST);
    all_len    = list_cnt;
    busy       = (state != S_IDLE);
    done       = (state == S_LAST);
  end
endmodule
