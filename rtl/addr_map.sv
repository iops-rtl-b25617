// addr_map: address-mapping unit of one PE row. It turns the irregular
// psums held in the PEs of its row into elements of the output matrix C.
//
// SSMM mode (reference Table 3, Fig. 6 and Fig. 9(b),(c)): for each PE h
// of the row and each local row i < M_t, read row_len_psum[i]. If it is
// not zero, read the row's vc_addr segment (entries i*max_row_len ...),
// use each vc_addr to fetch col_idx_psum, and insert the pair into the
// insertion sorter, one per cycle. Then walk the sorted pairs: fetch
// value_psum at the sorted vc_addr and compare its column with the one
// held in the idx_C register ("=?"). Equal columns are added with the FP
// adder into the Value_C register; a new column first emits the held
// (value, row, column) as one element of C. Rows of C come out in order,
// columns in ascending order within a row.
//
// SDMM mode: the psums are already a dense M_t x N_t block per PE and are
// read out in row-major order, one element per cycle (never-written psums
// read as zero).
//
// Output coordinates are global: row = row_base + i, column =
// col_base + h*N_t + local column. After the last PE the unit pulses
// clr for one cycle, which empties that bank of its row's PEs, then `done`.
// Output uses a valid/ready handshake; the unit stalls while c_ready is
// low. The one-pair-per-cycle sorting and accumulation follow the
// reference's figure; the exact state sequence is this implementation's.
// Timing per non-empty row: len cycles to sort, len cycles to accumulate
// (plus stalls); one cycle per row to read its length.
// The assertions are disabled during reset with `disable iff (!rst_n)`;
// lint therefore sees rst_n used both as an asynchronous reset and as a
// synchronous signal.
module addr_map
  import iops_pkg::*;
#(
  parameter int unsigned NB    = GNB,
  parameter int unsigned DEPTH = PSUM_DEPTH,
  parameter int unsigned Z     = SORT_DEPTH,
  localparam int unsigned AW  = $clog2(DEPTH),
  localparam int unsigned VAW = AW + 1,
  localparam int unsigned BW  = (NB > 1) ? $clog2(NB) : 1,
  localparam int unsigned ZW  = $clog2(Z + 1)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  mode_e              mode,
  input  logic [IDX_W-1:0]   mt,
  input  logic [IDX_W-1:0]   nt,
  input  logic [LEN_W-1:0]   max_row_len,
  input  logic [OIDX_W-1:0]  row_base,
  input  logic [OIDX_W-1:0]  col_base,
  output logic               busy,
  output logic               done,
  output logic               sort_err,
  // read port into the PEs of this row
  output logic [BW-1:0]      rd_sel,
  output logic [AW-1:0]      rd_row,
  input  logic [LEN_W-1:0]   rd_row_len,
  output logic [AW-1:0]      rd_vc_addr,
  input  logic [AW-1:0]      rd_vc,
  output logic [AW-1:0]      rd_col_addr,
  input  logic [IDX_W-1:0]   rd_col,
  output logic [VAW-1:0]     rd_val_addr,
  input  logic [DATA_W-1:0]  rd_val,
  output logic               clr,
  // elements of C
  output logic               c_valid,
  input  logic               c_ready,
  output c_elem_t            c_elem
);
  typedef enum logic [2:0] {S_IDLE, S_ROW, S_LOAD, S_ACC, S_DENSE, S_CLR, S_DONE} state_e;
  state_e state;

  logic [IDX_W-1:0]  mt_q, nt_q;
  logic [LEN_W-1:0]  max_q;
  logic [OIDX_W-1:0] row_base_q, col_base_q;
  logic [BW:0]       h;
  logic [IDX_W-1:0]  i, j;
  logic [LEN_W-1:0]  k, len;
  logic [DATA_W-1:0] acc;        // Value_C register
  logic [IDX_W-1:0]  prev_idx;   // idx_C register

  // sorter
  logic              s_clear, s_ins;
  logic [ZW-1:0]     s_count, s_pos;
  logic [IDX_W-1:0]  s_idx;
  logic [AW-1:0]     s_addr;

  psum_sorter #(.Z(Z), .AW(AW)) u_sort (
    .clk, .rst_n, .clear(s_clear), .ins_valid(s_ins),
    .ins_idx(rd_col), .ins_addr(rd_vc),
    .count(s_count), .full_err(sort_err),
    .rd_pos(s_pos), .rd_idx(s_idx), .rd_addr(s_addr)
  );

  logic [DATA_W-1:0] sum;
  fp64_add u_add (.a(acc), .b(rd_val), .y(sum));

  logic        same, emit_last, emit_new;
  logic [31:0] col_off;

  always_comb begin
    rd_sel      = BW'(h);
    rd_row      = AW'(i);
    rd_vc_addr  = AW'(32'(i) * 32'(max_q) + 32'(k));
    rd_col_addr = rd_vc;
    s_pos       = ZW'(k);
    s_ins       = (state == S_LOAD);
    s_clear     = (state == S_ROW);
    same        = (s_idx == prev_idx);
    emit_last   = (state == S_ACC) && (k == len);
    emit_new    = (state == S_ACC) && (k != '0) && (k < len) && !same;
    col_off     = 32'(h) * 32'(nt_q);
    if (state == S_DENSE) rd_val_addr = VAW'(32'(i) * 32'(nt_q) + 32'(j));
    else                  rd_val_addr = VAW'(s_addr);
    c_valid     = emit_last || emit_new || (state == S_DENSE);
    if (state == S_DENSE) begin
      c_elem.value = rd_val;
      c_elem.row   = row_base_q + OIDX_W'(i);
      c_elem.col   = col_base_q + col_off + OIDX_W'(j);
    end else begin
      c_elem.value = acc;
      c_elem.row   = row_base_q + OIDX_W'(i);
      c_elem.col   = col_base_q + col_off + OIDX_W'(prev_idx);
    end
    clr  = (state == S_CLR);
    busy = (state != S_IDLE);
    done = (state == S_DONE);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      mt_q       <= '0;
      nt_q       <= '0;
      max_q      <= '0;
      row_base_q <= '0;
      col_base_q <= '0;
      h          <= '0;
      i          <= '0;
      j          <= '0;
      k          <= '0;
      len        <= '0;
      acc        <= '0;
      prev_idx   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          mt_q       <= mt;
          nt_q       <= nt;
          max_q      <= max_row_len;
          row_base_q <= row_base;
          col_base_q <= col_base;
          h          <= '0;
          i          <= '0;
          j          <= '0;
          k          <= '0;
          state      <= (mode == MODE_SDMM) ? S_DENSE : S_ROW;
        end
        S_ROW: begin
          // rd_row = i: the row length is on rd_row_len
          if (i >= mt_q) begin
            i <= '0;
            if (h + 1'b1 >= (BW+1)'(NB)) state <= S_CLR;
            else                         h <= h + 1'b1;
          end else if (rd_row_len == '0) begin
            i <= i + 1'b1;
          end else begin
            len   <= rd_row_len;
            k     <= '0;
            state <= S_LOAD;
          end
        end
        S_LOAD: begin
          // one (col_idx, vc_addr) pair goes into the sorter per cycle
          if (k + 1'b1 >= len) begin
            k     <= '0;
            state <= S_ACC;
          end else begin
            k <= k + 1'b1;
          end
        end
        S_ACC: begin
          if (k == '0) begin
            acc      <= rd_val;
            prev_idx <= s_idx;
            k        <= k + 1'b1;
          end else if (emit_last) begin
            if (c_ready) begin
              i     <= i + 1'b1;
              state <= S_ROW;
            end
          end else if (same) begin
            acc <= sum;
            k   <= k + 1'b1;
          end else if (c_ready) begin
            acc      <= rd_val;
            prev_idx <= s_idx;
            k        <= k + 1'b1;
          end
        end
        S_DENSE: begin
          if (c_ready) begin
            if (j + 1'b1 < nt_q) begin
              j <= j + 1'b1;
            end else begin
              j <= '0;
              if (i + 1'b1 < mt_q) begin
                i <= i + 1'b1;
              end else begin
                i <= '0;
                if (h + 1'b1 >= (BW+1)'(NB)) state <= S_CLR;
                else                         h <= h + 1'b1;
              end
            end
          end
        end
        S_CLR:   state <= S_DONE;
        default: state <= S_IDLE;
      endcase
    end
  end

  // a row never holds more psums than the sorter has registers
  a_fits_sorter: assert property (@(posedge clk) disable iff (!rst_n)
                                  (state == S_LOAD) |-> (32'(len) <= Z));
endmodule
