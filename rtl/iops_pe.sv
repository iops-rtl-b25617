// iops_pe: one processing element of the IOPS array.
//
// Each cycle the PE may receive one element of its A group (value_sA with
// its local row row_idx_sA) and one element of its B group (value_sB with
// its local column col_idx_sB). When both are valid it multiplies them.
// It also registers both inputs and passes them on to its right-hand (A)
// and lower (B) neighbour, so A travels along the PE row and B along the
// PE column.
//
// SSMM mode (outer product, reference Fig. 9(a) and Table 2 lines 13-17):
// the product and the column index are appended at address id_psum of the
// value and col_idx buffers; id_psum is then stored in the vc_addr buffer
// at row_idx_sA * max_row_len + row_len_psum[row_idx_sA], and that row's
// length is incremented. Each output row thus owns a fixed segment of
// vc_addr of max_row_len entries, which lets the address-mapping unit read
// the psums of one row without searching.
//
// SDMM mode (reference Fig. 9(d) and Table 4): the product is added to the
// psum at row_idx_sA * max_row_len + col_idx_sB, where max_row_len now
// carries N_t. The reference merges the idle col_idx/row_len/vc_addr
// buffers into a second value buffer in this mode; here that shows as
// PSUM_DEPTH more value entries that only SDMM addresses reach. A per-entry
// "written" bit makes a never-written psum read as zero, so no clearing
// pass is needed.
//
// All buffers exist twice (ping-pong): the array writes bank `wbank` while
// the address-mapping unit reads bank `rbank` through the combinational
// read port and finally clears it with `clr`. Pipeline: one register stage
// after the multiplier, the buffer write (or read-add-write) in the next
// cycle; so results are visible two cycles after the inputs. A psum that
// does not fit (id_psum, the row segment or the SDMM address out of range)
// is dropped and raises the sticky `overflow` flag; the reference spills
// such psums to DRAM, which is not built here.
module iops_pe
  import iops_pkg::*;
#(
  parameter int unsigned DEPTH = PSUM_DEPTH,
  localparam int unsigned AW  = $clog2(DEPTH),
  localparam int unsigned VAW = AW + 1          // value address incl. SDMM extension
) (
  input  logic               clk,
  input  logic               rst_n,
  input  mode_e              mode,
  input  logic               wbank,
  input  logic [LEN_W-1:0]   max_row_len,
  // inputs from the left / top neighbour
  input  logic               a_valid,
  input  logic [DATA_W-1:0]  a_val,
  input  logic [IDX_W-1:0]   a_row,
  input  logic               b_valid,
  input  logic [DATA_W-1:0]  b_val,
  input  logic [IDX_W-1:0]   b_col,
  // forwarded to the right / bottom neighbour
  output logic               a_valid_o,
  output logic [DATA_W-1:0]  a_val_o,
  output logic [IDX_W-1:0]   a_row_o,
  output logic               b_valid_o,
  output logic [DATA_W-1:0]  b_val_o,
  output logic [IDX_W-1:0]   b_col_o,
  // read port for the address-mapping unit
  input  logic               rbank,
  input  logic               rd_dense,  // bank holds SDMM psums
  input  logic [AW-1:0]      rd_row,
  output logic [LEN_W-1:0]   rd_row_len,
  input  logic [AW-1:0]      rd_vc_addr,
  output logic [AW-1:0]      rd_vc,
  input  logic [AW-1:0]      rd_col_addr,
  output logic [IDX_W-1:0]   rd_col,
  input  logic [VAW-1:0]     rd_val_addr,
  output logic [DATA_W-1:0]  rd_val,
  input  logic               clr,
  input  logic               clr_bank,
  output logic               overflow,
  output logic               active   // a psum write is in flight
);
  // buffers
  logic [DATA_W-1:0] value_mem [2][2*DEPTH];
  logic [IDX_W-1:0]  col_mem   [2][DEPTH];
  logic [AW-1:0]     vc_mem    [2][DEPTH];
  logic [1:0][DEPTH-1:0][LEN_W-1:0] row_len;
  logic [1:0][2*DEPTH-1:0]          written;
  logic [1:0][AW:0]                 id_psum;

  // forwarding registers
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      a_valid_o <= 1'b0;
      b_valid_o <= 1'b0;
      a_val_o   <= '0;
      a_row_o   <= '0;
      b_val_o   <= '0;
      b_col_o   <= '0;
    end else begin
      a_valid_o <= a_valid;
      b_valid_o <= b_valid;
      a_val_o   <= a_val;
      a_row_o   <= a_row;
      b_val_o   <= b_val;
      b_col_o   <= b_col;
    end
  end

  // stage 1: multiply
  logic [DATA_W-1:0] prod;
  fp64_mul u_mul (.a(a_val), .b(b_val), .y(prod));

  logic              s1_v;
  logic              s1_bank;
  mode_e             s1_mode;
  logic [DATA_W-1:0] s1_prod;
  logic [IDX_W-1:0]  s1_row, s1_col;
  logic [LEN_W-1:0]  s1_stride;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      s1_v      <= 1'b0;
      s1_bank   <= 1'b0;
      s1_mode   <= MODE_SSMM;
      s1_prod   <= '0;
      s1_row    <= '0;
      s1_col    <= '0;
      s1_stride <= '0;
    end else begin
      s1_v      <= a_valid && b_valid;
      s1_bank   <= wbank;
      s1_mode   <= mode;
      s1_prod   <= prod;
      s1_row    <= a_row;
      s1_col    <= b_col;
      s1_stride <= max_row_len;
    end
  end

  // stage 2: address control and buffer write
  logic [31:0]       seg_addr;     // vc_addr slot (SSMM)
  logic [31:0]       dense_addr;   // psum address (SDMM)
  logic [LEN_W-1:0]  cur_len;
  logic [AW:0]       cur_id;
  logic              ss_ok, sd_ok;
  logic [DATA_W-1:0] old_val, sum;

  always_comb begin
    cur_len    = row_len[s1_bank][s1_row[AW-1:0]];
    cur_id     = id_psum[s1_bank];
    seg_addr   = 32'(s1_row) * 32'(s1_stride) + 32'(cur_len);
    dense_addr = 32'(s1_row) * 32'(s1_stride) + 32'(s1_col);
    ss_ok      = (32'(s1_row) < DEPTH) && (cur_id < (AW+1)'(DEPTH)) &&
                 (cur_len < s1_stride) && (seg_addr < DEPTH);
    sd_ok      = (dense_addr < 2 * DEPTH);
    old_val    = written[s1_bank][dense_addr[VAW-1:0]] ?
                 value_mem[s1_bank][dense_addr[VAW-1:0]] : '0;
  end

  fp64_add u_add (.a(old_val), .b(s1_prod), .y(sum));

  always_ff @(posedge clk) begin
    if (s1_v) begin
      if (s1_mode == MODE_SSMM) begin
        if (ss_ok) begin
          value_mem[s1_bank][VAW'(cur_id)]      <= s1_prod;
          col_mem[s1_bank][cur_id[AW-1:0]]      <= s1_col;
          vc_mem[s1_bank][seg_addr[AW-1:0]]     <= cur_id[AW-1:0];
        end
      end else if (sd_ok) begin
        value_mem[s1_bank][dense_addr[VAW-1:0]] <= sum;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      row_len  <= '0;
      written  <= '0;
      id_psum  <= '0;
      overflow <= 1'b0;
    end else begin
      if (clr) begin
        row_len[clr_bank] <= '0;
        written[clr_bank] <= '0;
        id_psum[clr_bank] <= '0;
        overflow          <= 1'b0;
      end
      if (s1_v) begin
        if (s1_mode == MODE_SSMM) begin
          if (ss_ok) begin
            row_len[s1_bank][s1_row[AW-1:0]] <= cur_len + 1'b1;
            id_psum[s1_bank]                 <= cur_id + 1'b1;
          end else begin
            overflow <= 1'b1;
          end
        end else if (sd_ok) begin
          written[s1_bank][dense_addr[VAW-1:0]] <= 1'b1;
        end else begin
          overflow <= 1'b1;
        end
      end
    end
  end

  // read port
  always_comb begin
    rd_row_len = row_len[rbank][rd_row];
    rd_vc      = vc_mem[rbank][rd_vc_addr];
    rd_col     = col_mem[rbank][rd_col_addr];
    rd_val     = written[rbank][rd_val_addr] || !rd_dense ?
                 value_mem[rbank][rd_val_addr] : '0;
  end

  assign active = s1_v || a_valid || b_valid;
endmodule
