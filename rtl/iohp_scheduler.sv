// iohp_scheduler: the psum-calculation controller of the inner-outer
// hybrid product. It walks the shared line lists of Buffer A (non-empty
// columns of the A block) and Buffer B (non-empty rows of the B block) and
// feeds the PE array.
//
// SSMM mode (reference Table 2): compare col_idx_sA[col_id] with
// row_idx_sB[row_id]. If the A index is smaller only col_id advances, if it
// is larger only row_id advances (one cycle each). When they are equal,
// every A group g with its bitmap bit set holds col_len_sA[g] elements of
// that column and every B group h holds row_len_sB[h] elements of that row;
// the scheduler then spends max_g(col_len) x max_h(row_len) cycles, the i
// (A element) loop outside and the j (B element) loop inside, presenting
// element i of each A group on PE row g and element j of each B group on PE
// column h. A PE computes only where both its row and its column are valid,
// so the whole array moves in lockstep; on the reference's 4 x 4 example
// this takes 5 cycles. After the last pair both pointers advance.
//
// SDMM mode (reference Table 4): B is dense and was loaded with every row
// present and every group N_t elements long, so the B row for an A column
// k is row k itself (value_sB = value_B[col_idx_sA]); the scheduler walks
// only the A list and spends max_g(col_len) x N_t cycles per column.
//
// Per-group read pointers (which length entry, which element) advance by
// the group's length whenever its bitmap bit is set. Outputs are
// registered: they appear one cycle after the scheduler decides them.
// `done` pulses one cycle after the last valid output.
module iohp_scheduler
  import iops_pkg::*;
#(
  parameter int unsigned NA     = GNA,
  parameter int unsigned NB     = GNB,
  parameter int unsigned GDEPTH = GRP_DEPTH,
  parameter int unsigned LDEPTH = LIST_DEPTH,
  localparam int unsigned GAW = $clog2(GDEPTH),
  localparam int unsigned LAW = $clog2(LDEPTH)
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      start,
  input  mode_e                     mode,
  input  logic [IDX_W-1:0]          nt,
  output logic                      busy,
  output logic                      done,
  // Buffer A read port
  output logic [LAW-1:0]            a_list_raddr,
  input  logic [IDX_W-1:0]          a_list_idx,
  input  logic [NA-1:0]             a_list_bm,
  input  logic [LAW:0]              a_all_len,
  output logic [NA-1:0][GAW-1:0]    a_len_raddr,
  input  logic [NA-1:0][LEN_W-1:0]  a_len,
  output logic [NA-1:0][GAW-1:0]    a_el_raddr,
  input  logic [NA-1:0][DATA_W-1:0] a_el_val,
  input  logic [NA-1:0][IDX_W-1:0]  a_el_idx,
  // Buffer B read port
  output logic [LAW-1:0]            b_list_raddr,
  input  logic [IDX_W-1:0]          b_list_idx,
  input  logic [NB-1:0]             b_list_bm,
  input  logic [LAW:0]              b_all_len,
  output logic [NB-1:0][GAW-1:0]    b_len_raddr,
  input  logic [NB-1:0][LEN_W-1:0]  b_len,
  output logic [NB-1:0][GAW-1:0]    b_el_raddr,
  input  logic [NB-1:0][DATA_W-1:0] b_el_val,
  input  logic [NB-1:0][IDX_W-1:0]  b_el_idx,
  // to the PE array
  output logic [NA-1:0]             pa_valid,
  output logic [NA-1:0][DATA_W-1:0] pa_val,
  output logic [NA-1:0][IDX_W-1:0]  pa_row,
  output logic [NB-1:0]             pb_valid,
  output logic [NB-1:0][DATA_W-1:0] pb_val,
  output logic [NB-1:0][IDX_W-1:0]  pb_col
);
  typedef enum logic [1:0] {S_IDLE, S_RUN, S_DONE} state_e;
  state_e state;

  logic [LAW:0]              col_id, row_id;
  logic [NA-1:0][GAW:0]      a_lptr, a_ebase;
  logic [NB-1:0][GAW:0]      b_lptr, b_ebase;
  logic [LEN_W-1:0]          i_cnt;
  logic [IDX_W-1:0]          j_cnt;

  // combinational view of the current step
  logic              finished, a_lt, a_gt, match;
  logic [LEN_W-1:0]  max_a;
  logic [IDX_W-1:0]  max_b;
  logic [NB-1:0]     bm_b;
  logic [NB-1:0][IDX_W-1:0] len_b;
  logic [IDX_W-1:0]  sdmm_row;
  logic              last_pair;

  always_comb begin
    a_list_raddr = col_id[LAW-1:0];
    b_list_raddr = (mode == MODE_SDMM) ? a_list_idx[LAW-1:0] : row_id[LAW-1:0];
    sdmm_row     = a_list_idx;
    finished = (col_id >= a_all_len) ||
               ((mode == MODE_SSMM) && (row_id >= b_all_len));
    a_lt  = (mode == MODE_SSMM) && (a_list_idx < b_list_idx);
    a_gt  = (mode == MODE_SSMM) && (a_list_idx > b_list_idx);
    match = !finished && !a_lt && !a_gt;
    max_a = '0;
    for (int g = 0; g < NA; g++) begin
      a_len_raddr[g] = a_lptr[g][GAW-1:0];
      a_el_raddr[g]  = GAW'(a_ebase[g] + (GAW+1)'(i_cnt));
      if (a_list_bm[g] && a_len[g] > max_a) max_a = a_len[g];
    end
    max_b = '0;
    for (int h = 0; h < NB; h++) begin
      b_len_raddr[h] = b_lptr[h][GAW-1:0];
      if (mode == MODE_SDMM) begin
        bm_b[h]       = 1'b1;
        len_b[h]      = nt;
        b_el_raddr[h] = GAW'(32'(sdmm_row) * 32'(nt) + 32'(j_cnt));
      end else begin
        bm_b[h]       = b_list_bm[h];
        len_b[h]      = IDX_W'(b_len[h]);
        b_el_raddr[h] = GAW'(b_ebase[h] + (GAW+1)'(j_cnt));
      end
      if (bm_b[h] && len_b[h] > max_b) max_b = len_b[h];
    end
    last_pair = (j_cnt + 1'b1 >= max_b) && (LEN_W'(i_cnt + 1'b1) >= max_a || i_cnt == '1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= S_IDLE;
      col_id   <= '0;
      row_id   <= '0;
      a_lptr   <= '0;
      a_ebase  <= '0;
      b_lptr   <= '0;
      b_ebase  <= '0;
      i_cnt    <= '0;
      j_cnt    <= '0;
      pa_valid <= '0;
      pb_valid <= '0;
      pa_val   <= '0;
      pa_row   <= '0;
      pb_val   <= '0;
      pb_col   <= '0;
    end else begin
      pa_valid <= '0;
      pb_valid <= '0;
      unique case (state)
        S_IDLE: if (start) begin
          state   <= S_RUN;
          col_id  <= '0;
          row_id  <= '0;
          a_lptr  <= '0;
          a_ebase <= '0;
          b_lptr  <= '0;
          b_ebase <= '0;
          i_cnt   <= '0;
          j_cnt   <= '0;
        end
        S_RUN: begin
          if (finished) begin
            state <= S_DONE;
          end else if (a_lt) begin
            col_id <= col_id + 1'b1;
            for (int g = 0; g < NA; g++)
              if (a_list_bm[g]) begin
                a_lptr[g]  <= a_lptr[g] + 1'b1;
                a_ebase[g] <= a_ebase[g] + (GAW+1)'(a_len[g]);
              end
          end else if (a_gt) begin
            row_id <= row_id + 1'b1;
            for (int h = 0; h < NB; h++)
              if (b_list_bm[h]) begin
                b_lptr[h]  <= b_lptr[h] + 1'b1;
                b_ebase[h] <= b_ebase[h] + (GAW+1)'(b_len[h]);
              end
          end else if (match) begin
            for (int g = 0; g < NA; g++) begin
              pa_valid[g] <= a_list_bm[g] && (i_cnt < a_len[g]);
              pa_val[g]   <= a_el_val[g];
              pa_row[g]   <= a_el_idx[g];
            end
            for (int h = 0; h < NB; h++) begin
              pb_valid[h] <= bm_b[h] && (j_cnt < len_b[h]);
              pb_val[h]   <= b_el_val[h];
              pb_col[h]   <= b_el_idx[h];
            end
            if (!last_pair) begin
              if (j_cnt + 1'b1 < max_b) begin
                j_cnt <= j_cnt + 1'b1;
              end else begin
                j_cnt <= '0;
                i_cnt <= i_cnt + 1'b1;
              end
            end else begin
              i_cnt  <= '0;
              j_cnt  <= '0;
              col_id <= col_id + 1'b1;
              for (int g = 0; g < NA; g++)
                if (a_list_bm[g]) begin
                  a_lptr[g]  <= a_lptr[g] + 1'b1;
                  a_ebase[g] <= a_ebase[g] + (GAW+1)'(a_len[g]);
                end
              if (mode == MODE_SSMM) begin
                row_id <= row_id + 1'b1;
                for (int h = 0; h < NB; h++)
                  if (b_list_bm[h]) begin
                    b_lptr[h]  <= b_lptr[h] + 1'b1;
                    b_ebase[h] <= b_ebase[h] + (GAW+1)'(b_len[h]);
                  end
              end
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy = (state != S_IDLE);
  assign done = (state == S_DONE);
endmodule
