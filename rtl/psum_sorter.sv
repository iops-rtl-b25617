// psum_sorter: the insertion sorter of the address-mapping unit
// (reference Fig. 9(b)).
//
// Z register pairs hold (col_idx_psum, vc_addr_psum) in ascending column
// order. Each cycle one new pair may be inserted: every register compares
// its column with the new one (the ">?" comparators); a register whose
// column is not larger keeps its content, the first larger one takes the
// new pair, and all registers after it take their left neighbour's content
// (shift right). Empty registers count as larger than anything, and equal
// columns go after the ones already present, so the order of arrival is
// kept among equals. `clear` empties the sorter for the next row.
// Sorted entries are read back by position through rd_pos (combinational).
// The structure follows the reference; Z itself is not given there and is
// a parameter here. Inserting into a full sorter drops the pair and raises
// `full_err`.
module psum_sorter
  import iops_pkg::*;
#(
  parameter int unsigned Z  = SORT_DEPTH,
  parameter int unsigned AW = $clog2(PSUM_DEPTH),
  localparam int unsigned ZW = $clog2(Z + 1)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              clear,
  input  logic              ins_valid,
  input  logic [IDX_W-1:0]  ins_idx,
  input  logic [AW-1:0]     ins_addr,
  output logic [ZW-1:0]     count,
  output logic              full_err,
  input  logic [ZW-1:0]     rd_pos,
  output logic [IDX_W-1:0]  rd_idx,
  output logic [AW-1:0]     rd_addr
);
  logic [IDX_W-1:0] idx_r  [Z];
  logic [AW-1:0]    addr_r [Z];
  logic [Z-1:0]     gt;       // register e holds a larger column (or is empty)
  logic [Z-1:0]     gt_prev;  // the same for register e-1 (0 for the first)

  always_comb begin
    for (int e = 0; e < Z; e++)
      gt[e] = (ZW'(e) >= count) || (idx_r[e] > ins_idx);
    gt_prev = {gt[Z-2:0], 1'b0};
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      count    <= '0;
      full_err <= 1'b0;
      for (int e = 0; e < Z; e++) begin
        idx_r[e]  <= '0;
        addr_r[e] <= '0;
      end
    end else if (clear) begin
      count    <= '0;
      full_err <= 1'b0;
    end else if (ins_valid) begin
      if (count == ZW'(Z)) begin
        full_err <= 1'b1;
      end else begin
        count <= count + 1'b1;
        for (int e = 0; e < Z; e++) begin
          if (gt[e]) begin
            if (gt_prev[e]) begin
              idx_r[e]  <= idx_r[(e + Z - 1) % Z];
              addr_r[e] <= addr_r[(e + Z - 1) % Z];
            end else begin
              idx_r[e]  <= ins_idx;
              addr_r[e] <= ins_addr;
            end
          end
        end
      end
    end
  end

  always_comb begin
    rd_idx  = '0;
    rd_addr = '0;
    for (int e = 0; e < Z; e++)
      if (ZW'(e) == rd_pos) begin
        rd_idx  = idx_r[e];
        rd_addr = addr_r[e];
      end
  end
endmodule
