// iops_pkg: widths, sizes and shared types of the IOPS sparse matrix
// multiplication accelerator.
//
// The accelerator multiplies C = A x B where A and B are sparse (SSMM mode)
// or A is sparse and B dense (SDMM mode). Numbers follow the reference
// configuration: an 8 x 8 PE array, 64-bit IEEE doubles, 16-bit locations
// and 8-bit lengths inside the re-encoded (RP-CSC / CP-CSR) formats, and
// 32-bit locations / 16-bit lengths in the original CSC / CSR input.
// Buffer depths are per ping-pong bank. Everything not given by the
// reference (the tile command layout, the DRAM port, the sorter depth) is
// a choice of this implementation and is marked as such.
package iops_pkg;

  // Data formats
  localparam int unsigned DATA_W  = 64;  // double-precision value
  localparam int unsigned OIDX_W  = 32;  // location in the original CSC/CSR
  localparam int unsigned OPTR_W  = 16;  // pointer/length in the original CSC/CSR
  localparam int unsigned IDX_W   = 16;  // location in RP-CSC/CP-CSR and psum
  localparam int unsigned LEN_W   = 8;   // length in RP-CSC/CP-CSR and psum
  localparam int unsigned ADDR_W  = 32;  // DRAM word address (own choice)

  // Array size
  localparam int unsigned GNA = 8;  // PE rows  = groups of A
  localparam int unsigned GNB = 8;  // PE cols  = groups of B

  // Buffer depths (entries per ping-pong bank)
  localparam int unsigned ENC_DEPTH   = 256;   // encoder input buffer
  localparam int unsigned GRP_DEPTH   = 256;   // value/idx/len per group (2K / 8 groups)
  localparam int unsigned LIST_DEPTH  = 8192;  // col_idx/bitmap list of Buffer A/B
  localparam int unsigned PSUM_DEPTH  = 256;   // PE value/col_idx/vc_addr/row_len
  localparam int unsigned SORT_DEPTH  = 32;    // sorter registers Reg_1..Reg_Z (own choice)

  typedef enum logic {
    MODE_SSMM = 1'b0,
    MODE_SDMM = 1'b1
  } mode_e;

  // One tile command, produced by the host from the tiling plan.
  // An A slice is K_t columns of CSC restricted to the rows of one A_1 block;
  // a B slice is K_t rows of CSR restricted to the columns of one B_1 block.
  typedef struct packed {
    mode_e               mode;
    logic                last_k;       // last K tile accumulated into the psum bank
    logic [IDX_W-1:0]    mt;           // rows per A group (M_t)
    logic [IDX_W-1:0]    nt;           // cols per B group (N_t)
    logic [LEN_W-1:0]    max_row_len;  // psum segment length per row (SSMM)
    logic [OPTR_W-1:0]   kt;           // columns of A / rows of B in this tile
    logic [OPTR_W-1:0]   a_nnz;
    logic [OPTR_W-1:0]   b_nnz;
    logic [OIDX_W-1:0]   a_row_base;   // first row of the A_1 block
    logic [OIDX_W-1:0]   b_col_base;   // first column of the B_1 block
    logic [ADDR_W-1:0]   a_ptr_addr;
    logic [ADDR_W-1:0]   a_idx_addr;
    logic [ADDR_W-1:0]   a_val_addr;
    logic [ADDR_W-1:0]   b_ptr_addr;
    logic [ADDR_W-1:0]   b_idx_addr;
    logic [ADDR_W-1:0]   b_val_addr;
  } tile_cmd_t;

  // Encoder input arrays reachable by the DMA
  typedef enum logic [2:0] {
    ENC_A_PTR = 3'd0,
    ENC_A_IDX = 3'd1,
    ENC_A_VAL = 3'd2,
    ENC_B_PTR = 3'd3,
    ENC_B_IDX = 3'd4,
    ENC_B_VAL = 3'd5
  } enc_sel_e;

  // One element of the output matrix C
  typedef struct packed {
    logic [DATA_W-1:0] value;
    logic [OIDX_W-1:0] row;
    logic [OIDX_W-1:0] col;
  } c_elem_t;

endpackage
