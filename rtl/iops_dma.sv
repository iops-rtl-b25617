// iops_dma: the DMA between DRAM and the accelerator.
//
// Load side: on `load_start` it copies the six arrays of one tile from
// DRAM into the two encoders' input buffers, in this order: A pointers
// (K_t + 1 words), A locations (nnz_A), A values (nnz_A), then the same
// three for B. Each DRAM word is 64 bits; pointers and locations use its
// low bits. Requests are issued back to back (valid/ready) and responses,
// which arrive in order after any latency, are written to consecutive
// encoder addresses. `load_done` pulses when the last response of the
// tile has been written.
//
// Store side: every element of C accepted on the c_valid/c_ready port is
// written to DRAM as two words at c_base + 2*n: the value, then
// {row, column} (32 bits each), where n counts elements since reset.
//
// The reference names the DMA and its role only; the word layout, the
// ordering and the handshakes are this implementation's.
module iops_dma
  import iops_pkg::*;
(
  input  logic                clk,
  input  logic                rst_n,
  // load control
  input  logic                load_start,
  input  tile_cmd_t           cmd,
  output logic                load_busy,
  output logic                load_done,
  // DRAM read channel
  output logic                rd_req_valid,
  input  logic                rd_req_ready,
  output logic [ADDR_W-1:0]   rd_req_addr,
  input  logic                rd_resp_valid,
  input  logic [DATA_W-1:0]   rd_resp_data,
  // encoder load port
  output logic                enc_we,
  output enc_sel_e            enc_sel,
  output logic [OPTR_W-1:0]   enc_addr,
  output logic [DATA_W-1:0]   enc_data,
  // C store
  input  logic [ADDR_W-1:0]   c_base,
  input  logic                c_valid,
  output logic                c_ready,
  input  c_elem_t             c_elem,
  output logic [31:0]         c_count,
  output logic                store_busy,
  // DRAM write channel
  output logic                wr_valid,
  input  logic                wr_ready,
  output logic [ADDR_W-1:0]   wr_addr,
  output logic [DATA_W-1:0]   wr_data
);
  // ---------------- load engine ----------------
  logic              active;
  tile_cmd_t         cmd_q;
  enc_sel_e          xfer;
  logic [OPTR_W:0]   iss, rsp, xlen, iss_n, rsp_n;
  logic [ADDR_W-1:0] xbase;

  always_comb begin
    unique case (xfer)
      ENC_A_PTR: begin xbase = cmd_q.a_ptr_addr; xlen = (OPTR_W+1)'(cmd_q.kt) + 1'b1; end
      ENC_A_IDX: begin xbase = cmd_q.a_idx_addr; xlen = (OPTR_W+1)'(cmd_q.a_nnz); end
      ENC_A_VAL: begin xbase = cmd_q.a_val_addr; xlen = (OPTR_W+1)'(cmd_q.a_nnz); end
      ENC_B_PTR: begin xbase = cmd_q.b_ptr_addr; xlen = (OPTR_W+1)'(cmd_q.kt) + 1'b1; end
      ENC_B_IDX: begin xbase = cmd_q.b_idx_addr; xlen = (OPTR_W+1)'(cmd_q.b_nnz); end
      default:   begin xbase = cmd_q.b_val_addr; xlen = (OPTR_W+1)'(cmd_q.b_nnz); end
    endcase
    rd_req_valid = active && (iss < xlen);
    rd_req_addr  = xbase + ADDR_W'(iss);
    enc_we       = active && rd_resp_valid;
    enc_sel      = xfer;
    enc_addr     = rsp[OPTR_W-1:0];
    enc_data     = rd_resp_data;
    load_busy    = active;
    iss_n        = iss + (OPTR_W+1)'(rd_req_valid && rd_req_ready);
    rsp_n        = rsp + (OPTR_W+1)'(rd_resp_valid);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active    <= 1'b0;
      cmd_q     <= '0;
      xfer      <= ENC_A_PTR;
      iss       <= '0;
      rsp       <= '0;
      load_done <= 1'b0;
    end else begin
      load_done <= 1'b0;
      if (!active) begin
        if (load_start) begin
          active <= 1'b1;
          cmd_q  <= cmd;
          xfer   <= ENC_A_PTR;
          iss    <= '0;
          rsp    <= '0;
        end
      end else begin
        if (rsp_n >= xlen) begin
          iss <= '0;
          rsp <= '0;
          if (xfer == ENC_B_VAL) begin
            active    <= 1'b0;
            load_done <= 1'b1;
          end else begin
            xfer <= enc_sel_e'(xfer + 1'b1);
          end
        end else begin
          iss <= iss_n;
          rsp <= rsp_n;
        end
      end
    end
  end

  // ---------------- store engine ----------------
  logic    held, half;
  c_elem_t elem_q;

  always_comb begin
    c_ready    = !held;
    wr_valid   = held;
    wr_addr    = c_base + ADDR_W'({c_count, half});
    wr_data    = half ? {elem_q.row, elem_q.col} : elem_q.value;
    store_busy = held;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held    <= 1'b0;
      half    <= 1'b0;
      elem_q  <= '0;
      c_count <= '0;
    end else if (!held) begin
      if (c_valid) begin
        held   <= 1'b1;
        half   <= 1'b0;
        elem_q <= c_elem;
      end
    end else if (wr_ready) begin
      if (half) begin
        held    <= 1'b0;
        half    <= 1'b0;
        c_count <= c_count + 1'b1;
      end else begin
        half <= 1'b1;
      end
    end
  end

  // a transfer never outgrows the encoder buffers
  a_fits_encoder: assert property (@(posedge clk) disable iff (!rst_n)
                                   enc_we |-> (32'(rsp) < ENC_DEPTH));
endmodule
