// top_ctrl: the top controller. It runs the accelerator's three stages as
// a pipeline over a stream of tile commands:
//
//   stage 1 (load/encode): the DMA loads a tile's A and B slices into the
//     encoders, then both encoders fill bank `enc_bank` of Buffers A and B;
//   stage 2 (psum calculation): the scheduler streams buffer bank
//     `cmp_bank` through the PE array, which writes PE bank `pe_wbank`;
//   stage 3 (address mapping): the address-mapping units drain PE bank
//     `map_bank` into C and clear it.
//
// Two buffer banks and two PE banks (ping-pong) let the three stages work
// on three different tiles at once. A full/empty flag per bank is the only
// interlock: stage 1 waits for a free buffer bank, stage 2 for a full
// buffer bank and a free PE bank, stage 3 for a full PE bank. Tiles with
// last_k = 0 leave their psums in the PE bank so that the next tile (the
// next K slice of the same output block) accumulates onto them; only a
// tile with last_k = 1 hands the PE bank to stage 3. The per-stage copies
// of the command travel with the banks. After the scheduler finishes,
// stage 2 waits until the array has written its last psum.
// The reference states that the three stages form a pipeline with
// ping-pong buffers; the flag protocol is this implementation's.
module top_ctrl
  import iops_pkg::*;
#(
  parameter int unsigned NA = GNA
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // command stream
  input  logic                      cmd_valid,
  output logic                      cmd_ready,
  input  tile_cmd_t                 cmd,
  // stage 1
  output logic                      dma_start,
  output tile_cmd_t                 dma_cmd,
  input  logic                      dma_done,
  output logic                      enc_start,
  output tile_cmd_t                 enc_cmd,
  input  logic                      enc_a_done,
  input  logic                      enc_b_done,
  output logic                      enc_bank,
  // stage 2
  output logic                      sched_start,
  output tile_cmd_t                 sched_cmd,
  input  logic                      sched_done,
  input  logic                      array_busy,
  output logic                      cmp_bank,
  output logic                      pe_wbank,
  // stage 3
  output logic                      map_start,
  output tile_cmd_t                 map_cmd,
  input  logic [NA-1:0]             map_done,
  output logic                      map_bank,
  // status
  output logic [2:0]                stage_busy,
  output logic                      idle
);
  typedef enum logic [1:0] {L_IDLE, L_DMA, L_ENC} lstate_e;
  typedef enum logic [1:0] {C_IDLE, C_RUN, C_DRAIN} cstate_e;
  typedef enum logic       {M_IDLE, M_RUN} mstate_e;

  lstate_e   ls;
  cstate_e   cs;
  mstate_e   ms;
  tile_cmd_t l_cmd;
  tile_cmd_t buf_cmd [2];
  tile_cmd_t pe_cmd  [2];
  logic [1:0] buf_full, pe_full;
  logic       a_done_q, b_done_q;
  logic [NA-1:0] map_done_q;
  logic [1:0] drain_cnt;

  // stage 1
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ls       <= L_IDLE;
      l_cmd    <= '0;
      enc_bank <= 1'b0;
      a_done_q <= 1'b0;
      b_done_q <= 1'b0;
    end else begin
      unique case (ls)
        L_IDLE: if (cmd_valid && !buf_full[enc_bank]) begin
          l_cmd <= cmd;
          ls    <= L_DMA;
        end
        L_DMA: if (dma_done) begin
          a_done_q <= 1'b0;
          b_done_q <= 1'b0;
          ls       <= L_ENC;
        end
        default: begin
          if (enc_a_done) a_done_q <= 1'b1;
          if (enc_b_done) b_done_q <= 1'b1;
          if ((a_done_q || enc_a_done) && (b_done_q || enc_b_done) && !enc_start) begin
            enc_bank <= ~enc_bank;
            ls       <= L_IDLE;
          end
        end
      endcase
    end
  end

  logic l_fire;      // stage 1 hands a bank to stage 2
  logic c_release;   // stage 2 frees a buffer bank
  logic c_hand;      // stage 2 hands a PE bank to stage 3
  logic m_release;   // stage 3 frees a PE bank

  always_comb begin
    cmd_ready = (ls == L_IDLE) && !buf_full[enc_bank];
    dma_start = (ls == L_IDLE) && cmd_valid && !buf_full[enc_bank];
    dma_cmd   = cmd;
    enc_cmd   = l_cmd;
    l_fire    = (ls == L_ENC) && (a_done_q || enc_a_done) && (b_done_q || enc_b_done) && !enc_start;
  end

  // the encoders start the cycle after the DMA finishes
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) enc_start <= 1'b0;
    else        enc_start <= (ls == L_DMA) && dma_done;
  end

  // stage 2
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cs        <= C_IDLE;
      cmp_bank  <= 1'b0;
      pe_wbank  <= 1'b0;
      drain_cnt <= '0;
    end else begin
      unique case (cs)
        C_IDLE: if (buf_full[cmp_bank] && !pe_full[pe_wbank]) cs <= C_RUN;
        C_RUN: if (sched_done) begin
          cs        <= C_DRAIN;
          drain_cnt <= '0;
        end
        default: begin
          if (drain_cnt != 2'd3) drain_cnt <= drain_cnt + 1'b1;
          if (drain_cnt == 2'd3 && !array_busy) begin
            cs       <= C_IDLE;
            cmp_bank <= ~cmp_bank;
            if (buf_cmd[cmp_bank].last_k) pe_wbank <= ~pe_wbank;
          end
        end
      endcase
    end
  end

  always_comb begin
    sched_start = (cs == C_IDLE) && buf_full[cmp_bank] && !pe_full[pe_wbank];
    sched_cmd   = buf_cmd[cmp_bank];
    c_release   = (cs == C_DRAIN) && (drain_cnt == 2'd3) && !array_busy;
    c_hand      = c_release && buf_cmd[cmp_bank].last_k;
  end

  // stage 3
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ms         <= M_IDLE;
      map_bank   <= 1'b0;
      map_done_q <= '0;
    end else begin
      unique case (ms)
        M_IDLE: if (pe_full[map_bank]) begin
          ms         <= M_RUN;
          map_done_q <= '0;
        end
        default: begin
          map_done_q <= map_done_q | map_done;
          if (&(map_done_q | map_done)) begin
            ms       <= M_IDLE;
            map_bank <= ~map_bank;
          end
        end
      endcase
    end
  end

  always_comb begin
    map_start = (ms == M_IDLE) && pe_full[map_bank];
    map_cmd   = pe_cmd[map_bank];
    m_release = (ms == M_RUN) && (&(map_done_q | map_done));
  end

  // bank flags and the commands that travel with them
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      buf_full <= '0;
      pe_full  <= '0;
      for (int b = 0; b < 2; b++) begin
        buf_cmd[b] <= '0;
        pe_cmd[b]  <= '0;
      end
    end else begin
      if (l_fire) begin
        buf_full[enc_bank] <= 1'b1;
        buf_cmd[enc_bank]  <= l_cmd;
      end
      if (c_release) buf_full[cmp_bank] <= 1'b0;
      if (c_hand) begin
        pe_full[pe_wbank] <= 1'b1;
        pe_cmd[pe_wbank]  <= buf_cmd[cmp_bank];
      end
      if (m_release) pe_full[map_bank] <= 1'b0;
    end
  end

  assign stage_busy = {ms != M_IDLE, cs != C_IDLE, ls != L_IDLE};
  assign idle = (ls == L_IDLE) && (cs == C_IDLE) && (ms == M_IDLE) &&
                (buf_full == '0) && (pe_full == '0);
endmodule
