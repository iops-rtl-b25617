// dram_model: behavioural model of the off-chip DRAM seen by the
// accelerator's DMA (not synthesizable, testbench only).
//
// 64-bit words, word addressed, sparse storage. Read requests are accepted
// when rd_req_ready is high (it drops at random to create back-pressure);
// each accepted read returns its word LAT cycles later, in order. Writes
// are accepted when wr_ready is high (also randomly withheld). The
// testbench fills and inspects `mem` directly.
module dram_model #(
  parameter int unsigned LAT   = 4,
  parameter int unsigned STALL = 4   // 1 in STALL cycles is a stall; 0 = never
) (
  input  logic        clk,
  input  logic        rd_req_valid,
  output logic        rd_req_ready,
  input  logic [31:0] rd_req_addr,
  output logic        rd_resp_valid,
  output logic [63:0] rd_resp_data,
  input  logic        wr_valid,
  output logic        wr_ready,
  input  logic [31:0] wr_addr,
  input  logic [63:0] wr_data
);
  logic [63:0] mem [int unsigned];
  logic        pipe_v [LAT];
  logic [63:0] pipe_d [LAT];
  int          rd_stalls = 0, wr_stalls = 0;

  initial begin
    for (int i = 0; i < LAT; i++) begin
      pipe_v[i] = 1'b0;
      pipe_d[i] = '0;
    end
    rd_req_ready = 1'b1;
    wr_ready     = 1'b1;
  end

  always @(posedge clk) begin
    logic [63:0] d;
    for (int i = LAT - 1; i > 0; i--) begin
      pipe_v[i] <= pipe_v[i-1];
      pipe_d[i] <= pipe_d[i-1];
    end
    d = mem.exists(rd_req_addr) ? mem[rd_req_addr] : 64'd0;
    pipe_v[0] <= rd_req_valid && rd_req_ready;
    pipe_d[0] <= d;
    if (wr_valid && wr_ready) mem[wr_addr] = wr_data;
    if (rd_req_valid && !rd_req_ready) rd_stalls++;
    if (wr_valid && !wr_ready) wr_stalls++;
    rd_req_ready <= (STALL == 0) || ($urandom_range(0, STALL - 1) != 0);
    wr_ready     <= (STALL == 0) || ($urandom_range(0, STALL - 1) != 0);
  end

  assign rd_resp_valid = pipe_v[LAT-1];
  assign rd_resp_data  = pipe_d[LAT-1];
endmodule
