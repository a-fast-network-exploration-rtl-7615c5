// weight_memory: P banks of weight words, one bank per processing engine.
//
// Each bank is DEPTH words of M*Q bits (M weights of q bits), the memory width M*q of the
// design. All banks are read at one common address, so a read returns P words, one for each
// PE. Writes go to one bank at a time, from the host port, before inference starts. Bank p
// holds the weights of output channels p, P+p, 2P+p, ... (see kws_pkg for the layout).
//
// Timing: synchronous read, rdata valid in the cycle after ren. The bank count and word width
// follow the design; the single common read address and the write-one-bank host port are this
// design's choices.
module weight_memory #(
  parameter int Q     = 4,
  parameter int M     = 8,
  parameter int P     = 72,
  parameter int DEPTH = 1404,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1,
  localparam int BW   = (P > 1) ? $clog2(P) : 1
) (
  input  logic                        clk,
  input  logic                        ren,
  input  logic [AW-1:0]               raddr,
  output logic [P-1:0][M*Q-1:0]       rdata,
  input  logic                        wen,
  input  logic [BW-1:0]               wbank,
  input  logic [AW-1:0]               waddr,
  input  logic [M*Q-1:0]              wdata
);

  for (genvar p = 0; p < P; p++) begin : g_bank
    logic [M*Q-1:0] mem [DEPTH];
    always_ff @(posedge clk) begin
      if (wen && wbank == BW'(p)) mem[waddr] <= wdata;
      if (ren) rdata[p] <= mem[raddr];
    end
  end

endmodule
