// act_memory: feature-map / output memory of the accelerator.
//
// A simple dual-port memory of DEPTH words of M*Q bits (M activations of q bits per word, the
// memory width M*q of the design), one write port and one read port with synchronous read:
// rdata is valid in the cycle after ren. The accelerator has two of them. During a layer one
// serves as the feature-map memory (read by the PE array or the max-pooling block) and the
// other as the output memory (written by the PE array or the max-pooling block); they swap
// roles at the end of each layer. The swap is this design's reading of the block diagram,
// which shows no path from the output memory back to the feature-map memory.
module act_memory #(
  parameter int Q     = 4,
  parameter int M     = 8,
  parameter int DEPTH = 16632,
  localparam int AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic           clk,
  input  logic           ren,
  input  logic [AW-1:0]  raddr,
  output logic [M*Q-1:0] rdata,
  input  logic           wen,
  input  logic [AW-1:0]  waddr,
  input  logic [M*Q-1:0] wdata
);

  logic [M*Q-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (wen) mem[waddr] <= wdata;
    if (ren) rdata <= mem[raddr];
  end

endmodule
