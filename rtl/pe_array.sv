// pe_array: P processing engines working on P output channels at once.
//
// The feature-map word (M values) is broadcast to every PE; PE p receives its own weight word
// from weight bank p. This is the output-channel tiling of the accelerator: one PE per output
// channel, P channels (one tile) per pass over an output pixel. All PEs share the control
// signals, so all results become valid in the same cycle (see mac_pe for the timing, two
// cycles from in_* to res_valid).
module pe_array #(
  parameter int Q = 4,
  parameter int M = 8,
  parameter int P = 72
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        in_first,
  input  logic                        in_last,
  input  logic [M-1:0][Q-1:0]         fm,
  input  logic [P-1:0][M-1:0][Q-1:0]  w,
  input  logic [4:0]                  shift,
  input  logic                        relu,
  output logic                        res_valid,
  output logic [P-1:0][Q-1:0]         res
);

  logic [P-1:0] valid_each;

  for (genvar p = 0; p < P; p++) begin : g_pe
    mac_pe #(.Q(Q), .M(M)) u_pe (
      .clk      (clk),
      .rst_n    (rst_n),
      .in_valid (in_valid),
      .in_first (in_first),
      .in_last  (in_last),
      .fm       (fm),
      .w        (w[p]),
      .shift    (shift),
      .relu     (relu),
      .res_valid(valid_each[p]),
      .res      (res[p])
    );
  end

  assign res_valid = valid_each[0];

endmodule
