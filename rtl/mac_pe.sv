// mac_pe: one processing engine (PE) of the accelerator.
//
// A PE computes one output channel. Each cycle it takes a word of M feature values and a word
// of M weights (q-bit signed each), multiplies them lane by lane in M multipliers, and sums the
// M products in the adder block. The sum is registered, then added into the accumulator, which
// is cleared by the first word of an output pixel (it loads the sum instead of adding it). After
// the last word of a pixel the accumulator is shifted right arithmetically by `shift`, passed
// through ReLU when `relu` is set, and saturated to q signed bits.
//
// The multiplier / adder-block / register / adder-with-feedback / register / ReLU chain and the
// eight multipliers per PE follow the accelerator's block diagram; the diagram labels the
// adder-block output "M" and the accumulator feedback "2 x M", read here as an accumulator twice
// as wide as the adder-block sum. The right shift and saturation (the diagram goes from the
// accumulator straight to an N-bit output) are this design's choice.
//
// Timing: in_* in cycle t; the adder-block sum is registered at the end of t; the accumulator is
// updated at the end of t+1; when in_last was set, res_valid is high in cycle t+2 and res holds
// the pixel's result for that cycle only (the next pixel may overwrite the accumulator then).
// Cycles with in_valid low leave the PE unchanged.
module mac_pe #(
  parameter int Q     = 4,                    // data and weight width
  parameter int M     = 8,                    // multipliers per PE
  parameter int SUM_W = 2 * Q + $clog2(M),    // adder-block output width
  parameter int ACC_W = 2 * SUM_W             // accumulator width
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                in_valid,
  input  logic                in_first,
  input  logic                in_last,
  input  logic [M-1:0][Q-1:0] fm,
  input  logic [M-1:0][Q-1:0] w,
  input  logic [4:0]          shift,
  input  logic                relu,
  output logic                res_valid,
  output logic [Q-1:0]        res
);

  logic signed [SUM_W-1:0] sum_c, sum_q;
  logic                    v1, f1, l1;
  logic signed [ACC_W-1:0] acc;

  // M multipliers and the adder block
  always_comb begin
    sum_c = '0;
    for (int i = 0; i < M; i++)
      sum_c += SUM_W'(signed'(fm[i]) * signed'(w[i]));
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      sum_q     <= '0;
      v1        <= 1'b0;
      f1        <= 1'b0;
      l1        <= 1'b0;
      acc       <= '0;
      res_valid <= 1'b0;
    end else begin
      v1 <= in_valid;
      f1 <= in_first;
      l1 <= in_last;
      if (in_valid) sum_q <= sum_c;
      if (v1) acc <= f1 ? ACC_W'(sum_q) : acc + ACC_W'(sum_q);
      res_valid <= v1 && l1;
    end
  end

  // shift, ReLU and saturation to q signed bits
  localparam logic signed [ACC_W-1:0] MAXV = ACC_W'((1 << (Q - 1)) - 1);
  localparam logic signed [ACC_W-1:0] MINV = -ACC_W'(1 << (Q - 1));
  logic signed [ACC_W-1:0] shifted;
  always_comb begin
    shifted = acc >>> shift;
    if (relu && shifted < 0) res = '0;
    else if (shifted > MAXV) res = MAXV[Q-1:0];
    else if (shifted < MINV) res = MINV[Q-1:0];
    else res = shifted[Q-1:0];
  end

endmodule
