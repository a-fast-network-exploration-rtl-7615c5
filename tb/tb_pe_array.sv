// tb_pe_array: self-checking test of the PE array (output-channel tiling).
//
// A small array (P = 6 engines, M = 4 multipliers, q = 5) gets a broadcast feature word and a
// distinct weight word per engine for 100 output pixels of random length. Each engine's result
// is compared with an integer dot product of the shared feature words and its own weights,
// shifted, ReLU'd and saturated; the results must appear two cycles after the last word.
module tb_pe_array;

  localparam int Q = 5, M = 4, P = 6, PIXELS = 100;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                       in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0, relu = 1'b1;
  logic [M-1:0][Q-1:0]        fm = '0;
  logic [P-1:0][M-1:0][Q-1:0] w = '0;
  logic [4:0]                 shift = 5'd3;
  logic                       res_valid;
  logic [P-1:0][Q-1:0]        res;

  pe_array #(.Q(Q), .M(M), .P(P)) dut (.*);

  int checks = 0, failures = 0;

  function automatic int sat(longint v, bit r);
    longint hi = (1 << (Q - 1)) - 1, lo = -(1 << (Q - 1));
    if (r && v < 0) return 0;
    if (v > hi) return int'(hi);
    if (v < lo) return int'(lo);
    return int'(v);
  endfunction

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int px = 0; px < PIXELS; px++) begin
      automatic int len = 1 + int'($urandom_range(15));
      automatic longint acc[P];
      automatic bit r = 1'($urandom_range(1));
      automatic int sh = int'($urandom_range(5));
      foreach (acc[p]) acc[p] = 0;
      for (int k = 0; k < len; k++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_first = (k == 0);
        in_last  = (k == len - 1);
        relu     = r;
        shift    = 5'(sh);
        for (int i = 0; i < M; i++) fm[i] = Q'($urandom);
        for (int p = 0; p < P; p++)
          for (int i = 0; i < M; i++) begin
            w[p][i] = Q'($urandom);
            acc[p] += longint'(signed'(fm[i])) * longint'(signed'(w[p][i]));
          end
      end
      @(negedge clk);
      in_valid = 1'b0;
      checks++;
      if (res_valid) begin
        failures++;
        $display("FAIL: result one cycle early");
      end
      @(negedge clk);
      checks++;
      if (!res_valid) begin
        failures++;
        $display("FAIL: no result two cycles after the last word");
      end
      for (int p = 0; p < P; p++) begin
        checks++;
        if (int'(signed'(res[p])) != sat(acc[p] >>> sh, r)) begin
          failures++;
          $display("FAIL: pixel %0d PE %0d: %0d expected %0d", px, p, signed'(res[p]),
                   sat(acc[p] >>> sh, r));
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
