// tb_mac_pe: self-checking test of one processing engine.
//
// Feeds 300 output pixels of random length (1 to 40 words of M random q-bit values and
// weights), with random idle cycles in between and inside, random shift and ReLU setting, and
// compares each result with an integer model (sum of products, arithmetic right shift, ReLU,
// saturation). It also checks the latency: res_valid exactly two cycles after the last word.
module tb_mac_pe;

  localparam int Q = 4, M = 8, PIXELS = 300;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic                in_valid = 1'b0, in_first = 1'b0, in_last = 1'b0, relu = 1'b0;
  logic [M-1:0][Q-1:0] fm = '0, w = '0;
  logic [4:0]          shift = '0;
  logic                res_valid;
  logic [Q-1:0]        res;

  mac_pe #(.Q(Q), .M(M)) dut (.*);

  int checks = 0, failures = 0;
  int exp_q[$];
  longint last_cycle_q[$];
  longint cycle = 0;
  always @(posedge clk) cycle++;

  function automatic int sat(longint v, bit r);
    longint hi = (1 << (Q - 1)) - 1, lo = -(1 << (Q - 1));
    if (r && v < 0) return 0;
    if (v > hi) return int'(hi);
    if (v < lo) return int'(lo);
    return int'(v);
  endfunction

  // results
  always @(negedge clk) if (res_valid) begin
    automatic int e = exp_q.pop_front();
    automatic longint lc = last_cycle_q.pop_front();
    checks += 2;
    if (int'(signed'(res)) != e) begin
      failures++;
      $display("FAIL: result %0d expected %0d", signed'(res), e);
    end
    if (cycle - lc != 2) begin
      failures++;
      $display("FAIL: latency %0d cycles, expected 2", cycle - lc);
    end
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int px = 0; px < PIXELS; px++) begin
      automatic int len = 1 + int'($urandom_range(39));
      automatic longint acc = 0;
      automatic bit r = 1'($urandom_range(1));
      automatic int sh = int'($urandom_range(8));
      for (int k = 0; k < len; k++) begin
        while ($urandom_range(3) == 0) begin
          @(negedge clk);
          in_valid = 1'b0;
        end
        @(negedge clk);
        in_valid = 1'b1;
        in_first = (k == 0);
        in_last  = (k == len - 1);
        relu     = r;
        shift    = 5'(sh);
        for (int i = 0; i < M; i++) begin
          fm[i] = Q'($urandom);
          w[i]  = Q'($urandom);
          acc  += longint'(signed'(fm[i])) * longint'(signed'(w[i]));
        end
        if (k == len - 1) begin
          exp_q.push_back(sat(acc >>> sh, r));
          last_cycle_q.push_back(cycle);
        end
      end
      // shift and relu stay until the result is out
      @(negedge clk);
      in_valid = 1'b0;
      repeat (2) @(negedge clk);
    end
    repeat (5) @(negedge clk);
    checks++;
    if (exp_q.size() != 0) begin
      failures++;
      $display("FAIL: %0d results missing", exp_q.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
