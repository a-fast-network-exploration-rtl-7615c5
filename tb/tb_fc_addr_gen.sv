// tb_fc_addr_gen: self-checking test of the fully connected address generator.
//
// Runs both fully connected layers of a small network (the first with three output tiles),
// with `adv` held low at random, and compares every accepted issue with independent loops:
// feature address k, weight address w_base + tile*k_words + k, first at k = 0, last at the
// final k, output pixel 0. Also checks the issue count and the done pulse.
module tb_fc_addr_gen;
  import kws_pkg::*;

  // q=4, P=4, M=2; 12x13 input, 4 filters each, 10 hidden neurons, 3 outputs
  localparam net_cfg_t NET = build_net(4, 4, 2, 12, 13, 4, 4, 4, 10, 3);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       start = 1'b0, adv = 1'b0;
  layer_cfg_t cfg = NET[6];
  issue_t     issue;
  logic       busy, done;

  fc_addr_gen dut (.*);

  int checks = 0, failures = 0;
  issue_t exp_q[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

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
    for (int li = 6; li < 8; li++) begin
      automatic int n = 0, total, kw;
      automatic bit saw_done = 1'b0;
      cfg = NET[li];
      kw  = int'(cfg.in_h) * int'(cfg.in_w) * ((int'(cfg.in_c) + 1) / 2);
      for (int t = 0; t < int'(cfg.tiles); t++)
        for (int k = 0; k < kw; k++) begin
          issue_t e = '0;
          e.valid   = 1'b1;
          e.fm_addr = ADDR_W'(k);
          e.w_addr  = ADDR_W'(int'(cfg.w_base) + t * kw + k);
          e.first   = (k == 0);
          e.last    = (k == kw - 1);
          e.tile    = TILE_W'(t);
          exp_q.push_back(e);
        end
      total = exp_q.size();
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      while (busy) begin
        adv = ($urandom_range(2) != 0);
        if (adv) begin
          automatic issue_t e = exp_q.pop_front();
          n++;
          check(issue == e, $sformatf("layer %0d issue %0d: got %h expected %h", li, n, issue, e));
        end
        @(negedge clk);
        if (done) saw_done = 1'b1;
      end
      adv = 1'b0;
      check(n == total, $sformatf("layer %0d: %0d issues, expected %0d", li, n, total));
      check(saw_done, "done did not pulse");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
