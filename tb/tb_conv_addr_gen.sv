// tb_conv_addr_gen: self-checking test of the convolution address generator.
//
// Runs two convolution layers of a small network (an unpadded one with one input channel and
// a padded one with several channel words and two output-channel tiles), with `adv` held low
// at random, and compares every accepted issue (feature address, padding flag, weight address,
// first/last, output pixel, tile) with the sequence of independent nested loops. Also checks
// that exactly tiles*pixels*9*in_cg issues are accepted and that done follows the last one.
module tb_conv_addr_gen;
  import kws_pkg::*;

  // q=4, P=4, M=2; 10x9 input, 6, 5, 4 filters
  localparam net_cfg_t NET = build_net(4, 4, 2, 10, 9, 6, 5, 4, 6, 3);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic       start = 1'b0, adv = 1'b0;
  layer_cfg_t cfg = NET[0];
  issue_t     issue;
  logic       busy, done;

  conv_addr_gen dut (.*);

  int checks = 0, failures = 0;
  issue_t exp_q[$];

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic build_expected(layer_cfg_t l);
    int cgn = int'(l.in_cg), pd = int'(l.pad);
    for (int t = 0; t < int'(l.tiles); t++)
      for (int oy = 0; oy < int'(l.out_h); oy++)
        for (int ox = 0; ox < int'(l.out_w); ox++)
          for (int ky = 0; ky < 3; ky++)
            for (int kx = 0; kx < 3; kx++)
              for (int cg = 0; cg < cgn; cg++) begin
                issue_t e = '0;
                int iy = oy + ky - pd, ix = ox + kx - pd;
                e.valid    = 1'b1;
                e.pad_zero = (iy < 0 || ix < 0 || iy >= int'(l.in_h) || ix >= int'(l.in_w));
                e.fm_addr  = e.pad_zero ? '0 : ADDR_W'((iy * int'(l.in_w) + ix) * cgn + cg);
                e.w_addr   = ADDR_W'(int'(l.w_base) + t * 9 * cgn + (ky * 3 + kx) * cgn + cg);
                e.first    = (ky == 0 && kx == 0 && cg == 0);
                e.last     = (ky == 2 && kx == 2 && cg == cgn - 1);
                e.out_pix  = ADDR_W'(oy * int'(l.out_w) + ox);
                e.tile     = TILE_W'(t);
                exp_q.push_back(e);
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
    foreach (NET[li]) if (NET[li].kind == L_CONV && (li == 0 || li == 2)) begin
      automatic int n = 0, total;
      automatic bit saw_done = 1'b0;
      cfg = NET[li];
      build_expected(cfg);
      total = exp_q.size();
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      while (busy) begin
        adv = ($urandom_range(3) != 0);
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
      check(int'(cfg.tiles) * int'(cfg.out_h) * int'(cfg.out_w) * int'(cfg.k_words) == total,
            "issue count formula");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
