// tb_top_control: self-checking test of the layer sequencer.
//
// Engines are modelled here: a started engine stays busy for a random 3 to 40 cycles, and the
// PE pipeline stays busy a random few cycles longer. The test checks that the eight layers are
// started in order, each with the start of the right engine and the right multiplexer select,
// that the layer table entry presented is the expected one, that the two activation memories
// swap roles after every layer, that done pulses once with the result in the memory written
// last, that the stall output follows its rule (last word of a pixel held while a result is in
// flight or more than PIPE_LAT+1 write-back words remain) and that the cycle and stall counters
// match the counts made here.
module tb_top_control;
  import kws_pkg::*;

  localparam net_cfg_t NET = build_net(4, 8, 4, 12, 13, 8, 8, 8, 16, 5);

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic             start = 1'b0;
  logic             conv_busy = 1'b0, fc_busy = 1'b0, pool_busy = 1'b0, pipe_busy = 1'b0;
  logic             issue_valid = 1'b0, issue_last = 1'b0, inflight_last = 1'b0;
  logic [DIM_W-1:0] wb_remaining = '0;
  layer_cfg_t       cfg;
  logic             sel_conv, conv_start, fc_start, pool_start, pool_active, src_bank, adv, stall;
  logic             busy, done, result_bank;
  logic [31:0]      cycle_count, stall_count;

  top_control #(.NET(NET)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // engine models
  int busy_left = 0, pipe_left = 0, layer_seen = 0, n_busy = 0, n_stall = 0, n_done = 0;
  always @(negedge clk) if (rst_n) begin
    // stall rule, on the inputs of this cycle
    check(stall == (busy && dut.state == 2'd2 && issue_valid && issue_last &&
                    (inflight_last || wb_remaining > DIM_W'(PIPE_LAT + 1))), "stall rule");
    check(adv == !stall, "adv");
    if (busy) n_busy++;
    if (stall) n_stall++;
    if (done) n_done++;
    if (conv_start || fc_start || pool_start) begin
      automatic layer_kind_e k = NET[layer_seen].kind;
      check(cfg == NET[layer_seen], $sformatf("layer %0d table entry", layer_seen));
      check(conv_start == (k == L_CONV) && fc_start == (k == L_FC) && pool_start == (k == L_POOL),
            $sformatf("layer %0d engine start", layer_seen));
      check(sel_conv == (k == L_CONV), "S1/S2 select");
      check(pool_active == (k == L_POOL), "pool_active");
      check(src_bank == 1'(layer_seen % 2), $sformatf("layer %0d source memory", layer_seen));
      check($onehot({conv_start, fc_start, pool_start}), "one engine started");
      layer_seen++;
      busy_left = 3 + int'($urandom_range(37));
      pipe_left = busy_left + int'($urandom_range(6));
    end
    conv_busy = (busy_left > 0) && (cfg.kind == L_CONV);
    fc_busy   = (busy_left > 0) && (cfg.kind == L_FC);
    pool_busy = (busy_left > 0) && (cfg.kind == L_POOL);
    pipe_busy = (pipe_left > 0) && (cfg.kind != L_POOL);
    if (busy_left > 0) busy_left--;
    if (pipe_left > 0) pipe_left--;
    issue_valid   = conv_busy || fc_busy;
    issue_last    = 1'($urandom_range(1));
    inflight_last = ($urandom_range(3) == 0);
    wb_remaining  = DIM_W'($urandom_range(8));
  end

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
    for (int run = 0; run < 2; run++) begin
      layer_seen = 0;
      n_busy = 0;
      n_stall = 0;
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      while (!done) @(negedge clk);
      @(negedge clk);
      check(layer_seen == NUM_LAYERS, $sformatf("%0d layers started", layer_seen));
      check(!busy, "idle after done");
      check(result_bank == 1'(NUM_LAYERS % 2 == 0 ? 0 : 1), "result memory");
      check(int'(cycle_count) == n_busy, $sformatf("cycle count %0d, expected %0d", cycle_count, n_busy));
      check(int'(stall_count) == n_stall, "stall count");
      check(n_stall > 0, "no stall seen");
    end
    check(n_done == 2, "done pulses");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
