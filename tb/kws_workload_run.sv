// kws_workload_run: one complete inference of the accelerator at a given network size, for
// the workload testbench.
//
// The same procedure as tb_kws_accel_full, with the accelerator's parameters passed in: random
// weights and a random input spectrum are loaded through the host ports, the network is run
// once, every class score is compared with an integer reference model built from the same
// layer table, the number of issued PE words and pooling writes must be exact, and the run
// length must lie within a few cycles per layer of the issue and stall cycles. Zero padding,
// pooling, both kinds of layer, a second output-channel tile and the eight memory swaps must
// each happen. Stalls and skipped write-back words are counted and reported, not required.
// It has its own clock; `finished` rises when it is done and `checks`/`failures` then hold
// its totals.
module kws_workload_run
  import kws_pkg::*;
#(
  parameter int Q = 4, parameter int P = 72, parameter int M = 8,
  parameter int IN_H = 44, parameter int IN_W = 13,
  parameter int F1 = 288, parameter int F2 = 144, parameter int F3 = 144,
  parameter int FC1 = 288, parameter int N_OUT = 30
) (
  output logic finished,
  output int   checks,
  output int   failures
);

  localparam net_cfg_t NET = build_net(Q, P, M, IN_H, IN_W, F1, F2, F3, FC1, N_OUT);
  localparam int WDEPTH = wmem_depth(NET);
  localparam int ADEPTH = amem_depth(NET);
  localparam int WAW = (WDEPTH > 1) ? $clog2(WDEPTH) : 1;
  localparam int AAW = (ADEPTH > 1) ? $clog2(ADEPTH) : 1;
  localparam int BW  = (P > 1) ? $clog2(P) : 1;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic           w_wr_en = 1'b0, fm_wr_en = 1'b0, res_rd_en = 1'b0, start = 1'b0;
  logic [BW-1:0]  w_wr_bank = '0;
  logic [WAW-1:0] w_wr_addr = '0;
  logic [M*Q-1:0] w_wr_data = '0, fm_wr_data = '0, res_rd_data;
  logic [AAW-1:0] fm_wr_addr = '0, res_rd_addr = '0;
  logic           busy, done;
  logic [31:0]    cycle_count, stall_count;

  kws_accel #(.Q(Q), .P(P), .M(M), .IN_H(IN_H), .IN_W(IN_W), .F1(F1), .F2(F2), .F3(F3),
              .FC1(FC1), .N_OUT(N_OUT)) dut (.*);


  // ---------------- reference model ----------------
  int wt[NUM_LAYERS][];   // [co][tap or input pixel][ci], flattened
  int act[];              // current feature map, (y*W + x)*C + c
  int nxt[];
  // The layer table as a variable: loop bounds read from it are not constants, so the
  // reference loops are simulated rather than unrolled at compile time.
  layer_cfg_t net_rt [NUM_LAYERS];

  function automatic int sat(longint v, bit relu);
    longint hi = (1 << (Q - 1)) - 1, lo = -(1 << (Q - 1));
    if (relu && v < 0) return 0;
    if (v > hi) return int'(hi);
    if (v < lo) return int'(lo);
    return int'(v);
  endfunction

  function automatic int taps(layer_cfg_t l);
    return (l.kind == L_CONV) ? 9 : int'(l.in_h) * int'(l.in_w);
  endfunction

  task automatic ref_layer(int li);
    layer_cfg_t l = net_rt[li];
    int h = int'(l.in_h), w = int'(l.in_w), c = int'(l.in_c);
    int oh = int'(l.out_h), ow = int'(l.out_w), oc = int'(l.out_c);
    int pd = int'(l.pad);
    nxt = new[oh * ow * oc];
    for (int oy = 0; oy < oh; oy++)
      for (int ox = 0; ox < ow; ox++)
        for (int co = 0; co < oc; co++) begin
          longint acc = 0;
          int mx;
          case (l.kind)
            L_CONV: begin
              for (int ky = 0; ky < 3; ky++)
                for (int kx = 0; kx < 3; kx++) begin
                  int iy = oy + ky - pd, ix = ox + kx - pd;
                  if (iy >= 0 && iy < h && ix >= 0 && ix < w)
                    for (int ci = 0; ci < c; ci++)
                      acc += longint'(act[(iy * w + ix) * c + ci]) *
                             wt[li][(co * 9 + ky * 3 + kx) * c + ci];
                end
              nxt[(oy * ow + ox) * oc + co] = sat(acc >>> l.shift, l.relu);
            end
            L_FC: begin
              for (int px = 0; px < h * w; px++)
                for (int ci = 0; ci < c; ci++)
                  acc += longint'(act[px * c + ci]) * wt[li][(co * h * w + px) * c + ci];
              nxt[co] = sat(acc >>> l.shift, l.relu);
            end
            default: begin
              mx = act[((2 * oy) * w + 2 * ox) * c + co];
              for (int d = 1; d < 4; d++) begin
                int v = act[((2 * oy + d / 2) * w + 2 * ox + d % 2) * c + co];
                if (v > mx) mx = v;
              end
              nxt[(oy * ow + ox) * oc + co] = mx;
            end
          endcase
        end
    act = nxt;
  endtask

  function automatic int rnd(int lo, int hi);
    return lo + int'($urandom_range(hi - lo));
  endfunction

  // ---------------- stimulus ----------------
  int in_map[];
  task automatic load_weights();
    for (int li = 0; li < NUM_LAYERS; li++) begin
      layer_cfg_t l = net_rt[li];
      int c = int'(l.in_c), t = (l.kind == L_POOL) ? 0 : taps(l);
      wt[li] = new[int'(l.out_c) * t * c];
      foreach (wt[li][i]) wt[li][i] = rnd(-(1 << (Q - 1)), (1 << (Q - 1)) - 1);
      if (l.kind == L_POOL) continue;
      for (int tile = 0; tile < int'(l.tiles); tile++)
        for (int p = 0; p < P; p++)
          for (int k = 0; k < int'(l.k_words); k++) begin
            int co = tile * P + p, tap = k / int'(l.in_cg), cg = k % int'(l.in_cg);
            logic [M*Q-1:0] word = '0;
            for (int ln = 0; ln < M; ln++) begin
              int ci = cg * M + ln;
              if (co < int'(l.out_c) && ci < c)
                word[ln*Q +: Q] = Q'(wt[li][(co * t + tap) * c + ci]);
            end
            @(negedge clk);
            w_wr_en   = 1'b1;
            w_wr_bank = BW'(p);
            w_wr_addr = WAW'(int'(l.w_base) + tile * int'(l.k_words) + k);
            w_wr_data = word;
          end
    end
    @(negedge clk) w_wr_en = 1'b0;
  endtask

  task automatic load_input();
    in_map = new[IN_H * IN_W];
    foreach (in_map[i]) in_map[i] = rnd(-(1 << (Q - 1)), (1 << (Q - 1)) - 1);
    for (int i = 0; i < IN_H * IN_W; i++) begin
      @(negedge clk);
      fm_wr_en   = 1'b1;
      fm_wr_addr = AAW'(i);
      fm_wr_data = '0;
      fm_wr_data[Q-1:0] = Q'(in_map[i]);
    end
    @(negedge clk) fm_wr_en = 1'b0;
  endtask

  // ---------------- mechanism counters ----------------
  int n_stall = 0, n_pad = 0, n_pool_wr = 0, n_fc_issue = 0, n_conv_issue = 0;
  int n_tile_gt0 = 0, n_skip = 0, n_swap = 0;
  logic src_q = 1'b0;
  always @(posedge clk) if (rst_n) begin
    if (dut.stall) n_stall++;
    if (dut.fire && dut.iss_pad) n_pad++;
    if (dut.pool_wr_en) n_pool_wr++;
    if (dut.fire && !dut.sel_conv) n_fc_issue++;
    if (dut.fire && dut.sel_conv) n_conv_issue++;
    if (dut.fire && dut.s2_tile != '0) n_tile_gt0++;
    if (dut.u_wb.active && !dut.wb_wr_en) n_skip++;
    if (dut.src_bank != src_q) n_swap++;
    src_q <= dut.src_bank;
  end

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  int exp_conv_fc = 0, exp_pool = 0;

  initial begin
    finished = 1'b0;
    checks   = 0;
    failures = 0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    foreach (net_rt[i]) net_rt[i] = NET[i];
    load_weights();
    load_input();
    act = in_map;
    for (int li = 0; li < NUM_LAYERS; li++) ref_layer(li);

    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    wait (done);
    @(negedge clk);

    for (int g = 0; g < (N_OUT + M - 1) / M; g++) begin
      res_rd_en   = 1'b1;
      res_rd_addr = AAW'(g);
      @(negedge clk);
      res_rd_en = 1'b0;
      for (int ln = 0; ln < M; ln++) begin
        automatic int got = int'(signed'(res_rd_data[ln*Q +: Q]));
        automatic int exp = (g * M + ln < N_OUT) ? act[g * M + ln] : 0;
        check(got == exp, $sformatf("output %0d: got %0d expected %0d", g * M + ln, got, exp));
      end
    end

    for (int li = 0; li < NUM_LAYERS; li++)
      if (NET[li].kind == L_POOL) exp_pool += issue_cycles(NET[li]);
      else exp_conv_fc += issue_cycles(NET[li]);
    check(n_conv_issue + n_fc_issue == exp_conv_fc,
          $sformatf("PE issues %0d, expected %0d", n_conv_issue + n_fc_issue, exp_conv_fc));
    check(n_pool_wr * 4 == exp_pool,
          $sformatf("pool writes %0d, expected %0d", n_pool_wr, exp_pool / 4));
    check(int'(stall_count) == n_stall, "stall counter");
    check(int'(cycle_count) >= exp_conv_fc + exp_pool + n_stall &&
          int'(cycle_count) <= exp_conv_fc + exp_pool + n_stall + NUM_LAYERS * (P / M + 12),
          $sformatf("run length %0d cycles for %0d issue and %0d stall cycles", cycle_count,
                    exp_conv_fc + exp_pool, n_stall));
    $display("q=%0d P=%0d filters %0d/%0d/%0d hidden %0d: %0d cycles, %0d stalled; padding %0d, fc %0d, conv %0d, tile>0 %0d, skipped %0d, swaps %0d",
             Q, P, F1, F2, F3, FC1, cycle_count, n_stall, n_pad, n_fc_issue, n_conv_issue, n_tile_gt0, n_skip, n_swap);
    check(n_pad > 0, "no zero padding happened");
    check(n_pool_wr > 0, "no pooling happened");
    check(n_fc_issue > 0, "no fully connected layer ran");
    check(n_conv_issue > 0, "no convolution ran");
    check(n_tile_gt0 > 0, "no second output-channel tile");
    check(n_swap == NUM_LAYERS, "memory swaps");
    finished = 1'b1;
  end

endmodule
