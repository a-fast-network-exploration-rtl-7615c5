// tb_maxpool_unit: self-checking test of the max-pooling block.
//
// A behavioural memory (one-cycle read latency, like the activation memory) holds a random
// feature map of 11 x 7 pixels and 5 channels in 3 words of M = 2 lanes; the block pools it to
// 5 x 3 (the odd last row and column dropped). Every written word is compared with the
// lane-wise signed maximum of its 2x2 window computed here; each output word must be written
// exactly once, the block must read one word per cycle (4 reads per output word, no idle
// cycle), and done must follow the last write.
module tb_maxpool_unit;
  import kws_pkg::*;

  localparam int Q = 4, M = 2;
  localparam int H = 11, W = 7, C = 5, CG = (C + M - 1) / M, OH = H / 2, OW = W / 2;

  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;

  logic              start = 1'b0;
  layer_cfg_t        cfg;
  logic              rd_en, wr_en, busy, done;
  logic [ADDR_W-1:0] rd_addr, wr_addr;
  logic [M*Q-1:0]    rd_data, wr_data;

  maxpool_unit #(.Q(Q), .M(M)) dut (.*);

  logic [M*Q-1:0] fmem [H * W * CG];
  logic [M*Q-1:0] omem [OH * OW * CG];
  int             written [OH * OW * CG];

  always_ff @(posedge clk) if (rd_en) rd_data <= fmem[rd_addr];
  always @(posedge clk) if (wr_en && rst_n) begin
    omem[wr_addr] <= wr_data;
    written[wr_addr]++;
  end

  int checks = 0, failures = 0, reads = 0, busy_cycles = 0;
  always @(posedge clk) begin
    if (rd_en && rst_n) reads++;
    if (busy && rst_n) busy_cycles++;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    cfg = '0;
    cfg.kind  = L_POOL;
    cfg.in_h  = DIM_W'(H);  cfg.in_w  = DIM_W'(W);  cfg.in_c  = DIM_W'(C);  cfg.in_cg  = DIM_W'(CG);
    cfg.out_h = DIM_W'(OH); cfg.out_w = DIM_W'(OW); cfg.out_c = DIM_W'(C);  cfg.out_cg = DIM_W'(CG);
    foreach (fmem[i]) fmem[i] = $urandom;
    foreach (written[i]) written[i] = 0;
    rd_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (!done) @(negedge clk);
    for (int py = 0; py < OH; py++)
      for (int px = 0; px < OW; px++)
        for (int g = 0; g < CG; g++) begin
          automatic int oa = (py * OW + px) * CG + g;
          checks++;
          if (written[oa] != 1) begin
            failures++;
            $display("FAIL: word %0d written %0d times", oa, written[oa]);
          end
          for (int l = 0; l < M; l++) begin
            automatic int mx = -1000;
            for (int d = 0; d < 4; d++) begin
              automatic int v = int'(signed'(fmem[((2 * py + d / 2) * W + 2 * px + d % 2) * CG + g][l*Q +: Q]));
              if (v > mx) mx = v;
            end
            checks++;
            if (int'(signed'(omem[oa][l*Q +: Q])) != mx) begin
              failures++;
              $display("FAIL: (%0d,%0d) word %0d lane %0d: %0d expected %0d", py, px, g, l,
                       signed'(omem[oa][l*Q +: Q]), mx);
            end
          end
        end
    checks++;
    if (reads != OH * OW * CG * 4) begin
      failures++;
      $display("FAIL: %0d reads, expected %0d", reads, OH * OW * CG * 4);
    end
    checks++;
    if (busy_cycles > OH * OW * CG * 4 + 4) begin
      failures++;
      $display("FAIL: busy for %0d cycles, expected at most %0d", busy_cycles, OH * OW * CG * 4 + 4);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
