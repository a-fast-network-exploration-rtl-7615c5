// tb_act_memory: self-checking test of the feature-map / output memory.
//
// Fills a 100-word memory with random words, then reads and writes at once for 1000 cycles
// (random addresses, random enables) and checks each read, one cycle after ren, against a
// model; a read of the address being written returns the old word.
module tb_act_memory;

  localparam int Q = 4, M = 8, DEPTH = 100, AW = $clog2(DEPTH);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic           ren = 1'b0, wen = 1'b0;
  logic [AW-1:0]  raddr = '0, waddr = '0;
  logic [M*Q-1:0] wdata = '0, rdata;

  act_memory #(.Q(Q), .M(M), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [M*Q-1:0] model [DEPTH];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      wen   = 1'b1;
      waddr = AW'(a);
      wdata = $urandom;
      model[a] = wdata;
    end
    for (int i = 0; i < 1000; i++) begin
      automatic logic [M*Q-1:0] expect_w;
      automatic bit             do_read;
      @(negedge clk);
      do_read = 1'($urandom_range(1));
      ren   = do_read;
      raddr = AW'($urandom_range(DEPTH - 1));
      wen   = 1'($urandom_range(1));
      waddr = ($urandom_range(3) == 0) ? raddr : AW'($urandom_range(DEPTH - 1));
      wdata = $urandom;
      expect_w = model[raddr];
      if (wen) model[waddr] = wdata;
      if (do_read) begin
        @(negedge clk);
        ren = 1'b0;
        wen = 1'b0;
        checks++;
        if (rdata !== expect_w) begin
          failures++;
          $display("FAIL: read %h expected %h", rdata, expect_w);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
