// tb_weight_memory: self-checking test of the banked weight memory.
//
// Writes a distinct random word into every address of every bank (P = 5 banks of 37 words),
// then reads each address once and checks that all P banks return their own word one cycle
// after the read, and that a cycle without ren keeps the previous output.
module tb_weight_memory;

  localparam int Q = 4, M = 8, P = 5, DEPTH = 37;
  localparam int AW = $clog2(DEPTH), BW = $clog2(P);

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                  ren = 1'b0, wen = 1'b0;
  logic [AW-1:0]         raddr = '0, waddr = '0;
  logic [BW-1:0]         wbank = '0;
  logic [M*Q-1:0]        wdata = '0;
  logic [P-1:0][M*Q-1:0] rdata;

  weight_memory #(.Q(Q), .M(M), .P(P), .DEPTH(DEPTH)) dut (.*);

  int checks = 0, failures = 0;
  logic [M*Q-1:0] model [P][DEPTH];

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int a = 0; a < DEPTH; a++)
      for (int p = 0; p < P; p++) begin
        @(negedge clk);
        wen   = 1'b1;
        wbank = BW'(p);
        waddr = AW'(a);
        wdata = $urandom;
        model[p][a] = wdata;
      end
    @(negedge clk);
    wen = 1'b0;
    for (int a = DEPTH - 1; a >= 0; a--) begin
      ren   = 1'b1;
      raddr = AW'(a);
      @(negedge clk);
      ren   = 1'b0;
      raddr = AW'((a + 1) % DEPTH);
      for (int p = 0; p < P; p++) begin
        checks++;
        if (rdata[p] !== model[p][a]) begin
          failures++;
          $display("FAIL: bank %0d addr %0d: %h expected %h", p, a, rdata[p], model[p][a]);
        end
      end
      @(negedge clk);
      checks++;
      if (rdata[0] !== model[0][a]) begin
        failures++;
        $display("FAIL: output changed without ren");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
