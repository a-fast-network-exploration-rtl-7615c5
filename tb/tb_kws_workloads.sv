// tb_kws_workloads: the network family NN<q, s> evaluated for the accelerator, each size run
// end to end.
//
// The accelerator's main build is q = 4, s = 4.5 (P = 72); the other configurations it was
// evaluated at differ only in their sizes: q = 4 with s = 1, 2, 2.5, 3.5, 4 and q = 8 with
// s = 1, 2, 2.5, 3, 3.5, 4, each with P = 16s PEs, M = 8 multipliers, filters 64s/32s/32s,
// 64s hidden neurons, the 44x13 spectrum and 30 classes. Each runs in its own instance of
// kws_workload_run (full inference against the reference model, issue counts, run length,
// mechanisms); the runs proceed side by side and the totals are summed here.
module tb_kws_workloads;

  localparam int N = 11;
  localparam int WATCHDOG = 2_000_000;

  logic fin [N];
  int   chk [N], fl [N];

  kws_workload_run #(.Q(4), .P(16), .F1(64),  .F2(32),  .F3(32),  .FC1(64))  u_q4_s1   (fin[0],  chk[0],  fl[0]);
  kws_workload_run #(.Q(4), .P(32), .F1(128), .F2(64),  .F3(64),  .FC1(128)) u_q4_s2   (fin[1],  chk[1],  fl[1]);
  kws_workload_run #(.Q(4), .P(40), .F1(160), .F2(80),  .F3(80),  .FC1(160)) u_q4_s2p5 (fin[2],  chk[2],  fl[2]);
  kws_workload_run #(.Q(4), .P(56), .F1(224), .F2(112), .F3(112), .FC1(224)) u_q4_s3p5 (fin[3],  chk[3],  fl[3]);
  kws_workload_run #(.Q(4), .P(64), .F1(256), .F2(128), .F3(128), .FC1(256)) u_q4_s4   (fin[4],  chk[4],  fl[4]);
  kws_workload_run #(.Q(8), .P(16), .F1(64),  .F2(32),  .F3(32),  .FC1(64))  u_q8_s1   (fin[5],  chk[5],  fl[5]);
  kws_workload_run #(.Q(8), .P(32), .F1(128), .F2(64),  .F3(64),  .FC1(128)) u_q8_s2   (fin[6],  chk[6],  fl[6]);
  kws_workload_run #(.Q(8), .P(40), .F1(160), .F2(80),  .F3(80),  .FC1(160)) u_q8_s2p5 (fin[7],  chk[7],  fl[7]);
  kws_workload_run #(.Q(8), .P(48), .F1(192), .F2(96),  .F3(96),  .FC1(192)) u_q8_s3   (fin[8],  chk[8],  fl[8]);
  kws_workload_run #(.Q(8), .P(56), .F1(224), .F2(112), .F3(112), .FC1(224)) u_q8_s3p5 (fin[9],  chk[9],  fl[9]);
  kws_workload_run #(.Q(8), .P(64), .F1(256), .F2(128), .F3(128), .FC1(256)) u_q8_s4   (fin[10], chk[10], fl[10]);

  int checks = 0, failures = 0;

  function automatic bit all_done();
    foreach (fin[i]) if (fin[i] !== 1'b1) return 1'b0;
    return 1'b1;
  endfunction

  initial begin
    #(10 * WATCHDOG);
    checks = 0;
    failures = 1;
    foreach (chk[i]) begin
      checks += chk[i];
      failures += fl[i];
    end
    $display("FAIL: watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100;
    while (!all_done()) #10;
    foreach (chk[i]) begin
      checks += chk[i];
      failures += fl[i];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
