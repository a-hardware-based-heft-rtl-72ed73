// tb_heft_workloads -- runs the HEFT_RT scheduler end to end at the
// configurations for which synthesis results are reported, and with the
// largest measured ready queue (1330 tasks).
//
//   P=4,  D=512, W_AVG=16  main configuration, 1330-task ready queue
//                          (three passes of at most 512)
//   P=8,  D=512, W_AVG=16  and P=16, D=512: PE-count scaling
//   P=4,  D=64/128/256     queue-depth scaling
//   P=16, D=132, W_AVG=16  and P=4, D=64, W_AVG=32: the two comparison points
//
// Each instance of heft_workload_harness checks its scheduler against a
// software HEFT_RT model; this module waits for all of them and sums their
// counts. Watchdog: 2,000,000 ns.
module tb_heft_workloads;
  localparam int N = 8;
  bit done [N];
  int c [N];
  int f [N];
  int checks, failures;

  heft_workload_harness #(.P(4),  .D(512), .BIG(1330)) h0 (.done(done[0]), .checks(c[0]), .failures(f[0]));
  heft_workload_harness #(.P(8),  .D(512), .BIG(700))  h1 (.done(done[1]), .checks(c[1]), .failures(f[1]));
  heft_workload_harness #(.P(16), .D(512), .BIG(700))  h2 (.done(done[2]), .checks(c[2]), .failures(f[2]));
  heft_workload_harness #(.P(4),  .D(64),  .BIG(200))  h3 (.done(done[3]), .checks(c[3]), .failures(f[3]));
  heft_workload_harness #(.P(4),  .D(128), .BIG(300))  h4 (.done(done[4]), .checks(c[4]), .failures(f[4]));
  heft_workload_harness #(.P(4),  .D(256), .BIG(600))  h5 (.done(done[5]), .checks(c[5]), .failures(f[5]));
  heft_workload_harness #(.P(16), .D(132), .BIG(400))  h6 (.done(done[6]), .checks(c[6]), .failures(f[6]));
  heft_workload_harness #(.P(4),  .D(64),  .W_AVG(32), .BIG(200)) h7 (.done(done[7]), .checks(c[7]), .failures(f[7]));

  function automatic void report(bit timeout);
    checks = 0; failures = timeout ? 1 : 0;
    for (int i = 0; i < N; i++) begin
      checks += c[i]; failures += f[i];
      if (!done[i]) begin
        failures++;
        $display("FAIL configuration %0d did not finish", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
  endfunction

  initial begin : watchdog
    #2000000;
    report(1'b1);
    $finish;
  end

  initial begin
    bit all;
    do begin
      #100;
      all = 1'b1;
      for (int i = 0; i < N; i++) all &= done[i];
    end while (!all);
    report(1'b0);
    $finish;
  end
endmodule
