// tb_dmp_workloads: runs the DMP-SNN core at the layer sizes of the other
// evaluated workloads, each a complete checked run (dmp_workload_run), side
// by side on one clock:
//   double : 140 inputs, 256 hidden neurons, d = 10, 20 classes, with the
//            MAC/LIF lanes raised from 4 to 16 (the doubled-layer hardware
//            scaling point), 100 + 12 steps
//   ssc    : 140 inputs, 128 hidden, d = 10, 35 classes, 250 + 12 steps
//            (speech-command classes; one hidden layer)
//   smnist : 1 input channel, 200 hidden, d = 40, window 300, 10 classes,
//            784 + 12 steps (pixel-sequence task, one hidden layer, the
//            single input channel spiking on about half of the steps)
// The default size (spoken digits, 140-128-10-20) is covered by
// tb_dmp_snn_top. Every hidden spike vector, the output sums and the class
// are compared with an integer model, and each mechanism must occur in each
// run. A watchdog ends the test if a run does not finish.
module tb_dmp_workloads;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  localparam int NR = 3;
  logic [NR-1:0] done;
  int chk [NR], fl [NR];

  dmp_workload_run #(.NAME("double"), .M(140), .N(256), .D(10), .O(20), .L(16),
                     .T1(100), .T2(12), .THETA(40.0), .DENS_LO(4))
    u_double (.clk, .done(done[0]), .checks(chk[0]), .failures(fl[0]));

  dmp_workload_run #(.NAME("ssc"), .M(140), .N(128), .D(10), .O(35), .L(4),
                     .T1(250), .T2(12), .THETA(40.0), .DENS_LO(4))
    u_ssc (.clk, .done(done[1]), .checks(chk[1]), .failures(fl[1]));

  dmp_workload_run #(.NAME("smnist"), .M(1), .N(200), .D(40), .O(10), .L(4),
                     .T1(784), .T2(12), .THETA(300.0), .DENS_LO(45))
    u_smnist (.clk, .done(done[2]), .checks(chk[2]), .failures(fl[2]));

  initial begin
    automatic int checks = 0, failures = 0;
    #100;
    wait (&done);
    for (int r = 0; r < NR; r++) begin
      checks += chk[r];
      failures += fl[r];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    automatic int checks = 0, failures = 0;
    repeat (2000000) @(posedge clk);
    for (int r = 0; r < NR; r++) begin
      checks += chk[r];
      failures += fl[r];
    end
    failures++;
    $display("watchdog expired, runs done: %b", done);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
