// tb_aer_rx: drives random frames of address events (with repeats and
// out-of-range addresses) and checks the collected spike vector, that only
// the first event of a channel is forwarded, the end-of-step pulse, the
// back-pressure while a frame is held (ready low, stall high) and the clear
// on release.
module tb_aer_rx;
  localparam int M = 140;
  localparam int AW = $clog2(M);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, aer_valid, aer_ready, aer_eos, release_frame;
  logic [AW-1:0] aer_addr, ev_addr;
  logic [M-1:0] spk_vec;
  logic ev_valid, frame_done, stall;
  int checks = 0, failures = 0, n_fwd = 0, n_stall = 0;

  aer_rx #(.M_IN(M)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  always @(posedge clk) if (rst_n && ev_valid) n_fwd++;
  always @(posedge clk) if (rst_n && stall) n_stall++;

  initial begin
    rst_n = 0; aer_valid = 0; aer_eos = 0; aer_addr = '0; release_frame = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int f = 0; f < 20; f++) begin
      automatic logic [M-1:0] expv = '0;
      automatic int fwd0 = n_fwd, uniq = 0;
      automatic int n_ev = $urandom_range(60);
      for (int e = 0; e < n_ev; e++) begin
        automatic int a = $urandom_range(159);  // some out of range
        aer_valid <= 1; aer_eos <= 0; aer_addr <= AW'(a);
        #1;
        check(aer_ready, "ready while frame open");
        check(ev_valid == (a < M && !expv[a]), "forward only first spike of a channel");
        @(posedge clk);
        if (a < M) begin
          if (!expv[a]) uniq++;
          expv[a] = 1'b1;
        end
      end
      aer_valid <= 1; aer_eos <= 1;
      @(posedge clk);
      aer_eos <= 0;
      #1;
      check(frame_done, "frame_done pulse after end-of-step");
      check(spk_vec == expv, "spike vector");
      check(n_fwd - fwd0 == uniq, "forward count");
      // frame held: ready low and stall high while a beat waits
      aer_addr <= 5;
      repeat (3) begin
        #1 check(!aer_ready && stall, "held frame back-pressures input");
        @(posedge clk);
        #1 check(!frame_done, "frame_done is one pulse");
      end
      check(spk_vec == expv, "vector unchanged while held");
      aer_valid <= 0;
      release_frame <= 1;
      @(posedge clk);
      release_frame <= 0;
      #1 check(spk_vec == '0 && aer_ready, "release clears and reopens");
    end
    check(n_stall > 0, "stall seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
