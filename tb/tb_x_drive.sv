// tb_x_drive: loads random W_x, streams random event sets (back to back
// and with gaps) and checks x = ReLU(sum W_x + b) with 16-bit saturation,
// including negative (clamped to 0) and large biases, and that x_valid
// appears exactly two cycles after `finish` and drops on `clear`.
module tb_x_drive;
  import dmp_pkg::*;
  localparam int M = 140;
  localparam int AW = $clog2(M);
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, clear, ev_valid, finish, x_valid, cfg_we;
  logic [AW-1:0] ev_addr, cfg_addr;
  logic signed [MW-1:0] bias, x_out;
  logic [WW-1:0] cfg_wdata;
  logic signed [7:0] wx [M];
  int checks = 0, failures = 0, n_zero = 0, n_pos = 0;

  x_drive #(.M_IN(M)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    rst_n = 0; clear = 0; ev_valid = 0; finish = 0; cfg_we = 0;
    ev_addr = '0; cfg_addr = '0; bias = '0; cfg_wdata = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    for (int j = 0; j < M; j++) begin
      wx[j] = 8'($urandom);
      cfg_we = 1; cfg_addr = AW'(j); cfg_wdata = wx[j];
      @(posedge clk); #1;
    end
    cfg_we = 0;
    for (int f = 0; f < 60; f++) begin
      automatic longint s;
      automatic int b = (f % 10 == 9) ? 32000 : $signed($urandom_range(1000)) - 500;
      automatic bit used [M];
      bias = 16'(b);
      clear = 1;
      @(posedge clk); #1;
      clear = 0;
      s = b;
      for (int j = 0; j < M; j++) used[j] = 0;
      for (int e = 0; e < $urandom_range(80); e++) begin
        automatic int a = $urandom_range(M - 1);
        if (used[a]) continue;
        used[a] = 1;
        s += wx[a];
        ev_valid = 1; ev_addr = AW'(a);
        @(posedge clk); #1;
        ev_valid = 0;
        if ($urandom_range(3) == 0) begin @(posedge clk); #1; end
      end
      finish = 1;
      @(posedge clk); #1;
      finish = 0;
      check(!x_valid, "x not valid one cycle after finish");
      @(posedge clk); #1;
      check(x_valid, "x valid two cycles after finish");
      if (s < 0) begin s = 0; n_zero++; end else n_pos++;
      if (s > 32767) s = 32767;
      check(longint'(x_out) == s, $sformatf("x got %0d exp %0d", x_out, s));
    end
    clear = 1;
    @(posedge clk); #1;
    clear = 0;
    check(!x_valid, "clear drops x_valid");
    check(n_zero > 0 && n_pos > 0, "both ReLU branches exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk); #1;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
