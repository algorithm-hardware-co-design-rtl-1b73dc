// tb_output_layer: output layer at its default size (128 hidden, 20 classes)
// against an integer model of
//   o[c] = sat16(leak(o[c]) + W_o[i][c] over active i),  o_sum[c] += o[c],
//   class = argmax o_sum (lowest index on a tie),
// over three samples of random length, with clear between samples. Checks
// o_sum after every step, the class and the result pulse, and the busy time
// 3 + (n ? n+2 : 1) (+ N_OUT on the last step), n = active hidden spikes.
module tb_output_layer;
  import dmp_pkg::*;
  localparam int N = 128, O = 20;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, clear, start, last, ready, result_valid, cfg_we;
  logic [N-1:0] s_hid;
  logic [BW-1:0] beta_out;
  logic [$clog2(O)-1:0] result_class, cfg_lane;
  logic [O-1:0][SUMW-1:0] o_sum;
  logic [$clog2(N)-1:0] cfg_addr;
  logic [WW-1:0] cfg_wdata;
  int wo [N][O];
  longint o_ref [O], sum_ref [O];
  int checks = 0, failures = 0, n_results = 0;

  output_layer #(.N_HID(N), .N_OUT(O)) dut (.*);

  always @(posedge clk) if (rst_n && result_valid) n_results++;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    rst_n = 0; clear = 0; start = 0; last = 0; cfg_we = 0; s_hid = '0;
    beta_out = 8'd220; cfg_addr = '0; cfg_lane = '0; cfg_wdata = '0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    for (int i = 0; i < N; i++)
      for (int c = 0; c < O; c++) begin
        wo[i][c] = $signed($urandom_range(255)) - 128;
        cfg_we = 1; cfg_addr = 7'(i); cfg_lane = 5'(c); cfg_wdata = 8'(wo[i][c]);
        @(posedge clk); #1;
      end
    cfg_we = 0;
    for (int smp = 0; smp < 3; smp++) begin
      automatic int T = 3 + $urandom_range(8);
      clear = 1;
      @(posedge clk); #1;
      clear = 0;
      for (int c = 0; c < O; c++) begin o_ref[c] = 0; sum_ref[c] = 0; end
      for (int k = 0; k < T; k++) begin
        automatic int n = 0, lat = 0, exp_lat;
        for (int i = 0; i < N; i++) begin
          s_hid[i] = ($urandom_range(99) < ((smp == 1) ? 60 : 15));
          n += s_hid[i];
        end
        if (k == 1) begin s_hid = '0; n = 0; end
        for (int c = 0; c < O; c++) begin
          o_ref[c] = (o_ref[c] * longint'(beta_out)) >>> 8;
          for (int i = 0; i < N; i++)
            if (s_hid[i]) begin
              o_ref[c] += wo[i][c];
              o_ref[c] = (o_ref[c] > 32767) ? 32767 : (o_ref[c] < -32768) ? -32768 : o_ref[c];
            end
          sum_ref[c] += o_ref[c];
        end
        exp_lat = 3 + ((n > 0) ? n + 2 : 1) + ((k == T - 1) ? O : 0);
        last = (k == T - 1);
        start = 1;
        @(posedge clk); #1;
        start = 0;
        lat = 1;
        while (!ready && lat < 1000) begin

          @(posedge clk); #1; lat++;
        end
        check(lat == exp_lat, $sformatf("busy %0d expected %0d", lat, exp_lat));
        for (int c = 0; c < O; c++)
          check(longint'($signed(o_sum[c])) == sum_ref[c],
                $sformatf("o_sum[%0d] %0d expected %0d", c, $signed(o_sum[c]), sum_ref[c]));
        if (k == T - 1) begin
          automatic int best = 0;
          for (int c = 1; c < O; c++) if (sum_ref[c] > sum_ref[best]) best = c;
          check(32'(result_class) == best, $sformatf("class %0d expected %0d", result_class, best));
        end
      end
    end
    @(posedge clk); #1;
    check(n_results == 3, $sformatf("result pulses %0d expected 3", n_results));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
