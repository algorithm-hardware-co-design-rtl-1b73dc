// tb_neuron_core: the hidden-layer engine at its default size (140 inputs,
// 128 neurons, 10 memory states, 4 lanes) against an integer model.
//
// Loads random W_f and P/v, then runs 30 steps with random sparse input
// spike vectors (including an empty one and a dense one), random x and
// m[k-1], and random memory-injection enables. The model computes
//   I = W_f s,  I_m = mem_en ? (P m + v x) >>> 8 : 0,
//   u = sat16(leak(u) + I + I_m), spike = u > theta, reset to 0,
// and every step's s_out is compared. The step latency is checked against
// 1 + sum over groups of (2 + max(n ? n+1 : 0, mem_en ? LANES+2 : 0) + 1),
// n = number of active inputs, which shows zero inputs being skipped.
module tb_neuron_core;
  import dmp_pkg::*;
  localparam int M = 140, N = 128, D = 10, L = 4, G = N / L;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, start, first, mem_en, done, busy, cfg_we;
  logic [M-1:0] spk_in;
  logic signed [MW-1:0] x_in;
  logic [D-1:0][MW-1:0] m_prev;
  logic [BW-1:0] beta;
  logic signed [UW-1:0] thresh;
  logic [N-1:0] s_out;
  cfg_sel_e cfg_sel;
  logic [15:0] cfg_addr, cfg_wdata;
  logic [7:0] cfg_lane;

  int wf [N][M];
  int p_m [N][D+1];
  longint u_ref [N];
  int checks = 0, failures = 0, n_spikes = 0, n_skip_steps = 0, n_mem_steps = 0;

  neuron_core #(.M_IN(M), .N_HID(N), .D_MEM(D), .LANES(L)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic cfg(input cfg_sel_e s, input int a, input int l, input int d);
    cfg_we = 1; cfg_sel = s; cfg_addr = 16'(a); cfg_lane = 8'(l); cfg_wdata = 16'(d);
    @(posedge clk); #1;
    cfg_we = 0;
  endtask

  function automatic longint lk(input longint u, input int b);
    return (u * b) >>> 8;
  endfunction

  initial begin
    rst_n = 0; start = 0; first = 0; mem_en = 0; cfg_we = 0; cfg_sel = SEL_WF;
    cfg_addr = '0; cfg_lane = '0; cfg_wdata = '0; spk_in = '0; x_in = '0; m_prev = '0;
    beta = 8'd200; thresh = 16'sd60;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    for (int j = 0; j < M; j++)
      for (int i = 0; i < N; i++) begin
        wf[i][j] = $signed($urandom_range(60)) - 25;
        cfg(SEL_WF, j * G + i / L, i % L, wf[i][j]);
      end
    for (int i = 0; i < N; i++)
      for (int j = 0; j <= D; j++) begin
        p_m[i][j] = $signed($urandom_range(255)) - 128;
        cfg(SEL_PV, i, j, p_m[i][j]);
      end
    for (int k = 0; k < 30; k++) begin
      automatic int nact = 0, lat = 0, expect_lat = 1;
      automatic int dens = (k == 3) ? 0 : (k == 5) ? 100 : $urandom_range(25);
      automatic bit me = (k % 4 != 1);
      for (int j = 0; j < M; j++) begin
        spk_in[j] = ($urandom_range(99) < dens);
        nact += spk_in[j];
      end
      x_in = 16'($urandom_range(2000));
      for (int d = 0; d < D; d++) m_prev[d] = 16'($signed($urandom_range(4000)) - 2000);
      mem_en = me;
      first = (k == 0);
      if (nact == 0) n_skip_steps++;
      if (me) n_mem_steps++;
      // reference model
      for (int i = 0; i < N; i++) begin
        automatic longint cur = 0, im = 0, s;
        for (int j = 0; j < M; j++) if (spk_in[j]) cur += wf[i][j];
        if (me) begin
          for (int d = 0; d < D; d++) im += longint'(p_m[i][d]) * longint'($signed(m_prev[d]));
          im += longint'(p_m[i][D]) * longint'(x_in);
          im = im >>> PV_FRAC;
        end
        s = ((k == 0) ? 0 : lk(u_ref[i], beta)) + cur + im;
        s = (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
        u_ref[i] = s;
      end
      begin
        automatic int run = ((nact > 0) ? nact + 1 : 0);
        if (me && (L + 2 > run)) run = L + 2;
        expect_lat = 1 + G * (2 + run + 1);
      end
      start = 1;
      @(posedge clk); #1;
      start = 0;
      lat = 1;
      while (!done && lat < 20000) begin @(posedge clk); #1; lat++; end
      check(lat == expect_lat, $sformatf("step %0d latency %0d expected %0d", k, lat, expect_lat));
      for (int i = 0; i < N; i++) begin
        automatic bit sp = u_ref[i] > longint'(thresh);
        if (sp) begin u_ref[i] = 0; n_spikes++; end
        check(s_out[i] == sp, $sformatf("step %0d neuron %0d spike %0b expected %0b", k, i, s_out[i], sp));
      end
    end
    check(n_spikes > 0 && n_skip_steps > 0 && n_mem_steps > 0, "spikes, empty steps and memory steps all occurred");
    $display("spikes=%0d empty_steps=%0d mem_steps=%0d", n_spikes, n_skip_steps, n_mem_steps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
