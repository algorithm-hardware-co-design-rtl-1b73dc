// tb_dmp_snn_top: end-to-end test of the DMP-SNN core at its default size
// (140 inputs, 128 hidden LIF neurons, 10 memory states, 20 classes,
// 4 lanes), no parameter overrides.
//
// Weights: the slow memory uses the Pade (Legendre) state-space matrices
//   a_ij = (2i+1) * (-1 if i<j else (-1)^(i-j+1)),  b_i = (2i+1)(-1)^i
// scaled by 1/theta (theta = 40 steps) and discretised by zero-order hold,
// computed here as exp([[A,B],[0,0]]/theta) by scaling and squaring, then
// rounded to Q2.14. W_m is random; P = W_m Abar and v = W_m Bbar are
// rounded to 8 bits (x64). W_f, W_x and W_o are random 8-bit values.
//
// Stimulus: random sparse AER frames (with repeated addresses) pushed as
// fast as the core accepts them, so the input is back-pressured while a
// step is processed. Sample 1 runs T = 100 steps with d_s = 1 (the reset
// register values). Sample 2 runs 12 steps with d_s = 3 and a negative
// bias, so memory injection is skipped on 2 of every 3 steps and x is
// clamped by the ReLU on some steps.
//
// An integer model of the whole network (x, m, I_m, LIF, output layer)
// predicts every hidden spike vector, the summed output potentials and the
// class. Mechanism counters (each must be seen at least once): input stall,
// zero-input skipping (W_f reads equal active inputs x groups), one read and
// one write of neuron SRAM per group and step (operator fusion), memory
// update overlapping the neuron sweep (dependency breaking), steps without
// memory injection (dilation), ReLU clamping, hidden spikes, results.
module tb_dmp_snn_top;
  import dmp_pkg::*;
  localparam int M = 140, N = 128, D = 10, O = 20, L = 4, G = N / L;
  localparam int T1 = 100, T2 = 12, NSTEP = T1 + T2;
  localparam real THETA = 40.0;

  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic rst_n, cfg_we, sample_start, aer_valid, aer_ready, aer_eos;
  logic [2:0] cfg_sel;
  logic [15:0] cfg_addr, cfg_wdata;
  logic [7:0] cfg_lane;
  logic [$clog2(M)-1:0] aer_addr;
  logic spk_valid, result_valid, busy, in_stall;
  logic [N-1:0] spk_vec;
  logic [15:0] step_idx;
  logic [$clog2(O)-1:0] result_class;
  logic [O-1:0][SUMW-1:0] o_sum;

  dmp_snn_top dut (.*);

  // ---------------- weights ----------------
  int wf [N][M];
  int wx [M];
  int wo [N][O];
  int ab [D][D+1];     // Abar | Bbar, Q2.14
  int pv [N][D+1];     // P | v
  // ---------------- stimulus ----------------
  logic [M-1:0] frame [NSTEP];
  int ev_list [NSTEP][$];
  // ---------------- model state ----------------
  longint m_ref [D], u_ref [N], o_ref [O], sum_ref [O];
  int checks = 0, failures = 0;
  int n_stall = 0, n_wf_reads = 0, exp_wf_reads = 0, n_u_acc = 0, n_overlap = 0;
  int n_nomem = 0, n_relu0 = 0, n_hspk = 0, n_results = 0, n_steps_seen = 0;

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic cfg(input cfg_sel_e s, input int a, input int l, input int d);
    cfg_we = 1; cfg_sel = 3'(s); cfg_addr = 16'(a); cfg_lane = 8'(l); cfg_wdata = 16'(d);
    @(posedge clk); #1;
    cfg_we = 0;
  endtask

  function automatic longint sat16(input longint v);
    return (v > 32767) ? 32767 : (v < -32768) ? -32768 : v;
  endfunction

  // Zero-order-hold discretisation of the Pade/Legendre system.
  task automatic make_ab();
    localparam int K = D + 1;
    real e [K][K], t [K][K], acc [K][K], tmp [K][K];
    int sq = 8;
    for (int i = 0; i < K; i++)
      for (int j = 0; j < K; j++) begin
        real a = 0.0;
        if (i < D && j < D) a = (2 * i + 1) * ((i < j) ? -1.0 : (((i - j + 1) % 2 == 0) ? 1.0 : -1.0));
        if (i < D && j == D) a = (2 * i + 1) * ((i % 2 == 0) ? 1.0 : -1.0);
        e[i][j] = a / THETA / (2.0 ** sq);
      end
    // Taylor series of exp(e)
    for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
      acc[i][j] = (i == j) ? 1.0 : 0.0;
      t[i][j]   = (i == j) ? 1.0 : 0.0;
    end
    for (int n = 1; n <= 14; n++) begin
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
        tmp[i][j] = 0.0;
        for (int q = 0; q < K; q++) tmp[i][j] += t[i][q] * e[q][j];
        tmp[i][j] = tmp[i][j] / n;
      end
      t = tmp;
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) acc[i][j] += t[i][j];
    end
    repeat (sq) begin
      for (int i = 0; i < K; i++) for (int j = 0; j < K; j++) begin
        tmp[i][j] = 0.0;
        for (int q = 0; q < K; q++) tmp[i][j] += acc[i][q] * acc[q][j];
      end
      acc = tmp;
    end
    for (int i = 0; i < D; i++)
      for (int j = 0; j <= D; j++) ab[i][j] = $rtoi(acc[i][j] * 16384.0 + ((acc[i][j] >= 0) ? 0.5 : -0.5));
    // P = W_m Abar, v = W_m Bbar with random W_m
    for (int n = 0; n < N; n++) begin
      real wm [D];
      for (int d = 0; d < D; d++) wm[d] = ($urandom_range(2000) - 1000) / 1000.0;
      for (int j = 0; j <= D; j++) begin
        real s = 0.0;
        for (int d = 0; d < D; d++) s += wm[d] * acc[d][j];
        s = s * 64.0;
        pv[n][j] = (s > 127.0) ? 127 : (s < -128.0) ? -128 : $rtoi(s + ((s >= 0) ? 0.5 : -0.5));
      end
    end
  endtask

  // ---------------- mechanism probes ----------------
  always @(posedge clk) if (rst_n) begin
    if (in_stall) n_stall++;
    if (dut.u_core.sp_issue) n_wf_reads++;
    if (dut.u_core.u_en) n_u_acc++;
    if (dut.u_mu.running && dut.u_core.busy) n_overlap++;
    if (result_valid) n_results++;
  end

  // ---------------- AER driver ----------------
  task automatic send_beat(input int a, input bit eos);
    bit moved = 0;
    aer_valid = 1; aer_addr = 8'(a); aer_eos = eos;
    while (!moved) begin
      #8 moved = aer_ready;
      @(posedge clk); #1;
    end
    aer_valid = 0; aer_eos = 0;
  endtask

  initial begin : driver
    aer_valid = 0; aer_addr = '0; aer_eos = 0;
    wait (rst_n === 1'b1);
    @(posedge clk); #1;
    wait (driver_go);
    for (int k = 0; k < NSTEP; k++) begin
      if (k == T1) wait (sample2_go);
      foreach (ev_list[k][e]) send_beat(ev_list[k][e], 1'b0);
      send_beat(0, 1'b1);
    end
  end

  bit driver_go = 0, sample2_go = 0;

  // ---------------- model of one step ----------------
  task automatic model_step(input int k, input int ds, input int bias, input int beta,
                            input int beta_out, input int thr, output logic [N-1:0] spk);
    longint x, mn [D];
    bit first = (k == 0 || k == T1);
    bit me = (((k < T1) ? k : k - T1) % ds) == 0;
    x = bias;
    for (int j = 0; j < M; j++) if (frame[k][j]) x += wx[j];
    if (x <= 0) begin x = 0; n_relu0++; end
    if (x > 32767) x = 32767;
    if (first) for (int d = 0; d < D; d++) m_ref[d] = 0;
    if (first) for (int c = 0; c < O; c++) begin o_ref[c] = 0; sum_ref[c] = 0; end
    if (!me) n_nomem++;
    for (int i = 0; i < D; i++) begin
      longint s = longint'(ab[i][D]) * x;
      for (int j = 0; j < D; j++) s += longint'(ab[i][j]) * m_ref[j];
      mn[i] = sat16(s >>> A_FRAC);
    end
    for (int n = 0; n < N; n++) begin
      longint cur = 0, im = 0, s;
      for (int j = 0; j < M; j++) if (frame[k][j]) cur += wf[n][j];
      if (me) begin
        for (int d = 0; d < D; d++) im += longint'(pv[n][d]) * m_ref[d];
        im += longint'(pv[n][D]) * x;
        im = im >>> PV_FRAC;
      end
      s = sat16((first ? 0 : ((u_ref[n] * beta) >>> 8)) + cur + im);
      spk[n] = s > thr;
      u_ref[n] = spk[n] ? 0 : s;
    end
    for (int d = 0; d < D; d++) m_ref[d] = mn[d];
    for (int c = 0; c < O; c++) begin
      o_ref[c] = (o_ref[c] * beta_out) >>> 8;
      for (int n = 0; n < N; n++)
        if (spk[n]) o_ref[c] = sat16(o_ref[c] + wo[n][c]);
      sum_ref[c] += o_ref[c];
    end
  endtask

  task automatic check_result(input string tag);
    int best = 0;
    for (int c = 1; c < O; c++) if (sum_ref[c] > sum_ref[best]) best = c;
    for (int c = 0; c < O; c++)
      check(longint'($signed(o_sum[c])) == sum_ref[c],
            $sformatf("%s o_sum[%0d] %0d expected %0d", tag, c, $signed(o_sum[c]), sum_ref[c]));
    check(32'(result_class) == best, $sformatf("%s class %0d expected %0d", tag, result_class, best));
    $display("%s: class %0d", tag, result_class);
  endtask

  initial begin : main
    logic [N-1:0] spk;
    rst_n = 0; cfg_we = 0; cfg_sel = '0; cfg_addr = '0; cfg_lane = '0; cfg_wdata = '0;
    sample_start = 0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    // ---- stimulus and weights ----
    for (int k = 0; k < NSTEP; k++) begin
      automatic int dens = (k % 17 == 5) ? 0 : (k % 23 == 7) ? 40 : 4 + $urandom_range(10);
      frame[k] = '0;
      for (int j = 0; j < M; j++)
        if ($urandom_range(99) < dens) begin
          frame[k][j] = 1'b1;
          ev_list[k].push_back(j);
          if ($urandom_range(9) == 0) ev_list[k].push_back(j);  // repeated event
        end
      if ($urandom_range(3) == 0) ev_list[k].push_back(M + 3);    // out-of-range address
    end
    make_ab();
    for (int j = 0; j < M; j++) wx[j] = $signed($urandom_range(60)) - 20;
    for (int n = 0; n < N; n++) for (int j = 0; j < M; j++) wf[n][j] = $signed($urandom_range(50)) - 18;
    for (int n = 0; n < N; n++) for (int c = 0; c < O; c++) wo[n][c] = $signed($urandom_range(255)) - 128;
    for (int j = 0; j < M; j++) for (int n = 0; n < N; n++) cfg(SEL_WF, j * G + n / L, n % L, wf[n][j]);
    for (int j = 0; j < M; j++) cfg(SEL_WX, j, 0, wx[j]);
    for (int n = 0; n < N; n++) for (int j = 0; j <= D; j++) cfg(SEL_PV, n, j, pv[n][j]);
    for (int i = 0; i < D; i++) for (int j = 0; j <= D; j++) cfg(SEL_AB, i, j, ab[i][j]);
    for (int n = 0; n < N; n++) for (int c = 0; c < O; c++) cfg(SEL_WO, n, c, wo[n][c]);
    cfg(SEL_REG, REG_THRESH, 0, 40);
    sample_start = 1;
    @(posedge clk); #1;
    sample_start = 0;
    driver_go = 1;
    // ---- run both samples, checking every step ----
    for (int k = 0; k < NSTEP; k++) begin
      automatic int wd = 0;
      automatic int nact = 0;
      if (k == T1) begin
        // between samples: wait for the result, then reconfigure
        while (!result_valid && wd < 5000) begin @(posedge clk); #1; wd++; end
        @(posedge clk); #1;
        check_result("sample 1");
        check(step_idx == 0, "step counter restarts after a sample");
        cfg(SEL_REG, REG_DILATION, 0, 3);
        cfg(SEL_REG, REG_NSTEPS, 0, T2);
        cfg(SEL_REG, REG_BIAS, 0, -150);
        sample2_go = 1;
        wd = 0;
      end
      for (int j = 0; j < M; j++) nact += frame[k][j];
      exp_wf_reads += nact * G;
      model_step(k, (k < T1) ? 1 : 3, (k < T1) ? 0 : -150, 230, 230, 40, spk);
      while (!spk_valid && wd < 20000) begin @(posedge clk); #1; wd++; end
      // spk_valid is a one-cycle pulse; it was high in the cycle just before this point
      check(wd < 20000, $sformatf("step %0d completed", k));
      n_steps_seen++;
      check(spk_vec == spk, $sformatf("step %0d hidden spikes differ (%0d vs %0d set)",
                                       k, $countones(spk_vec), $countones(spk)));
      n_hspk += $countones(spk);
      @(posedge clk); #1;
    end
    begin
      automatic int wd = 0;
      while (n_results < 2 && wd < 5000) begin @(posedge clk); #1; wd++; end
    end
    @(posedge clk); #1;
    check_result("sample 2");
    // ---- mechanisms ----
    check(n_stall > 0, "input back-pressure (stall) occurred");
    check(n_wf_reads == exp_wf_reads, $sformatf("W_f reads %0d = active inputs x groups %0d (zero inputs skipped)",
                                                n_wf_reads, exp_wf_reads));
    check(exp_wf_reads < NSTEP * M * G, "sparse inputs skipped");
    check(n_u_acc == 2 * G * NSTEP, $sformatf("neuron SRAM accesses %0d = 2 per group per step", n_u_acc));
    check(n_overlap > 0, "memory update overlapped the neuron sweep");
    check(n_nomem > 0, "dilated steps without memory injection occurred");
    check(n_relu0 > 0, "ReLU clamped x to zero");
    check(n_hspk > 0, "hidden neurons spiked");
    check(n_results == 2, $sformatf("%0d results", n_results));
    $display("stall=%0d wf_reads=%0d u_acc=%0d overlap=%0d nomem=%0d relu0=%0d hspk=%0d results=%0d",
             n_stall, n_wf_reads, n_u_acc, n_overlap, n_nomem, n_relu0, n_hspk, n_results);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (600000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
