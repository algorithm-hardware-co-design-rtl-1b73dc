// tb_mem_update: loads a random Q2.14 Abar/Bbar, runs a sequence of steps
// with random x and checks every m[k] against an integer model of
// m[k] = sat16((Abar m[k-1] + Bbar x[k]) >>> 14), the done latency of
// D_MEM+2 cycles, that m[k-1] holds until commit, and clear.
module tb_mem_update;
  import dmp_pkg::*;
  localparam int D = 10;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, clear, start, commit, done, cfg_we;
  logic signed [MW-1:0] x_in;
  logic [D-1:0][MW-1:0] m_prev;
  logic [$clog2(D)-1:0] cfg_row;
  logic [$clog2(D+1)-1:0] cfg_col;
  logic [CW-1:0] cfg_wdata;
  int a_m [D][D+1];
  longint mref [D];
  int checks = 0, failures = 0, n_sat = 0;

  mem_update #(.D_MEM(D)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  function automatic longint floor_shift(input longint v, input int sh);
    return v >>> sh;
  endfunction

  initial begin
    rst_n = 0; clear = 0; start = 0; commit = 0; cfg_we = 0; x_in = '0;
    cfg_row = '0; cfg_col = '0; cfg_wdata = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < D; i++)
      for (int j = 0; j <= D; j++) begin
        a_m[i][j] = $signed($urandom_range(16000)) - 8000;
        if (i == j) a_m[i][j] = 15000;
        cfg_we <= 1; cfg_row <= 4'(i); cfg_col <= 4'(j); cfg_wdata <= 16'(a_m[i][j]);
        @(posedge clk);
      end
    cfg_we <= 0;
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    for (int i = 0; i < D; i++) mref[i] = 0;
    for (int k = 0; k < 40; k++) begin
      automatic longint mn [D];
      automatic int lat = 0;
      automatic int xv = (k % 7 == 3) ? 32767 : $urandom_range(3000);
      x_in <= 16'(xv);
      start <= 1;
      @(posedge clk);
      start <= 0;
      for (int i = 0; i < D; i++) begin
        automatic longint s = longint'(a_m[i][D]) * xv;
        for (int j = 0; j < D; j++) s += longint'(a_m[i][j]) * mref[j];
        s = floor_shift(s, A_FRAC);
        if (s > 32767 || s < -32768) n_sat++;
        mn[i] = (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
      end
      do begin #1; lat++; @(posedge clk); end while (!done && lat < 100);
      #1;
      check(lat == D + 2, $sformatf("done latency %0d exp %0d", lat, D + 2));
      for (int i = 0; i < D; i++)
        check(longint'($signed(m_prev[i])) == mref[i], "m[k-1] holds until commit");
      commit <= 1;
      @(posedge clk);
      commit <= 0;
      #1;
      for (int i = 0; i < D; i++) begin
        check(longint'($signed(m_prev[i])) == mn[i],
              $sformatf("k=%0d m[%0d] got %0d exp %0d", k, i, $signed(m_prev[i]), mn[i]));
        mref[i] = mn[i];
      end
    end
    clear <= 1;
    @(posedge clk);
    clear <= 0;
    #1 check(m_prev == '0, "clear zeroes m[k-1]");
    $display("saturating rows: %0d", n_sat);
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
