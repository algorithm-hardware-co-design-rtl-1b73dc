// tb_lif_lanes: random operands through the fused LIF lanes, compared with
// an independent integer model of leak, integration, saturation, threshold
// and reset-to-zero; includes first-step (zero state) cases and large
// currents that saturate.
module tb_lif_lanes;
  import dmp_pkg::*;
  localparam int L = 4;
  logic [L-1:0][UW-1:0]  u_old, u_new;
  logic                  first;
  logic [BW-1:0]         beta;
  logic signed [UW-1:0]  thresh;
  logic [L-1:0][ISW-1:0] i_syn;
  logic [L-1:0][IMW-1:0] i_mem;
  logic [L-1:0]          spike;
  int checks = 0, failures = 0, n_spk = 0, n_sat = 0;

  lif_lanes #(.LANES(L)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    for (int n = 0; n < 3000; n++) begin
      first  = ($urandom_range(7) == 0);
      beta   = BW'($urandom);
      thresh = 16'($signed($urandom_range(400)) - 100);
      for (int l = 0; l < L; l++) begin
        u_old[l] = UW'($urandom);
        i_syn[l] = ISW'($signed($urandom_range(2000)) - 1000);
        i_mem[l] = ($urandom_range(9) == 0) ? IMW'($signed($urandom_range(200000)) - 100000)
                                           : IMW'($signed($urandom_range(600)) - 300);
      end
      #1;
      for (int l = 0; l < L; l++) begin
        automatic longint uo, s, ut;
        automatic bit sp;
        // floor(u*beta/256) computed with integer division adjusted to floor
        uo = longint'($signed(u_old[l])) * longint'(beta);
        uo = (uo >= 0) ? uo / 256 : -((-uo + 255) / 256);
        if (first) uo = 0;
        s = uo + longint'($signed(i_syn[l])) + longint'($signed(i_mem[l]));
        ut = (s > 32767) ? 32767 : (s < -32768) ? -32768 : s;
        if (ut != s) n_sat++;
        sp = ut > longint'(thresh);
        n_spk += sp;
        check(spike[l] == sp, $sformatf("spike lane %0d", l));
        check(longint'($signed(u_new[l])) == (sp ? 0 : ut),
              $sformatf("u lane %0d got %0d exp %0d", l, $signed(u_new[l]), sp ? 0 : ut));
      end
    end
    check(n_spk > 0 && n_sat > 0, "spikes and saturation exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #1000000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
