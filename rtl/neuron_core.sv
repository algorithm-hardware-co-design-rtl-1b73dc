// neuron_core: hidden-layer engine of the DMP-SNN with fused, heterogeneous
// dataflow.
//
// For one time step k it sweeps the N_HID neurons in groups of LANES. Per
// group g (neurons g*LANES .. g*LANES+LANES-1):
//   LOAD  one read of neuron SRAM fetches the LANES membrane potentials
//         (one word) into the register slots.
//   RUN   two paths work at the same time:
//         - spike integration, input-stationary: a find-next-set scan walks
//           the nonzero bits j of s^{l-1}[k]; each reads the W_f word at
//           j*(N_HID/LANES)+g, which holds the weights from input j to the
//           LANES neurons of the group, and adds them lane-wise into I.
//           Zero inputs cost nothing.
//         - memory integration, output-stationary (only when mem_en): for
//           each lane, the P/v word of that neuron (P[i][0..d-1] and v[i])
//           feeds two MACs side by side, P[i].m[k-1] and v[i]*x[k], giving
//           I_m[i] = (P[i].m[k-1] + v[i]*x[k]) >>> 8, which equals W_m m[k]
//           without waiting for the memory update.
//   FIRE  the fused LIF (lif_lanes) computes the new potentials and spikes
//         of the group; one write puts the word back and the spikes go
//         into s_out.
// So each neuron state is read once and written once per step.
//
// Timing per group, with n active inputs: LOAD 1 cycle, RUN
// max(n>0 ? n+1 : 0, mem_en ? LANES+2 : 0) + 1 cycles, FIRE 1 cycle. `done`
// pulses one cycle after the last FIRE; s_out then holds s^l[k] until the
// next start. spk_in, x_in, m_prev, beta and thresh must stay stable from
// start to done.
//
// Host writes: SEL_WF (addr = j*(N_HID/LANES)+g, lane = neuron in group) and
// SEL_PV (addr = neuron, lane 0..D_MEM-1 = P, lane D_MEM = v), while idle.
//
// The three optimisations (dependency breaking with P and v, operator fusion
// with LANES register slots, input-/output-stationary access) and the word
// layouts follow the source design. Running the groups one after the other
// (no overlap between groups) is this design's choice.
//
// Lint note: rst_n also disables the assertion at the end of this module
// (disable iff), which lint counts as a synchronous use of the reset; the
// flip-flops themselves use rst_n only as an asynchronous reset.
module neuron_core
  import dmp_pkg::*;
#(
  parameter int M_IN  = 140,
  parameter int N_HID = 128,
  parameter int D_MEM = 10,
  parameter int LANES = 4
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        start,
  input  logic                        first,
  input  logic                        mem_en,
  input  logic [M_IN-1:0]             spk_in,
  input  logic signed [MW-1:0]        x_in,
  input  logic [D_MEM-1:0][MW-1:0]    m_prev,
  input  logic [BW-1:0]               beta,
  input  logic signed [UW-1:0]        thresh,
  output logic                        done,
  output logic                        busy,
  output logic [N_HID-1:0]            s_out,
  input  logic                        cfg_we,
  input  cfg_sel_e                    cfg_sel,
  input  logic [15:0]                 cfg_addr,
  input  logic [7:0]                  cfg_lane,
  input  logic [15:0]                 cfg_wdata
);

  localparam int G     = N_HID / LANES;
  localparam int GW    = (G > 1) ? $clog2(G) : 1;
  localparam int IW    = $clog2(M_IN + 1);
  localparam int WF_N  = M_IN * G;
  localparam int WFAW  = $clog2(WF_N);
  localparam int NAW   = $clog2(N_HID);
  localparam int LW    = $clog2(LANES + 1);
  localparam int ACC_W = 40;

  typedef enum logic [1:0] {S_IDLE, S_LOAD, S_RUN, S_FIRE} state_e;
  state_e state;

  logic [GW-1:0] g;
  logic          first_q, mem_en_q;

  // ---------------- storage ----------------
  logic [LANES*WW-1:0]       wf_rdata;
  logic [(D_MEM+1)*WW-1:0]   pv_rdata;
  logic [LANES*UW-1:0]       u_rdata;
  logic                      wf_cfg, pv_cfg;
  logic                      sp_issue, pv_issue;
  logic [WFAW-1:0]           wf_addr;
  logic [NAW-1:0]            pv_addr;
  logic [LANES-1:0]          wf_we;
  logic [D_MEM:0]            pv_we;
  logic                      u_en;
  logic [LANES-1:0]          u_we;
  logic [LANES*UW-1:0]       u_wdata;

  assign wf_cfg = cfg_we && (cfg_sel == SEL_WF);
  assign pv_cfg = cfg_we && (cfg_sel == SEL_PV);

  always_comb begin
    wf_we = '0;
    pv_we = '0;
    if (wf_cfg) wf_we[cfg_lane[$clog2(LANES)-1:0]] = 1'b1;
    if (pv_cfg) pv_we[cfg_lane[$clog2(D_MEM+1)-1:0]] = 1'b1;
  end

  sram_1rw #(.WORDS(WF_N), .LANES(LANES), .LANE_W(WW)) u_wf (
    .clk(clk), .en(sp_issue || wf_cfg), .we(wf_we),
    .addr(wf_cfg ? cfg_addr[WFAW-1:0] : wf_addr),
    .wdata({LANES{cfg_wdata[WW-1:0]}}), .rdata(wf_rdata));

  sram_1rw #(.WORDS(N_HID), .LANES(D_MEM + 1), .LANE_W(WW)) u_pv (
    .clk(clk), .en(pv_issue || pv_cfg), .we(pv_we),
    .addr(pv_cfg ? cfg_addr[NAW-1:0] : pv_addr),
    .wdata({(D_MEM+1){cfg_wdata[WW-1:0]}}), .rdata(pv_rdata));

  sram_1rw #(.WORDS(G), .LANES(LANES), .LANE_W(UW)) u_u (
    .clk(clk), .en(u_en), .we(u_we), .addr(g), .wdata(u_wdata), .rdata(u_rdata));

  // ---------------- spike integration (input stationary) ----------------
  logic [IW-1:0] scan_pos;
  logic          found;
  logic [IW-1:0] idx;
  logic          wf_v;
  logic [LANES-1:0][ISW-1:0] acc_i;

  find_next_set #(.W(M_IN)) u_scan (.vec(spk_in), .from(scan_pos), .found(found), .idx(idx));

  assign sp_issue = (state == S_RUN) && found;
  assign wf_addr  = WFAW'(idx * G + 32'(g));

  // ---------------- memory integration (output stationary) ----------------
  logic [LW-1:0] ml;
  logic          pv_v, mac_v;
  logic [LW-1:0] pv_lane, mac_lane;
  logic signed [ACC_W-1:0] pm_sum, vx_sum, mac_sum;
  logic                    pm_v, vx_v;
  logic [LANES-1:0][IMW-1:0] acc_m;

  assign pv_issue = (state == S_RUN) && mem_en_q && (32'(ml) < LANES);
  assign pv_addr  = NAW'(32'(g) * LANES + 32'(ml));

  // the two memory-integration paths work side by side on one P/v word:
  // P[i] . m[k-1] (d terms) and v[i] * x[k] (one term)
  mac_array #(.N_TERMS(D_MEM), .A_W(WW), .B_W(MW), .ACC_W(ACC_W)) u_mac_pm (
    .clk(clk), .rst_n(rst_n), .en(pv_v), .a(pv_rdata[D_MEM*WW-1:0]), .b(m_prev),
    .sum(pm_sum), .valid(pm_v));

  mac_array #(.N_TERMS(1), .A_W(WW), .B_W(MW), .ACC_W(ACC_W)) u_mac_vx (
    .clk(clk), .rst_n(rst_n), .en(pv_v), .a(pv_rdata[(D_MEM+1)*WW-1 -: WW]), .b(x_in),
    .sum(vx_sum), .valid(vx_v));

  assign mac_sum = pm_sum + vx_sum;
  assign mac_v   = pm_v && vx_v;

  // ---------------- register slots and fused LIF ----------------
  logic [LANES-1:0][UW-1:0] u_slot;
  logic                     run_first;
  logic [LANES-1:0][UW-1:0] u_new;
  logic [LANES-1:0]         spk_new;
  logic                     run_done;

  lif_lanes #(.LANES(LANES)) u_lif (
    .u_old(u_slot), .first(first_q), .beta(beta), .thresh(thresh),
    .i_syn(acc_i), .i_mem(acc_m), .u_new(u_new), .spike(spk_new));

  assign u_en    = (state == S_LOAD) || (state == S_FIRE);
  assign u_we    = (state == S_FIRE) ? '1 : '0;
  assign u_wdata = u_new;
  assign busy    = (state != S_IDLE);

  assign run_done = !found && !wf_v && !pv_issue && !pv_v && !mac_v;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      g         <= '0;
      first_q   <= 1'b0;
      mem_en_q  <= 1'b0;
      scan_pos  <= '0;
      wf_v      <= 1'b0;
      acc_i     <= '0;
      ml        <= '0;
      pv_v      <= 1'b0;
      pv_lane   <= '0;
      mac_lane  <= '0;
      acc_m     <= '0;
      u_slot    <= '0;
      run_first <= 1'b0;
      done      <= 1'b0;
      s_out     <= '0;
    end else begin
      done <= 1'b0;
      wf_v <= sp_issue;
      pv_v <= pv_issue;
      pv_lane  <= ml;
      mac_lane <= pv_lane;
      if (wf_v)
        for (int l = 0; l < LANES; l++)
          acc_i[l] <= acc_i[l] + ISW'($signed(wf_rdata[l*WW +: WW]));
      if (mac_v)
        acc_m[mac_lane[$clog2(LANES)-1:0]] <= IMW'(mac_sum >>> PV_FRAC);
      unique case (state)
        S_IDLE: if (start) begin
          state    <= S_LOAD;
          g        <= '0;
          first_q  <= first;
          mem_en_q <= mem_en;
        end
        S_LOAD: begin
          scan_pos  <= '0;
          ml        <= '0;
          acc_i     <= '0;
          acc_m     <= '0;
          run_first <= 1'b1;
          state     <= S_RUN;
        end
        S_RUN: begin
          run_first <= 1'b0;
          if (run_first) u_slot <= u_rdata;
          if (sp_issue) scan_pos <= idx + 1'b1;
          if (pv_issue) ml <= ml + 1'b1;
          if (run_done) state <= S_FIRE;
        end
        S_FIRE: begin
          s_out[32'(g) * LANES +: LANES] <= spk_new;
          if (32'(g) == G - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            g     <= g + 1'b1;
            state <= S_LOAD;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  // The host may only write weights while the core is idle.
  assert property (@(posedge clk) disable iff (!rst_n) (wf_cfg || pv_cfg) |-> state == S_IDLE);
  initial assert (N_HID % LANES == 0) else $error("N_HID must be a multiple of LANES");

endmodule
