// dmp_snn_top: single-hidden-layer dual-memory-pathway (DMP) SNN inference
// core.
//
// Network computed per time step k (one hidden layer, N_HID LIF neurons,
// d = D_MEM memory states, M_IN inputs, N_OUT classes):
//   x[k]   = ReLU(W_x s_in[k] + b)                         scalar drive
//   m[k]   = Abar m[k-1] + Bbar x[k]                        slow memory
//   u[k]   = beta u[k-1] + W_f s_in[k] + I_m[k],  s[k] = u[k] > theta_u
//   I_m[k] = W_m m[k] = P m[k-1] + v x[k]  (P = W_m Abar, v = W_m Bbar)
//   o[k]   = beta_out o[k-1] + W_o s[k];  class = argmax sum_k o[k]
// With dilation d_s > 1, I_m is injected only on steps with k mod d_s = 0.
//
// Dataflow: aer_rx collects the input events of a step while x_drive sums
// W_x on the fly. When the end-of-step beat arrives and x[k] is ready, the
// sequencer starts, in parallel, the memory update (mem_update, writes
// m[k]) and the neuron core (spike integration over W_f and memory
// integration over P/v, fused LIF). When both are done and the output layer
// is free, m[k] becomes m[k-1], the input frame is released, the hidden
// spikes s[k] are given to the output layer and put out on spk_valid/
// spk_vec (the spike stream for a following layer). After REG_NSTEPS steps
// the output layer reports result_class (o_sum and result_class stay valid
// until the next sample starts), and the next frame begins a new sample:
// memory state and output sums are cleared as its first step starts and the
// stored membrane potentials are ignored. sample_start restarts the step
// count and clears the state at once (only between steps).
//
// Host port: one write per cycle (cfg_we) into weights and registers, see
// dmp_pkg::cfg_sel_e for the address map; only while no step is running.
// Register reset values: beta = beta_out = 230/256, theta_u = 10, b = 0,
// d_s = 1, T = 100.
//
// The block structure (AER input, W_x/ReLU drive, Abar/Bbar register file and
// MAC, dual memory slots, W_f and P/v SRAMs, four register slots with LIF
// logic, neuron SRAM, output layer) follows the source design's hardware
// diagram; the handshakes, register map, number formats and step
// sequencing are this design's choices.
//
// Lint note: rst_n also disables the assertion at the end of this module
// (disable iff), which lint counts as a synchronous use of the reset; the
// flip-flops themselves use rst_n only as an asynchronous reset.
module dmp_snn_top
  import dmp_pkg::*;
#(
  parameter int M_IN  = 140,
  parameter int N_HID = 128,
  parameter int D_MEM = 10,
  parameter int N_OUT = 20,
  parameter int LANES = 4,
  localparam int IAW  = (M_IN > 1) ? $clog2(M_IN) : 1,
  localparam int CLW  = $clog2(N_OUT)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // host configuration writes
  input  logic                        cfg_we,
  input  logic [2:0]                  cfg_sel,
  input  logic [15:0]                 cfg_addr,
  input  logic [7:0]                  cfg_lane,
  input  logic [15:0]                 cfg_wdata,
  input  logic                        sample_start,
  // AER input events
  input  logic                        aer_valid,
  output logic                        aer_ready,
  input  logic [IAW-1:0]              aer_addr,
  input  logic                        aer_eos,
  // hidden spike stream out
  output logic                        spk_valid,
  output logic [N_HID-1:0]            spk_vec,
  output logic [15:0]                 step_idx,
  // classification
  output logic                        result_valid,
  output logic [CLW-1:0]              result_class,
  output logic [N_OUT-1:0][SUMW-1:0]  o_sum,
  output logic                        busy,
  output logic                        in_stall
);

  // ---------------- configuration registers ----------------
  logic [BW-1:0]        r_beta, r_beta_out;
  logic signed [UW-1:0] r_thresh;
  logic signed [MW-1:0] r_bias;
  logic [15:0]          r_dil, r_nsteps;
  cfg_sel_e             sel;

  assign sel = cfg_sel_e'(cfg_sel);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      r_beta     <= 8'd230;
      r_beta_out <= 8'd230;
      r_thresh   <= 16'sd10;
      r_bias     <= '0;
      r_dil      <= 16'd1;
      r_nsteps   <= 16'd100;
    end else if (cfg_we && sel == SEL_REG) begin
      unique case (cfg_reg_e'(cfg_addr[2:0]))
        REG_BETA:     r_beta     <= cfg_wdata[BW-1:0];
        REG_THRESH:   r_thresh   <= cfg_wdata;
        REG_BIAS:     r_bias     <= cfg_wdata;
        REG_DILATION: r_dil      <= cfg_wdata;
        REG_NSTEPS:   r_nsteps   <= cfg_wdata;
        REG_BETA_OUT: r_beta_out <= cfg_wdata[BW-1:0];
        default: ;
      endcase
    end
  end

  // ---------------- blocks ----------------
  logic [M_IN-1:0] spk_in;
  logic            ev_valid, frame_done, rx_stall, release_frame;
  logic [IAW-1:0]  ev_addr;
  logic signed [MW-1:0] x;
  logic            x_valid;
  logic            step_start, mu_done, commit, mem_clear;
  logic [D_MEM-1:0][MW-1:0] m_prev;
  logic            core_done, core_busy;
  logic [N_HID-1:0] s_hid;
  logic            first, mem_en;
  logic            out_ready, out_start, out_last, out_clear;

  aer_rx #(.M_IN(M_IN)) u_aer (
    .clk, .rst_n, .aer_valid, .aer_ready, .aer_addr, .aer_eos,
    .release_frame, .spk_vec(spk_in), .ev_valid, .ev_addr, .frame_done, .stall(rx_stall));

  x_drive #(.M_IN(M_IN)) u_x (
    .clk, .rst_n, .clear(release_frame), .ev_valid, .ev_addr, .finish(frame_done),
    .bias(r_bias), .x_out(x), .x_valid,
    .cfg_we(cfg_we && sel == SEL_WX), .cfg_addr(cfg_addr[IAW-1:0]), .cfg_wdata(cfg_wdata[WW-1:0]));

  mem_update #(.D_MEM(D_MEM)) u_mu (
    .clk, .rst_n, .clear(mem_clear), .start(step_start), .x_in(x), .commit,
    .done(mu_done), .m_prev,
    .cfg_we(cfg_we && sel == SEL_AB), .cfg_row(cfg_addr[$clog2(D_MEM)-1:0]),
    .cfg_col(cfg_lane[$clog2(D_MEM+1)-1:0]), .cfg_wdata(cfg_wdata));

  neuron_core #(.M_IN(M_IN), .N_HID(N_HID), .D_MEM(D_MEM), .LANES(LANES)) u_core (
    .clk, .rst_n, .start(step_start), .first, .mem_en, .spk_in, .x_in(x), .m_prev,
    .beta(r_beta), .thresh(r_thresh), .done(core_done), .busy(core_busy), .s_out(s_hid),
    .cfg_we, .cfg_sel(sel), .cfg_addr, .cfg_lane, .cfg_wdata);

  output_layer #(.N_HID(N_HID), .N_OUT(N_OUT)) u_out (
    .clk, .rst_n, .clear(out_clear), .start(out_start), .last(out_last), .s_hid,
    .beta_out(r_beta_out), .ready(out_ready), .result_valid, .result_class, .o_sum,
    .cfg_we(cfg_we && sel == SEL_WO), .cfg_addr(cfg_addr[$clog2(N_HID)-1:0]),
    .cfg_lane(cfg_lane[CLW-1:0]), .cfg_wdata(cfg_wdata[WW-1:0]));

  // ---------------- step sequencer ----------------
  typedef enum logic [1:0] {Q_WAIT, Q_RUN, Q_RESULT} qstate_e;
  qstate_e   q;
  logic      core_done_l;
  logic [15:0] step, dil_cnt;
  logic      step_end, last_step;

  assign last_step  = (step == r_nsteps - 16'd1) || (r_nsteps == 16'd0);
  assign step_start = (q == Q_WAIT) && x_valid && !sample_start;
  assign mem_en     = (dil_cnt == 16'd0);
  assign step_end   = (q == Q_RUN) && (core_done_l || core_done) && mu_done && out_ready;
  assign commit        = step_end;
  assign release_frame = step_end;
  assign out_start     = step_end;
  assign out_last      = last_step;
  assign spk_valid     = step_end;
  assign spk_vec       = s_hid;
  assign step_idx      = step;
  // memory state and output sums are cleared when the first step of a sample
  // starts (so o_sum and result_class stay readable until then), or on request
  assign mem_clear = sample_start || (step_start && first);
  assign out_clear = mem_clear;
  assign busy      = (q != Q_WAIT) || core_busy;
  assign in_stall  = rx_stall;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      q           <= Q_WAIT;
      core_done_l <= 1'b0;
      step        <= '0;
      dil_cnt     <= '0;
      first       <= 1'b1;
    end else begin
      if (core_done) core_done_l <= 1'b1;
      unique case (q)
        Q_WAIT: begin
          if (sample_start) begin
            step    <= '0;
            dil_cnt <= '0;
            first   <= 1'b1;
          end else if (step_start) begin
            q           <= Q_RUN;
            core_done_l <= 1'b0;
          end
        end
        Q_RUN: if (step_end) begin
          first       <= 1'b0;
          core_done_l <= 1'b0;
          dil_cnt     <= (dil_cnt + 16'd1 >= r_dil) ? '0 : dil_cnt + 16'd1;
          if (last_step) begin
            q <= Q_RESULT;
          end else begin
            q    <= Q_WAIT;
            step <= step + 16'd1;
          end
        end
        Q_RESULT: if (result_valid) begin
          q       <= Q_WAIT;
          step    <= '0;
          dil_cnt <= '0;
          first   <= 1'b1;
        end
        default: q <= Q_WAIT;
      endcase
    end
  end

  // weights and registers are written only between steps
  assert property (@(posedge clk) disable iff (!rst_n) cfg_we |-> !core_busy);

endmodule
