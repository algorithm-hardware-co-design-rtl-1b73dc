// output_layer: non-spiking readout of the hidden spikes s^l[k].
//
// N_OUT leaky output potentials o[c] are driven by the hidden spikes:
//   o[c] <- sat16( leak(o[c], beta_out) + sum over active i of W_o[i][c] )
// and their running sum over the sample, o_sum[c], stands for the mean
// potential (mean = o_sum / T). On the last step the class is the argmax of
// o_sum (lowest index wins a tie).
//
// Per step (`start`, with s_hid and `last`): 1 cycle leak, then one W_o row
// (all N_OUT weights of hidden neuron i, one SRAM word) per active hidden
// spike, skipping zeros, +1 cycle for the last row, 1 cycle to add o into
// o_sum, and on the last step N_OUT cycles of argmax followed by a
// one-cycle result_valid pulse. `ready` is high when idle; s_hid is copied at
// start, so the hidden layer may go on with the next step. `clear` (while
// idle) zeroes o and o_sum for a new sample. Host writes W_o while idle
// (addr = hidden neuron, lane = class).
//
// The source design names an output layer and reads out the mean membrane
// potential of the last layer; the leaky integrator form, the spike-driven
// row access and the sequential argmax are this design's choices.
//
// Lint note: rst_n also disables the assertion at the end of this module
// (disable iff), which lint counts as a synchronous use of the reset; the
// flip-flops themselves use rst_n only as an asynchronous reset.
module output_layer
  import dmp_pkg::*;
#(
  parameter int N_HID = 128,
  parameter int N_OUT = 20,
  localparam int NAW  = $clog2(N_HID),
  localparam int CLW  = $clog2(N_OUT)
) (
  input  logic                          clk,
  input  logic                          rst_n,
  input  logic                          clear,
  input  logic                          start,
  input  logic                          last,
  input  logic [N_HID-1:0]              s_hid,
  input  logic [BW-1:0]                 beta_out,
  output logic                          ready,
  output logic                          result_valid,
  output logic [CLW-1:0]                result_class,
  output logic [N_OUT-1:0][SUMW-1:0]    o_sum,
  input  logic                          cfg_we,
  input  logic [NAW-1:0]                cfg_addr,
  input  logic [CLW-1:0]                cfg_lane,
  input  logic [WW-1:0]                 cfg_wdata
);

  typedef enum logic [2:0] {O_IDLE, O_LEAK, O_SCAN, O_SUM, O_ARG} ostate_e;
  ostate_e state;

  logic [N_HID-1:0]               s_reg;
  logic                           last_q;
  logic [N_OUT-1:0][UW-1:0]       o;
  logic [$clog2(N_HID+1)-1:0]     scan_pos;
  logic                           found;
  logic [$clog2(N_HID+1)-1:0]     idx;
  logic                           rd_issue, wo_v;
  logic [N_OUT*WW-1:0]            wo_rdata;
  logic [N_OUT-1:0]               wo_we;
  logic [CLW-1:0]                 ac;
  logic signed [SUMW-1:0]         best;

  find_next_set #(.W(N_HID)) u_scan (.vec(s_reg), .from(scan_pos), .found(found), .idx(idx));

  assign rd_issue = (state == O_SCAN) && found;

  always_comb begin
    wo_we = '0;
    if (cfg_we) wo_we[cfg_lane] = 1'b1;
  end

  sram_1rw #(.WORDS(N_HID), .LANES(N_OUT), .LANE_W(WW)) u_wo (
    .clk(clk), .en(rd_issue || cfg_we), .we(wo_we),
    .addr(cfg_we ? cfg_addr : NAW'(idx)),
    .wdata({N_OUT{cfg_wdata}}), .rdata(wo_rdata));

  assign ready = (state == O_IDLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= O_IDLE;
      s_reg        <= '0;
      last_q       <= 1'b0;
      o            <= '0;
      o_sum        <= '0;
      scan_pos     <= '0;
      wo_v         <= 1'b0;
      ac           <= '0;
      best         <= '0;
      result_valid <= 1'b0;
      result_class <= '0;
    end else begin
      result_valid <= 1'b0;
      wo_v         <= rd_issue;
      if (wo_v)
        for (int c = 0; c < N_OUT; c++)
          o[c] <= sat_uw(48'($signed(o[c])) + 48'($signed(wo_rdata[c*WW +: WW])));
      unique case (state)
        O_IDLE: begin
          if (clear) begin
            o     <= '0;
            o_sum <= '0;
          end else if (start) begin
            s_reg  <= s_hid;
            last_q <= last;
            state  <= O_LEAK;
          end
        end
        O_LEAK: begin
          for (int c = 0; c < N_OUT; c++) o[c] <= leak($signed(o[c]), beta_out);
          scan_pos <= '0;
          state    <= O_SCAN;
        end
        O_SCAN: begin
          if (rd_issue) scan_pos <= idx + 1'b1;
          if (!found && !wo_v) state <= O_SUM;
        end
        O_SUM: begin
          for (int c = 0; c < N_OUT; c++)
            o_sum[c] <= o_sum[c] + SUMW'($signed(o[c]));
          ac    <= '0;
          state <= last_q ? O_ARG : O_IDLE;
        end
        O_ARG: begin
          if (ac == '0 || $signed(o_sum[ac]) > best) begin
            best         <= $signed(o_sum[ac]);
            result_class <= ac;
          end
          if (32'(ac) == N_OUT - 1) begin
            result_valid <= 1'b1;
            state        <= O_IDLE;
          end else begin
            ac <= ac + 1'b1;
          end
        end
        default: state <= O_IDLE;
      endcase
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) cfg_we |-> state == O_IDLE);

endmodule
