// lif_lanes: fused leaky-integrate-and-fire update for LANES neurons at once.
//
// For each lane l (one neuron of the group held in the register slots):
//   u' = sat16( leak(u_old) + i_syn + i_mem ),  leak(u) = (u * beta) >>> 8
//   spike = (u' > thresh);  u_new = spike ? 0 : u'
// With first=1 (first step of a sample) u_old is taken as 0, so neuron state
// need not be swept clear between samples. Purely combinational; the neuron
// core registers the results and writes u_new back to neuron SRAM in the same
// cycle (one SRAM write per group).
//
// The update u[k] = beta u[k-1] + I[k] + I_m[k] and the Heaviside threshold
// follow the source design; reset-to-zero after a spike, the Q0.8 leak and
// the saturation are this design's choices.
module lif_lanes
  import dmp_pkg::*;
#(
  parameter int LANES = 4
) (
  input  logic [LANES-1:0][UW-1:0]  u_old,
  input  logic                      first,
  input  logic [BW-1:0]             beta,
  input  logic signed [UW-1:0]      thresh,
  input  logic [LANES-1:0][ISW-1:0] i_syn,
  input  logic [LANES-1:0][IMW-1:0] i_mem,
  output logic [LANES-1:0][UW-1:0]  u_new,
  output logic [LANES-1:0]          spike
);

  always_comb begin
    for (int l = 0; l < LANES; l++) begin
      logic signed [UW-1:0] uo;
      logic signed [UW-1:0] ut;
      logic signed [47:0]   s;
      uo = first ? '0 : leak($signed(u_old[l]), beta);
      s  = 48'(uo) + 48'($signed(i_syn[l])) + 48'($signed(i_mem[l]));
      ut = sat_uw(s);
      spike[l] = ut > thresh;
      u_new[l] = spike[l] ? '0 : ut;
    end
  end

endmodule
