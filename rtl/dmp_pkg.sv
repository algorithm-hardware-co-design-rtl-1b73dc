// dmp_pkg: word widths, fixed-point formats, configuration codes and small
// arithmetic helpers shared by the dual-memory-pathway (DMP) SNN core.
//
// Number formats (this design's choice; the source publication gives none):
//   weights W_f, W_x, P, v, W_o : 8-bit signed integers
//   membrane u, output potential: 16-bit signed, saturating
//   memory state m and drive x  : 16-bit signed, saturating (x >= 0 after ReLU)
//   Abar, Bbar                  : 16-bit signed Q2.14 (A_FRAC = 14)
//   leak beta                   : 8-bit unsigned Q0.8 (u <- u*beta >>> 8)
//   memory current I_m          : (P.m + v*x) >>> PV_FRAC
package dmp_pkg;

  localparam int WW      = 8;   // synaptic weight width
  localparam int UW      = 16;  // membrane / output potential width
  localparam int MW      = 16;  // memory state and x width
  localparam int CW      = 16;  // Abar / Bbar coefficient width
  localparam int BW      = 8;   // leak factor width
  localparam int A_FRAC  = 14;  // fraction bits of Abar / Bbar
  localparam int PV_FRAC = 8;   // right shift applied to P.m + v*x
  localparam int ISW     = 24;  // spike-current accumulator width
  localparam int IMW     = 32;  // memory-current width
  localparam int SUMW    = 32;  // output potential sum width

  // Host write port: which storage a write goes to.
  typedef enum logic [2:0] {
    SEL_WF  = 3'd0,  // W_f   : addr = j*(N/LANES)+g, lane = neuron within group
    SEL_WX  = 3'd1,  // W_x   : addr = input channel j
    SEL_PV  = 3'd2,  // P / v : addr = neuron i, lane 0..D-1 = P[i][lane], lane D = v[i]
    SEL_AB  = 3'd3,  // Abar / Bbar : addr = row i, lane 0..D-1 = Abar[i][lane], lane D = Bbar[i]
    SEL_WO  = 3'd4,  // W_o   : addr = hidden neuron i, lane = class c
    SEL_REG = 3'd5   // control registers, addr = cfg_reg_e
  } cfg_sel_e;

  typedef enum logic [2:0] {
    REG_BETA     = 3'd0,  // hidden leak (Q0.8)
    REG_THRESH   = 3'd1,  // hidden threshold theta_u
    REG_BIAS     = 3'd2,  // bias b of the memory drive x
    REG_DILATION = 3'd3,  // skip length d_s (0 treated as 1)
    REG_NSTEPS   = 3'd4,  // time steps per sample T
    REG_BETA_OUT = 3'd5   // output-layer leak (Q0.8)
  } cfg_reg_e;

  // Saturate a wide signed value to UW bits.
  function automatic logic signed [UW-1:0] sat_uw(input logic signed [47:0] v);
    if (v > 48'sd32767)       return 16'sh7fff;
    else if (v < -48'sd32768) return 16'sh8000;
    else                      return v[UW-1:0];
  endfunction

  // Leak: u * beta >>> 8 (beta unsigned Q0.8).
  function automatic logic signed [UW-1:0] leak(input logic signed [UW-1:0] u,
                                                input logic [BW-1:0] beta);
    logic signed [UW+BW:0] p;
    p = u * $signed({1'b0, beta});
    return p[UW+BW-1:BW];  // |u*beta/256| < |u|, always fits
  endfunction

endpackage
