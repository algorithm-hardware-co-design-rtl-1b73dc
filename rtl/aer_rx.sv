// aer_rx: address-event input stage and presynaptic spike register s^{l-1}[k].
//
// Input spikes arrive as address events, one beat per spike, on a
// valid/ready handshake (a beat moves when aer_valid && aer_ready). A beat
// with aer_eos=1 carries no spike and closes the current time step. Each
// accepted spike sets its bit in spk_vec; the first spike of a channel in a
// step is also forwarded on ev_valid/ev_addr (same cycle as the beat) so
// that the x-drive can accumulate W_x while events stream in. Repeated
// events on one channel within a step are a single binary spike.
//
// After the end-of-step beat, frame_done pulses for one cycle and the frame
// is held (aer_ready=0) until the layer pulses `release`, which clears the
// vector and reopens the input. While held, a waiting beat raises `stall`.
// Addresses >= M_IN are accepted and dropped.
//
// The AER input and the spike-vector register follow the block diagram of
// the source design; the beat format, the end-of-step marker and the single
// frame buffer with back-pressure are this design's choices.
//
// Lint note: rst_n also disables the assertion at the end of this module
// (disable iff), which lint counts as a synchronous use of the reset; the
// flip-flops themselves use rst_n only as an asynchronous reset.
module aer_rx #(
  parameter int M_IN = 140,
  localparam int AW  = (M_IN > 1) ? $clog2(M_IN) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            aer_valid,
  output logic            aer_ready,
  input  logic [AW-1:0]   aer_addr,
  input  logic            aer_eos,
  input  logic            release_frame,
  output logic [M_IN-1:0] spk_vec,
  output logic            ev_valid,
  output logic [AW-1:0]   ev_addr,
  output logic            frame_done,
  output logic            stall
);

  logic held;
  logic fire;
  logic in_range;

  assign aer_ready = !held;
  assign fire      = aer_valid && aer_ready;
  assign in_range  = 32'(aer_addr) < M_IN;
  assign ev_valid  = fire && !aer_eos && in_range && !spk_vec[aer_addr];
  assign ev_addr   = aer_addr;
  assign stall     = aer_valid && held;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      held       <= 1'b0;
      spk_vec    <= '0;
      frame_done <= 1'b0;
    end else begin
      frame_done <= 1'b0;
      if (release_frame) begin
        held    <= 1'b0;
        spk_vec <= '0;
      end else if (fire) begin
        if (aer_eos) begin
          held       <= 1'b1;
          frame_done <= 1'b1;
        end else if (in_range) begin
          spk_vec[aer_addr] <= 1'b1;
        end
      end
    end
  end

  // A release is only meaningful for a held frame.
  assert property (@(posedge clk) disable iff (!rst_n) release_frame |-> held);

endmodule
