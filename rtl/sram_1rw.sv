// sram_1rw: single-port on-chip SRAM model, one access per cycle.
//
// Stands for the SRAM macros of the core (weights W_f, W_x, P/v, W_o and
// neuron states u). A word holds LANES lanes of LANE_W bits; a write updates
// only the lanes whose bit in `we` is set, so the host can load one weight at
// a time while the datapath reads whole words (one read per group of
// neurons). A read (en=1, we=0) returns the word on rdata one clock later;
// rdata holds its value until the next read. No reset: contents are loaded
// by the host. Written as a plain array so any tool maps it to a memory.
module sram_1rw #(
  parameter int WORDS  = 32,
  parameter int LANES  = 4,
  parameter int LANE_W = 8,
  localparam int AW    = (WORDS > 1) ? $clog2(WORDS) : 1
) (
  input  logic                     clk,
  input  logic                     en,
  input  logic [LANES-1:0]         we,
  input  logic [AW-1:0]            addr,
  input  logic [LANES*LANE_W-1:0]  wdata,
  output logic [LANES*LANE_W-1:0]  rdata
);

  // One array per lane, all sharing the address: a lane write never
  // touches the other lanes of the word.
  for (genvar l = 0; l < LANES; l++) begin : g_lane
    logic [LANE_W-1:0] mem [WORDS];
    always_ff @(posedge clk) begin
      if (en) begin
        if (we[l])          mem[addr] <= wdata[l*LANE_W +: LANE_W];
        else if (we == '0)  rdata[l*LANE_W +: LANE_W] <= mem[addr];
      end
    end
  end

endmodule
