// x_drive: scalar memory drive x[k] = ReLU(W_x s^{l-1}[k] + b).
//
// The spike vector is compressed into one scalar that feeds the slow memory.
// Because s is binary, W_x s is the sum of W_x[j] over the active inputs j.
// The sum is built while the events of the step stream in: each ev_valid
// reads W_x[ev_addr] from a small SRAM, and the word is added one cycle
// later. Two cycles after `finish` (the end-of-step beat) x_out holds
// ReLU(sum + b), saturated to 16 bits, and x_valid is high; both stay until
// `clear` starts the next step. The host loads W_x through cfg_* while idle.
//
// The formula and the ReLU follow the source design; accumulating during
// event reception (rather than during the neuron sweep) and the widths are
// this design's choices.
module x_drive
  import dmp_pkg::*;
#(
  parameter int M_IN = 140,
  localparam int AW  = (M_IN > 1) ? $clog2(M_IN) : 1
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 clear,
  input  logic                 ev_valid,
  input  logic [AW-1:0]        ev_addr,
  input  logic                 finish,
  input  logic signed [MW-1:0] bias,
  output logic signed [MW-1:0] x_out,
  output logic                 x_valid,
  input  logic                 cfg_we,
  input  logic [AW-1:0]        cfg_addr,
  input  logic [WW-1:0]        cfg_wdata
);

  logic [WW-1:0]           wx_rdata;
  logic                    rd_v;
  logic                    fin_d;
  logic signed [ISW-1:0]   acc;
  logic signed [ISW:0]     pre;

  sram_1rw #(.WORDS(M_IN), .LANES(1), .LANE_W(WW)) u_wx (
    .clk   (clk),
    .en    (ev_valid || cfg_we),
    .we    (cfg_we),
    .addr  (cfg_we ? cfg_addr : ev_addr),
    .wdata (cfg_wdata),
    .rdata (wx_rdata)
  );

  assign pre = ISW'(acc) + ISW'(bias);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      rd_v    <= 1'b0;
      fin_d   <= 1'b0;
      acc     <= '0;
      x_out   <= '0;
      x_valid <= 1'b0;
    end else begin
      rd_v  <= ev_valid && !cfg_we;
      fin_d <= finish;
      if (clear) begin
        acc     <= '0;
        x_valid <= 1'b0;
      end else begin
        if (rd_v) acc <= acc + ISW'($signed(wx_rdata));
        if (fin_d) begin
          x_valid <= 1'b1;
          if (pre < 0)              x_out <= '0;
          else if (pre > 32767)     x_out <= 16'sh7fff;
          else                      x_out <= pre[MW-1:0];
        end
      end
    end
  end

endmodule
