// mem_update: slow memory update path, m[k] = Abar m[k-1] + Bbar x[k].
//
// Holds the d x (d+1) coefficient register file (column d is Bbar), a row
// MAC and the two memory register slots: m_prev = m[k-1], read by the memory
// integration path for the whole step, and m_next = m[k], written here.
// Because the integration path uses the precomputed P = W_m Abar and
// v = W_m Bbar, it never waits for this update; the two run in parallel.
//
// Timing: `start` (with x_in stable) in cycle t launches row 0; row i enters
// the MAC in cycle t+1+i and is stored in cycle t+2+i, so `done` rises
// D_MEM+2 cycles after start and stays high until the next start. `commit`
// copies m[k] into m[k-1] at the end of a step; `clear` zeroes m[k-1] at the
// start of a sample. Results are (sum >>> 14) saturated to 16 bits.
//
// The equation, the register file for Abar/Bbar and the dual slots follow
// the source design; the fixed-point format and the row-per-cycle schedule
// are this design's choices.
//
// Lint note: rst_n also disables the assertion at the end of this module
// (disable iff), which lint counts as a synchronous use of the reset; the
// flip-flops themselves use rst_n only as an asynchronous reset.
module mem_update
  import dmp_pkg::*;
#(
  parameter int D_MEM = 10,
  localparam int RW   = $clog2(D_MEM),
  localparam int CLW  = $clog2(D_MEM + 1)
) (
  input  logic                           clk,
  input  logic                           rst_n,
  input  logic                           clear,
  input  logic                           start,
  input  logic signed [MW-1:0]           x_in,
  input  logic                           commit,
  output logic                           done,
  output logic [D_MEM-1:0][MW-1:0]       m_prev,
  input  logic                           cfg_we,
  input  logic [RW-1:0]                  cfg_row,
  input  logic [CLW-1:0]                 cfg_col,
  input  logic [CW-1:0]                  cfg_wdata
);

  localparam int ACC_W = 40;

  logic [D_MEM:0][CW-1:0] rf [D_MEM];   // rf[i][j]: Abar[i][j], rf[i][D_MEM]: Bbar[i]
  logic [D_MEM-1:0][MW-1:0] m_next;
  logic [D_MEM:0][MW-1:0] operand;
  logic [RW-1:0]  row;       // row entering the MAC
  logic [RW-1:0]  row_q;     // row whose result is on the MAC output
  logic           running;
  logic           mac_v;
  logic signed [ACC_W-1:0] mac_sum;

  always_comb begin
    for (int j = 0; j < D_MEM; j++) operand[j] = m_prev[j];
    operand[D_MEM] = x_in;
  end

  mac_array #(.N_TERMS(D_MEM + 1), .A_W(CW), .B_W(MW), .ACC_W(ACC_W)) u_mac (
    .clk   (clk),
    .rst_n (rst_n),
    .en    (running),
    .a     (rf[row]),
    .b     (operand),
    .sum   (mac_sum),
    .valid (mac_v)
  );

  always_ff @(posedge clk) begin
    if (cfg_we) rf[cfg_row][cfg_col] <= cfg_wdata;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      running <= 1'b0;
      row     <= '0;
      row_q   <= '0;
      done    <= 1'b0;
      m_prev  <= '0;
      m_next  <= '0;
    end else begin
      if (start) begin
        running <= 1'b1;
        row     <= '0;
        done    <= 1'b0;
      end else if (running) begin
        row_q <= row;
        if (32'(row) == D_MEM - 1) running <= 1'b0;
        else                       row <= row + 1'b1;
      end
      if (mac_v) begin
        m_next[row_q] <= sat_uw(48'(mac_sum >>> A_FRAC));
        if (32'(row_q) == D_MEM - 1) done <= 1'b1;
      end
      if (clear)       m_prev <= '0;
      else if (commit) m_prev <= m_next;
    end
  end

  assert property (@(posedge clk) disable iff (!rst_n) start |-> !running);

endmodule
