// tb_sram_1rw: checks the single-port SRAM model against a reference array.
// Writes single lanes and whole words at random, reads random words back
// and compares; checks the one-cycle read latency and that rdata holds its
// value over idle and write cycles.
module tb_sram_1rw;
  localparam int WORDS = 37, LANES = 5, LANE_W = 8;
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic                    en;
  logic [LANES-1:0]        we;
  logic [$clog2(WORDS)-1:0] addr;
  logic [LANES*LANE_W-1:0] wdata, rdata;
  logic [LANES*LANE_W-1:0] ref_mem [WORDS];
  int checks = 0, failures = 0;

  sram_1rw #(.WORDS(WORDS), .LANES(LANES), .LANE_W(LANE_W)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  task automatic write(input int a, input logic [LANES-1:0] m, input logic [LANES*LANE_W-1:0] d);
    en = 1; we = m; addr = a[$clog2(WORDS)-1:0]; wdata = d;
    @(posedge clk); #1;
    for (int l = 0; l < LANES; l++) if (m[l]) ref_mem[a][l*LANE_W +: LANE_W] = d[l*LANE_W +: LANE_W];
    en = 0; we = '0;
  endtask

  task automatic read_check(input int a);
    en = 1; we = '0; addr = a[$clog2(WORDS)-1:0];
    @(posedge clk); #1;
    en = 0;
    check(rdata == ref_mem[a], $sformatf("read word %0d: got %h exp %h", a, rdata, ref_mem[a]));
  endtask

  initial begin
    en = 0; we = '0; addr = '0; wdata = '0;
    @(posedge clk); #1;
    for (int a = 0; a < WORDS; a++) write(a, '1, {$urandom, $urandom});
    for (int a = 0; a < WORDS; a++) read_check(a);
    for (int n = 0; n < 300; n++) begin
      automatic int a = $urandom_range(WORDS - 1);
      if ($urandom_range(1)) write(a, LANES'($urandom), {$urandom, $urandom});
      else read_check(a);
    end
    // rdata holds over idle and write cycles
    read_check(3);
    begin
      automatic logic [LANES*LANE_W-1:0] held = rdata;
      write(4, '1, '0);
      @(posedge clk); #1;
      check(rdata == held, "rdata must hold after write/idle cycles");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk); #1;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
