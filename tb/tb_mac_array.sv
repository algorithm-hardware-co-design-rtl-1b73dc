// tb_mac_array: random signed vectors through the row MAC; the registered
// sum must equal the reference dot product one cycle later, with valid set.
module tb_mac_array;
  localparam int N = 11, AW = 8, BW_ = 16, ACC = 40;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic rst_n, en, valid;
  logic [N-1:0][AW-1:0]  a;
  logic [N-1:0][BW_-1:0] b;
  logic signed [ACC-1:0] sum;
  int checks = 0, failures = 0;

  mac_array #(.N_TERMS(N), .A_W(AW), .B_W(BW_), .ACC_W(ACC)) dut (.*);

  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  initial begin
    rst_n = 0; en = 0; a = '0; b = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int n = 0; n < 500; n++) begin
      automatic longint expv = 0;
      for (int t = 0; t < N; t++) begin
        a[t] = (n < 3) ? ((n == 0) ? 8'h80 : 8'h7f) : AW'($urandom);
        b[t] = (n < 3) ? ((n == 2) ? 16'h7fff : 16'h8000) : BW_'($urandom);
        expv += longint'($signed(a[t])) * longint'($signed(b[t]));
      end
      en = 1;
      @(posedge clk); #1;
      en = 0;
      check(valid == 1'b1, "valid one cycle after en");
      check(longint'(sum) == expv, $sformatf("sum %0d exp %0d", sum, expv));
      @(posedge clk); #1;
      check(valid == 1'b0, "valid drops without en");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
