// tb_dirc_accu - self-checking test of the bit-serial shift-accumulator.
// Feeds random counts, shifts and signs and compares the running sum with a
// reference kept in a 64-bit integer; also checks clear and hold.
module tb_dirc_accu;
  logic clk = 0, rst_n = 0, en = 0, clr = 0, neg = 0;
  logic [3:0] shift = 0;
  logic [7:0] din = 0;
  logic signed [25:0] acc;
  longint ref_v = 0;
  int checks = 0, failures = 0;

  dirc_accu #(.ACC_W(26), .IN_W(8)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 2000; i++) begin
      @(negedge clk);
      en    = ($urandom % 4) != 0;
      clr   = ($urandom % 16) == 0;
      neg   = $urandom % 2;
      shift = 4'($urandom % 15);
      din   = 8'($urandom % 129);
      if (en) begin
        if (clr) ref_v = 0;
        ref_v = neg ? ref_v - (longint'(din) << shift) : ref_v + (longint'(din) << shift);
        ref_v = longint'(26'(ref_v)) <<< 38 >>> 38;
      end
      @(posedge clk); #1;
      checks++;
      if (acc !== 26'(ref_v)) begin
        failures++;
        if (failures < 5) $display("mismatch i=%0d acc=%0d ref=%0d", i, acc, ref_v);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
