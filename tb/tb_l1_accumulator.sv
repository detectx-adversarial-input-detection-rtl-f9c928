// tb_l1_accumulator: self-checking test of one L1 adder/subtractor + register.
// Drives frames of random two's-complement codes (with idle cycles), keeps an
// independent running sum of |code| and compares it with acc after every edge.
// Covers positive, negative, the most negative code and the frame restart.
module tb_l1_accumulator;
  localparam int unsigned ADC_W = 8;
  localparam int unsigned ACC_W = 21;

  logic             clk = 1'b0;
  logic             rst_n;
  logic             in_valid, in_first;
  logic [ADC_W-1:0] in_data;
  logic [ACC_W-1:0] acc;
  int checks = 0, failures = 0;
  longint expected;

  always #5 clk = ~clk;

  l1_accumulator #(.ADC_W(ADC_W), .ACC_W(ACC_W)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic step(input logic v, input logic f, input logic signed [ADC_W-1:0] d);
    in_valid = v; in_first = f; in_data = d;
    @(posedge clk);
    #1;
    if (v) begin
      if (f) expected = 0;
      expected += (d < 0) ? -longint'(d) : longint'(d);
    end
    checks++;
    if (acc !== ACC_W'(expected)) begin
      failures++;
      $display("mismatch: code %0d acc %0d expected %0d", d, acc, expected);
    end
  endtask

  initial begin
    rst_n = 1'b0; in_valid = 0; in_first = 0; in_data = '0; expected = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1'b1;
    checks++;
    if (acc !== '0) failures++;
    // directed: +5, -5, -128, +127
    step(1, 1, 8'sd5);
    step(1, 0, -8'sd5);
    step(1, 0, -8'sd128);
    step(1, 0, 8'sd127);
    step(0, 0, -8'sd7);          // idle cycle: no change
    // random frames
    for (int f = 0; f < 40; f++) begin
      int len;
      len = 1 + ($urandom % 200);
      for (int c = 0; c < len; c++) begin
        if (($urandom % 5) == 0) step(0, 0, 8'($urandom));
        step(1, c == 0, 8'($urandom));
      end
    end
    // a long frame of the most negative code: 8192 * 128 = 2^20
    for (int c = 0; c < 8192; c++) begin
      in_valid = 1; in_first = (c == 0); in_data = 8'h80;
      @(posedge clk); #1;
    end
    checks++;
    if (acc !== ACC_W'(1 << 20)) begin
      failures++;
      $display("full frame: acc %0d expected %0d", acc, 1 << 20);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
