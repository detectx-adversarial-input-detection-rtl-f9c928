// tb_soi_computing_unit: self-checking test of the SoI computing unit at its
// default size (16 ADC lanes, 8-bit codes, frames up to 8192 read cycles).
// Sends frames of random length and content with idle gaps, computes the
// expected SoI (sum of |code| over lanes and cycles) independently, and checks
// the SoI, the read-cycle count N_C and that soi_valid pulses exactly two edges
// after the last code. One frame is the full 32*32*8 = 8192 cycles of
// most-negative codes, the largest SoI the unit must hold. A second instance
// is built as in the block-diagram example: four ADCs behind 2:1 multiplexers
// (an 8x8 crossbar), i.e. two read cycles per frame.
module tb_soi_computing_unit;
  localparam int unsigned N_ADC = 16;
  localparam int unsigned ADC_W = 8;
  localparam int unsigned MAXC  = 8192;
  localparam int unsigned SOI_W = ADC_W + $clog2(MAXC) + $clog2(N_ADC);
  localparam int unsigned CNT_W = $clog2(MAXC) + 1;

  logic clk = 1'b0;
  logic rst_n;
  logic in_valid, in_last;
  logic [N_ADC-1:0][ADC_W-1:0] in_data;
  logic soi_valid;
  logic [SOI_W-1:0] soi;
  logic [CNT_W-1:0] soi_cycles;
  int checks = 0, failures = 0;
  int pulses = 0;

  always #5 clk = ~clk;

  soi_computing_unit dut (.*);

  // the 8x8 example: 4 lanes, 2 read cycles
  logic s_valid, s_last, s_soi_valid;
  logic [3:0][7:0] s_data;
  logic [10:0] s_soi;
  logic [1:0] s_cycles;
  soi_computing_unit #(.N_ADC(4), .MAX_CYCLES(2)) dut_small (
    .clk, .rst_n, .in_valid(s_valid), .in_last(s_last), .in_data(s_data),
    .soi_valid(s_soi_valid), .soi(s_soi), .soi_cycles(s_cycles));

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (rst_n && soi_valid) pulses++;

  task automatic run_frame(input int len, input bit extreme);
    longint exp_soi = 0;
    for (int c = 0; c < len; c++) begin
      if (!extreme && ($urandom % 7) == 0) begin
        in_valid = 0; in_last = 0; in_data = '1;
        @(posedge clk); #1;
      end
      in_valid = 1; in_last = (c == len - 1);
      for (int a = 0; a < N_ADC; a++) begin
        logic signed [ADC_W-1:0] d;
        d = extreme ? 8'sh80 : ADC_W'($urandom);
        in_data[a] = d;
        exp_soi += (d < 0) ? -longint'(d) : longint'(d);
      end
      @(posedge clk); #1;
      checks++;
      if (soi_valid) begin
        failures++;
        $display("soi_valid too early");
      end
    end
    // the edge that took the last code has passed and soi_valid is still low
    in_valid = 0; in_last = 0;
    @(posedge clk); #1;       // second edge: SoI out
    checks += 3;
    if (!soi_valid) begin failures++; $display("soi_valid missing"); end
    if (longint'(soi) != exp_soi) begin
      failures++;
      $display("SoI %0d expected %0d (len %0d)", soi, exp_soi, len);
    end
    if (int'(soi_cycles) != len) begin
      failures++;
      $display("N_C %0d expected %0d", soi_cycles, len);
    end
    @(posedge clk); #1;
    checks++;
    if (soi_valid) begin failures++; $display("soi_valid longer than one cycle"); end
  endtask

  task automatic small_frame(input logic [1:0][3:0][7:0] d);
    longint e = 0;
    for (int c = 0; c < 2; c++) begin
      s_valid = 1; s_last = (c == 1); s_data = d[c];
      for (int a = 0; a < 4; a++) begin
        logic signed [7:0] v;
        v = d[c][a];
        e += (v < 0) ? -longint'(v) : longint'(v);
      end
      @(posedge clk); #1;
    end
    s_valid = 0; s_last = 0;
    @(posedge clk); #1;
    checks += 3;
    if (!s_soi_valid) begin failures++; $display("8x8 example: soi_valid missing"); end
    if (longint'(s_soi) != e) begin failures++; $display("8x8 example: SoI %0d expected %0d", s_soi, e); end
    if (s_cycles != 2'd2) begin failures++; $display("8x8 example: N_C %0d", s_cycles); end
  endtask

  initial begin
    rst_n = 0; in_valid = 0; in_last = 0; in_data = '0;
    s_valid = 0; s_last = 0; s_data = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    small_frame({8'sd3, -8'sd4, 8'sd5, -8'sd128, 8'sd127, -8'sd1, 8'sd0, 8'sd2});
    for (int i = 0; i < 50; i++) small_frame({2{32'($urandom)}} ^ 64'($urandom));
    run_frame(1, 0);
    run_frame(2, 0);
    for (int f = 0; f < 30; f++) run_frame(1 + ($urandom % 300), 0);
    run_frame(MAXC, 1);
    run_frame(8, 0);
    checks++;
    if (pulses != 34) begin failures++; $display("pulses %0d expected 34", pulses); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
