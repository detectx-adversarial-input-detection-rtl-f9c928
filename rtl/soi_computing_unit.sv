// soi_computing_unit: computes the Sum of column currents (SoI) of one input
// frame from the ADC codes of the first-layer crossbar.
//
// The crossbar's columns are multiplexed onto N_ADC ADCs, so one frame arrives
// as a sequence of read cycles, each carrying N_ADC codes. Every ADC lane has an
// L1 adder/subtractor and register (l1_accumulator) that accumulates |code|
// across the read cycles. After the last read cycle the L2 adder tree sums the
// N_ADC registers and the result is registered as the SoI. This structure is
// the paper's; the frame-end strobe (in_last), the registered output and the
// cycle counter are our choices.
//
// Interface: in_valid qualifies in_data (N_ADC codes); in_last marks the last
// read cycle of the frame. A frame is any run of valid cycles ending with
// in_last; idle cycles in between are allowed. soi_valid is a one-cycle pulse,
// and soi / soi_cycles hold until the next frame ends. soi_cycles is the number
// of read cycles (N_C) in the frame.
//
// Timing: the registers take the last code on edge E; soi_valid is high after
// edge E+1 (two edges after the last code is presented).
module soi_computing_unit #(
  parameter int unsigned N_ADC      = detectx_pkg::N_ADC,
  parameter int unsigned ADC_W      = detectx_pkg::ADC_W,
  parameter int unsigned MAX_CYCLES = detectx_pkg::MAX_CYCLES,
  localparam int unsigned ACC_W     = ADC_W + $clog2(MAX_CYCLES),
  localparam int unsigned SOI_W     = ACC_W + $clog2(N_ADC),
  localparam int unsigned CNT_W     = $clog2(MAX_CYCLES) + 1
) (
  input  logic                        clk,
  input  logic                        rst_n,
  input  logic                        in_valid,
  input  logic                        in_last,
  input  logic [N_ADC-1:0][ADC_W-1:0] in_data,
  output logic                        soi_valid,
  output logic [SOI_W-1:0]            soi,
  output logic [CNT_W-1:0]            soi_cycles
);

  logic                        first;     // next valid cycle starts a frame
  logic                        sum_now;   // registers hold a complete frame
  logic [CNT_W-1:0]            cycles;
  logic [N_ADC-1:0][ACC_W-1:0] acc;
  logic [SOI_W-1:0]            tree_sum;

  for (genvar a = 0; a < N_ADC; a++) begin : g_l1
    l1_accumulator #(.ADC_W(ADC_W), .ACC_W(ACC_W)) u_l1 (
      .clk     (clk),
      .rst_n   (rst_n),
      .in_valid(in_valid),
      .in_first(first),
      .in_data (in_data[a]),
      .acc     (acc[a])
    );
  end

  l2_adder_tree #(.N(N_ADC), .IN_W(ACC_W), .OUT_W(SOI_W)) u_l2 (
    .in_vals(acc),
    .sum    (tree_sum)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      first      <= 1'b1;
      sum_now    <= 1'b0;
      cycles     <= '0;
      soi_valid  <= 1'b0;
      soi        <= '0;
      soi_cycles <= '0;
    end else begin
      sum_now   <= in_valid && in_last;
      soi_valid <= sum_now;
      if (sum_now) begin
        soi        <= tree_sum;
        soi_cycles <= cycles;
      end
      if (in_valid) begin
        first  <= in_last;
        cycles <= first ? CNT_W'(1) : cycles + 1'b1;
      end
    end
  end

  // a frame longer than MAX_CYCLES could overflow the accumulators
  a_frame_len : assert property (@(posedge clk) disable iff (!rst_n)
    (in_valid && !first) |-> (cycles < CNT_W'(MAX_CYCLES)));

endmodule
