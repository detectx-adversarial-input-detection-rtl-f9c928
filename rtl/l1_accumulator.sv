// l1_accumulator: one L1 adder/subtractor of the SoI computing unit with its
// accumulation register.
//
// Each read cycle one ADC delivers a two's-complement MAC code. When the code's
// MSB is 0 it is added to the register, when the MSB is 1 it is subtracted, so
// the register accumulates |code| over the whole frame (the add/subtract on the
// MSB and the register feedback follow the paper). On the first cycle of a
// frame (in_first) the register is loaded with |code| instead of accumulated,
// so frames need no separate clear cycle (our choice).
//
// Timing: acc changes on the clock edge that accepts a code (in_valid).
// Reset (synchronous, active low) clears acc. ACC_W must hold
// 2^(ADC_W-1) * (frame length); the paper's energy table lists 8-bit registers,
// which would overflow, so the default is widened to 21 bits.
module l1_accumulator #(
  parameter int unsigned ADC_W = detectx_pkg::ADC_W,
  parameter int unsigned ACC_W = detectx_pkg::ACC_W
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  input  logic             in_first,
  input  logic [ADC_W-1:0] in_data,
  output logic [ACC_W-1:0] acc
);

  logic [ACC_W-1:0] base;
  logic [ACC_W-1:0] operand;
  logic [ACC_W-1:0] next_acc;

  always_comb begin
    base     = in_first ? '0 : acc;
    // sign-extend the code; subtracting a negative code adds its magnitude
    operand  = {{(ACC_W-ADC_W){in_data[ADC_W-1]}}, in_data};
    next_acc = in_data[ADC_W-1] ? (base - operand) : (base + operand);
  end

  always_ff @(posedge clk) begin
    if (!rst_n)        acc <= '0;
    else if (in_valid) acc <= next_acc;
  end

endmodule
