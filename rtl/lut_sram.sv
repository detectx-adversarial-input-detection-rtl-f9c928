// lut_sram: storage of the SoI-probability look-up table.
//
// DEPTH words of WIDTH bits (512 x 16 by default, the size the paper gives for
// its 6T-SRAM LUT). Word k holds the sample SoI S_k and its clean probability
// P_k (see detectx_pkg::lut_entry_t). Written here as a plain array with one
// write port, used to load the table after training, and one read port used by
// the binary search. Both ports are synchronous: rdata shows the word addressed
// in the cycle re was high, after the next clock edge, and holds otherwise.
// A read and a write of the same address in one cycle return the old word.
// The ports and the one-cycle latency are our choices.
module lut_sram #(
  parameter int unsigned DEPTH = detectx_pkg::LUT_DEPTH,
  parameter int unsigned WIDTH = detectx_pkg::S_W + detectx_pkg::P_W,
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic             re,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
  end

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];
  end

endmodule
