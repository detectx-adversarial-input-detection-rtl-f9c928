// sram_rng: behavioural model of the SRAM-based random number generator of the
// confidence generator. Not synthesizable logic.
//
// The real part draws its randomness from the unstable power-up state of SRAM
// cells and delivers an 8-bit sample per access; that physical entropy source
// has no gate-level equivalent, so this model draws uniform samples with
// $urandom. Ports are those the real part needs: a request and a sample that is
// valid one clock after the request (latency is our choice). SEED makes runs
// repeatable.
module sram_rng #(
  parameter int unsigned W    = detectx_pkg::RNG_W,
  parameter int unsigned SEED = 1
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic         req,
  output logic         valid,
  output logic [W-1:0] data
);

  initial begin
    void'($urandom(SEED));
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      valid <= 1'b0;
      data  <= '0;
    end else begin
      valid <= req;
      if (req) data <= W'($urandom);
    end
  end

endmodule
