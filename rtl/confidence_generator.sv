// confidence_generator: turns the looked-up clean probability P_k into a
// detector decision by comparing it with one random sample.
//
// For each P_k it requests one sample from the SRAM-based RNG and outputs 1
// (clean) when the sample is less than P_k, else 0 (adversarial, the input is
// rejected). With P_k read as P_k / 2^P_W, an input is passed as clean with
// probability P(clean). The comparison and the one RNG access per SoI follow
// the paper; the fixed-point reading of P_k and the timing are our choices.
//
// Interface: p_valid (while !busy) latches p_k and requests a sample. det_valid
// pulses two cycles later with det_clean and rng_sample (the sample used);
// both hold until the next decision.
module confidence_generator #(
  parameter int unsigned P_W      = detectx_pkg::P_W,
  parameter int unsigned RNG_SEED = 1
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           p_valid,
  input  logic [P_W-1:0] p_k,
  output logic           busy,
  output logic           det_valid,
  output logic           det_clean,
  output logic [P_W-1:0] rng_sample
);

  logic           waiting;
  logic [P_W-1:0] p_r;
  logic           rng_req;
  logic           rng_valid;
  logic [P_W-1:0] rng_data;

  assign rng_req = p_valid && !waiting;
  assign busy    = waiting;

  sram_rng #(.W(P_W), .SEED(RNG_SEED)) u_rng (
    .clk  (clk),
    .rst_n(rst_n),
    .req  (rng_req),
    .valid(rng_valid),
    .data (rng_data)
  );

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      waiting    <= 1'b0;
      p_r        <= '0;
      det_valid  <= 1'b0;
      det_clean  <= 1'b0;
      rng_sample <= '0;
    end else begin
      det_valid <= 1'b0;
      if (rng_req) begin
        waiting <= 1'b1;
        p_r     <= p_k;
      end else if (waiting && rng_valid) begin
        waiting    <= 1'b0;
        det_valid  <= 1'b1;
        det_clean  <= (rng_data < p_r);
        rng_sample <= rng_data;
      end
    end
  end

endmodule
