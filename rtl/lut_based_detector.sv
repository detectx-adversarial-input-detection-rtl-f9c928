// lut_based_detector: the LUT-based detector of DetectX. Maps a SoI to a clean
// probability through the SoI-probability LUT and draws the clean/adversarial
// decision.
//
// A SoI is first scaled onto the LUT's sample-SoI axis: key = SoI >>
// cfg_soi_shift, saturated to S_W bits (the scaling is our choice; the paper
// does not say how the SoI meets the stored samples). The LookUp stage
// (lut_search) binary-searches the LUT (lut_sram) for S_k <= key < S_{k+1} and
// hands P_k to the confidence generator, which compares it with an RNG sample:
// 1 = clean, 0 = adversarial. LUT, binary search and confidence generator are
// the paper's structure.
//
// Interface: soi_valid is accepted when ready is high (a new SoI arrives only
// once per frame, thousands of cycles apart; an assertion flags one arriving
// while busy). The LUT is loaded through lut_we/lut_waddr/lut_wdata, which must
// not be used during a search. det_valid pulses with det_clean, det_p (P_k),
// det_k (k), det_nx (LUT reads) and det_rng (RNG sample); all hold until the
// next decision. Latency from soi_valid to det_valid: N_X + 4 cycles.
module lut_based_detector #(
  parameter int unsigned SOI_W    = detectx_pkg::SOI_W,
  parameter int unsigned DEPTH    = detectx_pkg::LUT_DEPTH,
  parameter int unsigned S_W      = detectx_pkg::S_W,
  parameter int unsigned P_W      = detectx_pkg::P_W,
  parameter int unsigned NX_W     = detectx_pkg::NX_W,
  parameter int unsigned RNG_SEED = 1,
  localparam int unsigned AW      = $clog2(DEPTH)
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               soi_valid,
  input  logic [SOI_W-1:0]   soi,
  input  logic [4:0]         cfg_soi_shift,
  input  logic               lut_we,
  input  logic [AW-1:0]      lut_waddr,
  input  logic [S_W+P_W-1:0] lut_wdata,
  output logic               ready,
  output logic               det_valid,
  output logic               det_clean,
  output logic [P_W-1:0]     det_p,
  output logic [AW-1:0]      det_k,
  output logic [NX_W-1:0]    det_nx,
  output logic [P_W-1:0]     det_rng
);

  logic               start;
  logic [S_W-1:0]     key;
  logic [SOI_W-1:0]   scaled;
  logic               search_busy, search_done;
  logic [AW-1:0]      found_k;
  logic [P_W-1:0]     found_p;
  logic [NX_W-1:0]    found_nx;
  logic               mem_re;
  logic [AW-1:0]      mem_raddr;
  logic [S_W+P_W-1:0] mem_rdata;
  logic               conf_busy;
  logic               pend;     // search finished, decision not yet out
  logic               start_r;  // search starts the cycle after acceptance
  logic [S_W-1:0]     key_r;

  // scale the SoI onto the sample-SoI axis, saturating
  always_comb begin
    scaled = soi >> cfg_soi_shift;
    key    = (scaled > SOI_W'({S_W{1'b1}})) ? {S_W{1'b1}} : scaled[S_W-1:0];
  end

  assign ready = !search_busy && !conf_busy && !pend && !start_r;
  assign start = soi_valid && ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      start_r <= 1'b0;
      key_r   <= '0;
    end else begin
      start_r <= start;
      if (start) key_r <= key;
    end
  end

  lut_sram #(.DEPTH(DEPTH), .WIDTH(S_W + P_W)) u_lut (
    .clk  (clk),
    .we   (lut_we),
    .waddr(lut_waddr),
    .wdata(lut_wdata),
    .re   (mem_re),
    .raddr(mem_raddr),
    .rdata(mem_rdata)
  );

  lut_search #(.DEPTH(DEPTH), .S_W(S_W), .P_W(P_W), .NX_W(NX_W)) u_search (
    .clk      (clk),
    .rst_n    (rst_n),
    .start    (start_r),
    .key      (key_r),
    .busy     (search_busy),
    .done     (search_done),
    .k        (found_k),
    .p        (found_p),
    .nx       (found_nx),
    .mem_re   (mem_re),
    .mem_raddr(mem_raddr),
    .mem_rdata(mem_rdata)
  );

  confidence_generator #(.P_W(P_W), .RNG_SEED(RNG_SEED)) u_conf (
    .clk       (clk),
    .rst_n     (rst_n),
    .p_valid   (search_done),
    .p_k       (found_p),
    .busy      (conf_busy),
    .det_valid (det_valid),
    .det_clean (det_clean),
    .rng_sample(det_rng)
  );

  // k, P_k and N_X of the decision in flight
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pend   <= 1'b0;
      det_p  <= '0;
      det_k  <= '0;
      det_nx <= '0;
    end else begin
      if (search_done) begin
        pend   <= 1'b1;
        det_p  <= found_p;
        det_k  <= found_k;
        det_nx <= found_nx;
      end else if (det_valid) begin
        pend <= 1'b0;
      end
    end
  end

  a_no_overrun : assert property (@(posedge clk) disable iff (!rst_n)
    soi_valid |-> ready);
  a_no_load_during_search : assert property (@(posedge clk) disable iff (!rst_n)
    lut_we |-> !search_busy);

endmodule
