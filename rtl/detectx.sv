// detectx: DetectX adversarial-input detector, appended after the ADCs of the
// first-layer crossbar of an analog in-memory DNN accelerator.
//
// Adversarial perturbations raise the sum of the magnitudes of the first layer's
// column currents (SoI). The SoI computing unit accumulates |ADC code| per ADC
// over all read cycles of an input frame and adds the lanes in an adder tree.
// The LUT-based detector then looks the SoI up in a trained SoI-probability
// table by binary search and compares the selected P(clean) with a random
// sample: det_clean = 1 passes the input as clean, 0 rejects it. The two-stage
// structure and the sizes (16 ADC lanes, 8-bit codes, 8192 read cycles per
// frame, 512 x 16-bit LUT, 8-bit RNG) are the paper's.
//
// Outside this module: the crossbar, analog multiplexers and ADCs (adc_data,
// one code per ADC per read cycle, with adc_last marking the frame's last read
// cycle), the activation units that also take the ADC codes, and the host that
// loads the LUT (lut_we/lut_waddr/lut_wdata, {S_k, P_k} words sorted by S_k)
// and sets cfg_soi_shift, the SoI-to-table scaling.
//
// Timing: soi_valid pulses two edges after the last code; det_valid follows
// N_X + 4 cycles later, where N_X <= 10 is the number of LUT reads (det_nx).
// A frame must not end while ready is low; with frames of thousands of read
// cycles this cannot happen.
module detectx #(
  parameter int unsigned N_ADC      = detectx_pkg::N_ADC,
  parameter int unsigned ADC_W      = detectx_pkg::ADC_W,
  parameter int unsigned MAX_CYCLES = detectx_pkg::MAX_CYCLES,
  parameter int unsigned LUT_DEPTH  = detectx_pkg::LUT_DEPTH,
  parameter int unsigned S_W        = detectx_pkg::S_W,
  parameter int unsigned P_W        = detectx_pkg::P_W,
  parameter int unsigned RNG_SEED   = 1,
  localparam int unsigned NX_W      = detectx_pkg::NX_W,
  localparam int unsigned SOI_W     = ADC_W + $clog2(MAX_CYCLES) + $clog2(N_ADC),
  localparam int unsigned CNT_W     = $clog2(MAX_CYCLES) + 1,
  localparam int unsigned AW        = $clog2(LUT_DEPTH)
) (
  input  logic                        clk,
  input  logic                        rst_n,
  // from the first-layer ADCs
  input  logic                        adc_valid,
  input  logic                        adc_last,
  input  logic [N_ADC-1:0][ADC_W-1:0] adc_data,
  // configuration and LUT load
  input  logic [4:0]                  cfg_soi_shift,
  input  logic                        lut_we,
  input  logic [AW-1:0]               lut_waddr,
  input  logic [S_W+P_W-1:0]          lut_wdata,
  // SoI of the last frame
  output logic                        soi_valid,
  output logic [SOI_W-1:0]            soi,
  output logic [CNT_W-1:0]            soi_cycles,
  // detector
  output logic                        ready,
  output logic                        det_valid,
  output logic                        det_clean,
  output logic [P_W-1:0]              det_p,
  output logic [AW-1:0]               det_k,
  output logic [NX_W-1:0]             det_nx,
  output logic [P_W-1:0]              det_rng
);

  soi_computing_unit #(
    .N_ADC(N_ADC), .ADC_W(ADC_W), .MAX_CYCLES(MAX_CYCLES)
  ) u_soi (
    .clk       (clk),
    .rst_n     (rst_n),
    .in_valid  (adc_valid),
    .in_last   (adc_last),
    .in_data   (adc_data),
    .soi_valid (soi_valid),
    .soi       (soi),
    .soi_cycles(soi_cycles)
  );

  lut_based_detector #(
    .SOI_W(SOI_W), .DEPTH(LUT_DEPTH), .S_W(S_W), .P_W(P_W), .NX_W(NX_W),
    .RNG_SEED(RNG_SEED)
  ) u_det (
    .clk          (clk),
    .rst_n        (rst_n),
    .soi_valid    (soi_valid),
    .soi          (soi),
    .cfg_soi_shift(cfg_soi_shift),
    .lut_we       (lut_we),
    .lut_waddr    (lut_waddr),
    .lut_wdata    (lut_wdata),
    .ready        (ready),
    .det_valid    (det_valid),
    .det_clean    (det_clean),
    .det_p        (det_p),
    .det_k        (det_k),
    .det_nx       (det_nx),
    .det_rng      (det_rng)
  );

endmodule
