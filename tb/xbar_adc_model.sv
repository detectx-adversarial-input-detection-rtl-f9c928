// xbar_adc_model: behavioural stand-in for the first-layer analog crossbar, its
// 8:1 analog multiplexers and 8-bit ADCs, used only by testbenches.
//
// It maps a K x K x C_IN convolution with N_OFM output channels (VGG8 layer 1 by
// default: 128 x 3 x 3 x 3 weights, 32 x 32 outputs, padding 1) onto N_OFM
// crossbar columns. ADC a reads columns a*MUX .. a*MUX+MUX-1 through its
// multiplexer, one per read cycle, so one output position takes MUX read
// cycles and a frame OUT*OUT*MUX cycles (8192 by default). The column current
// is the exact integer MAC of signed weights and unsigned 8-bit pixels; the ADC
// code is that MAC arithmetically shifted right by ADC_SHIFT and clamped to a
// signed 8-bit code. Device variation and analog noise are not modelled.
//
// Weights come from a seeded generator. set_image() fills the input with random
// pixels; perturb() adds +/-eps with random sign to every pixel (clamped to
// 0..255), a stand-in for an adversarial perturbation of the same strength.
// run_frame() streams one frame on adc_valid/adc_last/adc_data and returns the
// sum of |code| over the frame, computed independently of the design.
module xbar_adc_model #(
  parameter int N_OFM     = 128,
  parameter int C_IN      = 3,
  parameter int K         = 3,
  parameter int OUT       = 32,
  parameter int N_ADC     = 16,
  parameter int MUX       = 8,
  parameter int ADC_SHIFT = 9
) (
  input  logic                   clk,
  output logic                   adc_valid,
  output logic                   adc_last,
  output logic [N_ADC-1:0][7:0]  adc_data
);

  byte signed w   [N_OFM][C_IN][K][K];
  byte unsigned x [C_IN][OUT][OUT];

  initial begin
    adc_valid = 1'b0;
    adc_last  = 1'b0;
    adc_data  = '0;
  end

  function automatic void set_weights(input int seed);
    void'($urandom(seed));
    foreach (w[o, c, i, j]) w[o][c][i][j] = byte'(int'($urandom % 128) - 64);
  endfunction

  function automatic void set_image();
    foreach (x[c, i, j]) x[c][i][j] = byte'($urandom);
  endfunction

  function automatic void perturb(input int eps);
    foreach (x[c, i, j]) begin
      int v = int'(x[c][i][j]) + ((($urandom % 2) == 1) ? eps : -eps);
      x[c][i][j] = byte'((v < 0) ? 0 : (v > 255) ? 255 : v);
    end
  endfunction

  function automatic logic [7:0] code(input int o, input int py, input int px);
    int mac = 0;
    int q;
    for (int c = 0; c < C_IN; c++)
      for (int i = 0; i < K; i++)
        for (int j = 0; j < K; j++) begin
          int yy = py + i - K / 2;
          int xx = px + j - K / 2;
          if (yy >= 0 && yy < OUT && xx >= 0 && xx < OUT)
            mac += int'(w[o][c][i][j]) * int'(x[c][yy][xx]);
        end
    q = mac >>> ADC_SHIFT;
    if (q > 127) q = 127;
    if (q < -128) q = -128;
    return 8'(q);
  endfunction

  // stream one frame; gap_every > 0 inserts an idle cycle after that many reads
  task automatic run_frame(output longint abs_sum, input int gap_every = 0);
    int n = 0;
    abs_sum = 0;
    for (int py = 0; py < OUT; py++)
      for (int px = 0; px < OUT; px++)
        for (int m = 0; m < MUX; m++) begin
          for (int a = 0; a < N_ADC; a++) begin
            int col = a * MUX + m;
            logic signed [7:0] d;
            d = (col < N_OFM) ? code(col, py, px) : 8'sd0;
            adc_data[a] <= d;
            abs_sum += (d < 0) ? -longint'(d) : longint'(d);
          end
          adc_valid <= 1'b1;
          adc_last  <= (py == OUT - 1) && (px == OUT - 1) && (m == MUX - 1);
          @(posedge clk);
          n++;
          if (gap_every > 0 && (n % gap_every) == 0) begin
            adc_valid <= 1'b0;
            adc_last  <= 1'b0;
            @(posedge clk);
          end
        end
    adc_valid <= 1'b0;
    adc_last  <= 1'b0;
  endtask

endmodule
