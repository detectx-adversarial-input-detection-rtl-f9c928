// tb_detectx_full: end-to-end run of the DetectX top at its default size: 16
// ADC lanes, 8192 read cycles per frame, a 512-entry LUT. A behavioural model of
// the VGG8 first-layer crossbar (128 x 3 x 3 x 3 weights, 32 x 32 outputs,
// sixteen 8:1 multiplexers, 8-bit ADCs) supplies the codes. The test loads a
// table whose P(clean) falls as the sample SoI rises, then runs two clean
// images and the same images with a +/-32/255 perturbation. For every frame it
// checks the SoI against the model's own sum of |code|, N_C = 8192, that the
// selected LUT entry brackets the scaled SoI and supplies P_k, the decision
// rule, the N_X + 4 cycle detector latency, and that each perturbed image has
// a higher SoI than its clean original.
module tb_detectx_full;
  localparam int unsigned DEPTH = 512;

  logic clk = 1'b0;
  logic rst_n;
  logic adc_valid, adc_last;
  logic [15:0][7:0] adc_data;
  logic [4:0] cfg_soi_shift;
  logic lut_we;
  logic [8:0] lut_waddr;
  logic [15:0] lut_wdata;
  logic soi_valid;
  logic [24:0] soi;
  logic [13:0] soi_cycles;
  logic ready, det_valid, det_clean;
  logic [7:0] det_p, det_rng;
  logic [8:0] det_k;
  logic [3:0] det_nx;
  logic [7:0] s_tab [DEPTH];
  logic [7:0] p_tab [DEPTH];
  int checks = 0, failures = 0;
  longint soi_seen;
  int soi_cycle, det_cycle, cyc = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  detectx dut (.*);
  xbar_adc_model u_xbar (.clk, .adc_valid, .adc_last, .adc_data);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (soi_valid) begin soi_seen = longint'(soi); soi_cycle = cyc; end
    if (det_valid) det_cycle = cyc;
  end

  task automatic frame(input string tag, output longint s_out);
    longint exp_soi, scaled;
    logic [7:0] kk;
    u_xbar.run_frame(exp_soi, 0);
    repeat (20) @(posedge clk);
    #1;
    scaled = exp_soi >> cfg_soi_shift;
    kk = (scaled > 255) ? 8'hFF : 8'(scaled);
    checks += 6;
    if (longint'(soi) != exp_soi) begin failures++; $display("%s: SoI %0d expected %0d", tag, soi, exp_soi); end
    if (soi_cycles != 14'd8192) begin failures++; $display("%s: N_C %0d", tag, soi_cycles); end
    if (!((s_tab[det_k] <= kk || det_k == 0) &&
          (s_tab[det_k] == kk || det_k == DEPTH - 1 || s_tab[det_k + 1] > kk))) begin
      failures++; $display("%s: k %0d does not bracket key %0d", tag, det_k, kk);
    end
    if (det_p !== p_tab[det_k]) begin failures++; $display("%s: P_k wrong", tag); end
    if (det_clean !== (det_rng < det_p)) begin failures++; $display("%s: decision wrong", tag); end
    if (det_cycle - soi_cycle != int'(det_nx) + 4) begin
      failures++; $display("%s: detector latency %0d, nx %0d", tag, det_cycle - soi_cycle, det_nx);
    end
    $display("%s: SoI %0d key %0d k %0d P %0d rng %0d nx %0d -> %s", tag, soi, kk, det_k,
             det_p, det_rng, det_nx, det_clean ? "clean" : "adversarial");
    s_out = exp_soi;
  endtask

  initial begin
    longint s_clean, s_adv;
    rst_n = 0; cfg_soi_shift = 5'd16;
    lut_we = 0; lut_waddr = '0; lut_wdata = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < DEPTH; i++) begin
      s_tab[i] = 8'(i / 2);
      p_tab[i] = 8'(255 - i / 2);
      lut_we = 1; lut_waddr = 9'(i); lut_wdata = {s_tab[i], p_tab[i]};
      @(posedge clk); #1;
    end
    lut_we = 0;
    u_xbar.set_weights(7);
    for (int img = 0; img < 2; img++) begin
      u_xbar.set_image();
      frame($sformatf("image %0d clean", img), s_clean);
      u_xbar.perturb(32);
      frame($sformatf("image %0d perturbed", img), s_adv);
      checks++;
      if (s_adv <= s_clean) begin failures++; $display("perturbed SoI not higher"); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
