// tb_workloads: runs the first layers of the other two evaluated networks
// through DetectX with the behavioural crossbar model.
//  - CIFAR100 / VGG16: 64 output channels of 3 x 3 x 3, 32 x 32 outputs. The
//    64 columns occupy ADCs 0-7; a frame is still 32*32*8 = 8192 read cycles,
//    which the default top holds.
//  - TinyImagenet / ResNet18: 64 output channels of 3 x 3 x 3 on 64 x 64 inputs
//    (stride 1 assumed), i.e. 64*64*8 = 32768 read cycles per frame. That
//    exceeds the default MAX_CYCLES of 8192, so this run uses a second top built
//    with MAX_CYCLES = 32768.
// For each workload one clean and one perturbed image are run; the test checks
// the SoI against the model's sum, N_C, the LUT selection and the decision rule.
module tb_workloads;
  localparam int unsigned DEPTH = 512;

  logic clk = 1'b0;
  logic rst_n;
  logic [4:0] cfg_soi_shift;
  logic lut_we;
  logic [8:0] lut_waddr;
  logic [15:0] lut_wdata;
  logic [7:0] s_tab [DEPTH];
  logic [7:0] p_tab [DEPTH];
  int checks = 0, failures = 0;

  // VGG16 on the default top
  logic a_valid, a_last;
  logic [15:0][7:0] a_data;
  logic a_soi_valid, a_ready, a_det_valid, a_det_clean;
  logic [24:0] a_soi;
  logic [13:0] a_cycles;
  logic [7:0] a_p, a_rng;
  logic [8:0] a_k;
  logic [3:0] a_nx;

  // ResNet18 on a top with 32768-cycle frames
  logic b_valid, b_last;
  logic [15:0][7:0] b_data;
  logic b_soi_valid, b_ready, b_det_valid, b_det_clean;
  logic [26:0] b_soi;
  logic [15:0] b_cycles;
  logic [7:0] b_p, b_rng;
  logic [8:0] b_k;
  logic [3:0] b_nx;

  always #5 clk = ~clk;

  detectx u_vgg16 (
    .clk, .rst_n, .adc_valid(a_valid), .adc_last(a_last), .adc_data(a_data),
    .cfg_soi_shift, .lut_we, .lut_waddr, .lut_wdata,
    .soi_valid(a_soi_valid), .soi(a_soi), .soi_cycles(a_cycles), .ready(a_ready),
    .det_valid(a_det_valid), .det_clean(a_det_clean), .det_p(a_p), .det_k(a_k),
    .det_nx(a_nx), .det_rng(a_rng));
  xbar_adc_model #(.N_OFM(64)) m_vgg16 (.clk, .adc_valid(a_valid), .adc_last(a_last), .adc_data(a_data));

  detectx #(.MAX_CYCLES(32768)) u_resnet18 (
    .clk, .rst_n, .adc_valid(b_valid), .adc_last(b_last), .adc_data(b_data),
    .cfg_soi_shift, .lut_we, .lut_waddr, .lut_wdata,
    .soi_valid(b_soi_valid), .soi(b_soi), .soi_cycles(b_cycles), .ready(b_ready),
    .det_valid(b_det_valid), .det_clean(b_det_clean), .det_p(b_p), .det_k(b_k),
    .det_nx(b_nx), .det_rng(b_rng));
  xbar_adc_model #(.N_OFM(64), .OUT(64)) m_resnet18 (.clk, .adc_valid(b_valid), .adc_last(b_last), .adc_data(b_data));

  initial begin
    repeat (400000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic void check(input string tag, input longint exp_soi, input longint got_soi,
                                input int exp_cyc, input int got_cyc, input logic [8:0] k,
                                input logic [7:0] p, input logic [7:0] rng, input logic clean);
    longint scaled = exp_soi >> cfg_soi_shift;
    logic [7:0] kk = (scaled > 255) ? 8'hFF : 8'(scaled);
    checks += 5;
    if (got_soi != exp_soi) begin failures++; $display("%s: SoI %0d expected %0d", tag, got_soi, exp_soi); end
    if (got_cyc != exp_cyc) begin failures++; $display("%s: N_C %0d expected %0d", tag, got_cyc, exp_cyc); end
    if (!((s_tab[k] <= kk || k == 0) && (s_tab[k] == kk || k == 9'(DEPTH - 1) || s_tab[k + 1] > kk))) begin
      failures++; $display("%s: k %0d does not bracket %0d", tag, k, kk);
    end
    if (p !== p_tab[k]) begin failures++; $display("%s: P_k wrong", tag); end
    if (clean !== (rng < p)) begin failures++; $display("%s: decision wrong", tag); end
    $display("%s: SoI %0d key %0d P %0d -> %s", tag, got_soi, kk, p, clean ? "clean" : "adversarial");
  endfunction

  initial begin
    longint s;
    rst_n = 0; cfg_soi_shift = 5'd15;
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
    m_vgg16.set_weights(11);
    m_resnet18.set_weights(13);
    for (int t = 0; t < 2; t++) begin
      if (t == 0) begin m_vgg16.set_image(); m_resnet18.set_image(); end
      else begin m_vgg16.perturb(16); m_resnet18.perturb(16); end
      m_vgg16.run_frame(s, 0);
      repeat (20) @(posedge clk); #1;
      check($sformatf("CIFAR100/VGG16 %s", t ? "perturbed" : "clean"), s, longint'(a_soi), 8192,
            int'(a_cycles), a_k, a_p, a_rng, a_det_clean);
      m_resnet18.run_frame(s, 0);
      repeat (20) @(posedge clk); #1;
      check($sformatf("TinyImagenet/ResNet18 %s", t ? "perturbed" : "clean"), s, longint'(b_soi), 32768,
            int'(b_cycles), b_k, b_p, b_rng, b_det_clean);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
