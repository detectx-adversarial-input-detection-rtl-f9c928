// tb_detectx: end-to-end test of the DetectX top with short frames
// (MAX_CYCLES = 64) so that many frames run. ADC codes are random or directed;
// frames have random lengths and idle gaps. For every frame the test checks the
// SoI and N_C against its own sum, then the LUT selection, P_k, the decision
// rule and the latency. It counts how often each mechanism of the design
// occurred and fails if one never did: L1 addition (MSB 0), L1 subtraction
// (MSB 1), accumulation over several read cycles, a one-cycle frame, an idle
// gap inside a frame, an early-exit search, a full nine-read search, a key
// below the table (tenth read), a saturated key, a clean and an adversarial
// decision, and a LUT reload between frames.
module tb_detectx;
  localparam int unsigned MAXC  = 64;
  localparam int unsigned DEPTH = 512;
  localparam int unsigned SOI_W = 8 + 6 + 4;

  logic clk = 1'b0;
  logic rst_n;
  logic adc_valid, adc_last;
  logic [15:0][7:0] adc_data;
  logic [4:0] cfg_soi_shift;
  logic lut_we;
  logic [8:0] lut_waddr;
  logic [15:0] lut_wdata;
  logic soi_valid;
  logic [SOI_W-1:0] soi;
  logic [6:0] soi_cycles;
  logic ready, det_valid, det_clean;
  logic [7:0] det_p, det_rng;
  logic [8:0] det_k;
  logic [3:0] det_nx;
  logic [7:0] s_tab [DEPTH];
  logic [7:0] p_tab [DEPTH];
  int checks = 0, failures = 0;
  int soi_cycle, det_cycle, cyc = 0;
  int n_add = 0, n_sub = 0, n_accum = 0, n_single = 0, n_gap = 0;
  int n_early = 0, n_nine = 0, n_below = 0, n_sat = 0, n_clean = 0, n_adv = 0, n_reload = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cyc++;

  detectx #(.MAX_CYCLES(MAXC)) dut (.*);

  initial begin
    repeat (300000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    if (soi_valid) soi_cycle = cyc;
    if (det_valid) det_cycle = cyc;
  end

  task automatic load_table(input int start_s, input int step_pct);
    int v = start_s;
    for (int i = 0; i < DEPTH; i++) begin
      if (i > 0 && ($urandom % 100) < step_pct && v < 255) v++;
      s_tab[i] = 8'(v);
      p_tab[i] = 8'(255 - i / 2);
      lut_we = 1; lut_waddr = 9'(i); lut_wdata = {s_tab[i], p_tab[i]};
      @(posedge clk); #1;
    end
    lut_we = 0;
  endtask

  // mode 0: random codes, 1: small positive codes, 2: all -128
  task automatic frame(input int len, input int mode, input logic [4:0] sh);
    longint exp_soi = 0, scaled;
    logic [7:0] kk;
    bit gap = 0;
    cfg_soi_shift = sh;
    for (int c = 0; c < len; c++) begin
      if (c > 0 && ($urandom % 6) == 0) begin
        adc_valid = 0; adc_last = 0; adc_data = '1;
        @(posedge clk); #1;
        gap = 1;
      end
      adc_valid = 1; adc_last = (c == len - 1);
      for (int a = 0; a < 16; a++) begin
        logic signed [7:0] d;
        d = (mode == 2) ? 8'sh80 : (mode == 1) ? 8'($urandom % 4) : 8'($urandom);
        adc_data[a] = d;
        exp_soi += (d < 0) ? -longint'(d) : longint'(d);
        if (d < 0) n_sub++; else n_add++;
      end
      @(posedge clk); #1;
    end
    adc_valid = 0; adc_last = 0;
    repeat (20) @(posedge clk);
    #1;
    if (len == 1) n_single++; else n_accum++;
    if (gap) n_gap++;
    scaled = exp_soi >> sh;
    kk = (scaled > 255) ? 8'hFF : 8'(scaled);
    if (scaled > 255) n_sat++;
    checks += 6;
    if (longint'(soi) != exp_soi) begin failures++; $display("SoI %0d expected %0d", soi, exp_soi); end
    if (int'(soi_cycles) != len) begin failures++; $display("N_C %0d expected %0d", soi_cycles, len); end
    if (!((s_tab[det_k] <= kk || det_k == 0) &&
          (s_tab[det_k] == kk || int'(det_k) == DEPTH - 1 || s_tab[det_k + 1] > kk))) begin
      failures++; $display("k %0d does not bracket key %0d", det_k, kk);
    end
    if (det_p !== p_tab[det_k]) begin failures++; $display("P_k wrong"); end
    if (det_clean !== (det_rng < det_p)) begin failures++; $display("decision wrong"); end
    if (det_cycle - soi_cycle != int'(det_nx) + 4) begin
      failures++; $display("latency %0d nx %0d", det_cycle - soi_cycle, det_nx);
    end
    if (det_nx == 10) n_below++; else if (det_nx == 9) n_nine++; else n_early++;
    if (det_clean) n_clean++; else n_adv++;
  endtask

  initial begin
    rst_n = 0; adc_valid = 0; adc_last = 0; adc_data = '0; cfg_soi_shift = '0;
    lut_we = 0; lut_waddr = '0; lut_wdata = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    load_table(40, 40);
    frame(1, 1, 5'd0);            // tiny SoI: below the table
    frame(MAXC, 2, 5'd0);         // largest SoI: saturated key
    for (int f = 0; f < 300; f++) frame(1 + ($urandom % MAXC), 0, 5'($urandom % 8));
    load_table(0, 50);            // reload between frames
    n_reload++;
    for (int f = 0; f < 200; f++) frame(1 + ($urandom % MAXC), 0, 5'(2 + $urandom % 6));
    $display("add %0d sub %0d accumulate %0d single %0d gap %0d early %0d nine %0d below %0d saturated %0d clean %0d adversarial %0d reload %0d",
             n_add, n_sub, n_accum, n_single, n_gap, n_early, n_nine, n_below, n_sat, n_clean, n_adv, n_reload);
    checks += 12;
    if (n_add == 0)    begin failures++; $display("never: addition"); end
    if (n_sub == 0)    begin failures++; $display("never: subtraction"); end
    if (n_accum == 0)  begin failures++; $display("never: accumulation"); end
    if (n_single == 0) begin failures++; $display("never: one-cycle frame"); end
    if (n_gap == 0)    begin failures++; $display("never: idle gap"); end
    if (n_early == 0)  begin failures++; $display("never: early exit"); end
    if (n_nine == 0)   begin failures++; $display("never: nine reads"); end
    if (n_below == 0)  begin failures++; $display("never: below table"); end
    if (n_sat == 0)    begin failures++; $display("never: saturated key"); end
    if (n_clean == 0)  begin failures++; $display("never: clean"); end
    if (n_adv == 0)    begin failures++; $display("never: adversarial"); end
    if (n_reload == 0) begin failures++; $display("never: reload"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
