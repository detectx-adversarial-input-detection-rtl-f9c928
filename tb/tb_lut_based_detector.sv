// tb_lut_based_detector: self-checking test of the LUT-based detector. Loads a
// sorted 512-entry SoI-probability table through the load port, then applies
// SoIs with different scaling shifts. For each it checks, against values
// computed here: the saturated key, the selected k (S_k <= key < S_{k+1}, or
// equality, or 0 below the table), P_k, the decision det_clean = (RNG sample <
// P_k), and the latency of N_X + 4 cycles from soi_valid to det_valid.
module tb_lut_based_detector;
  localparam int unsigned SOI_W = 25;
  localparam int unsigned DEPTH = 512;

  logic clk = 1'b0;
  logic rst_n;
  logic soi_valid;
  logic [SOI_W-1:0] soi;
  logic [4:0] cfg_soi_shift;
  logic lut_we;
  logic [8:0] lut_waddr;
  logic [15:0] lut_wdata;
  logic ready, det_valid, det_clean;
  logic [7:0] det_p, det_rng;
  logic [8:0] det_k;
  logic [3:0] det_nx;
  logic [7:0] s_tab [DEPTH];
  logic [7:0] p_tab [DEPTH];
  int checks = 0, failures = 0;
  int n_sat = 0, n_clean = 0, n_adv = 0;

  always #5 clk = ~clk;

  lut_based_detector dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic detect(input logic [SOI_W-1:0] s, input logic [4:0] sh);
    longint scaled;
    logic [7:0] kk;
    int cyc = 0;
    scaled = longint'(s) >> sh;
    kk = (scaled > 255) ? 8'hFF : 8'(scaled);
    if (scaled > 255) n_sat++;
    checks++;
    if (!ready) begin failures++; $display("not ready"); end
    soi_valid = 1; soi = s; cfg_soi_shift = sh;
    @(posedge clk); #1;
    soi_valid = 0; soi = SOI_W'($urandom);
    while (!det_valid && cyc < 30) begin @(posedge clk); #1; cyc++; end
    checks += 5;
    if (!((s_tab[det_k] <= kk || det_k == 0) &&
          (s_tab[det_k] == kk || det_k == DEPTH - 1 || s_tab[det_k + 1] > kk))) begin
      failures++; $display("SoI %0d key %0d: k %0d (S %0d) does not bracket", s, kk, det_k, s_tab[det_k]);
    end
    if (det_p !== p_tab[det_k]) begin failures++; $display("P %0d expected %0d", det_p, p_tab[det_k]); end
    if (det_clean !== (det_rng < det_p)) begin failures++; $display("decision wrong"); end
    if (cyc != int'(det_nx) + 3) begin failures++; $display("latency %0d cycles, nx %0d", cyc + 1, det_nx); end
    if (det_nx < 1 || det_nx > 10) begin failures++; $display("nx %0d", det_nx); end
    if (det_clean) n_clean++; else n_adv++;
    @(posedge clk); #1;
  endtask

  initial begin
    int v = 10;
    rst_n = 0; soi_valid = 0; soi = '0; cfg_soi_shift = '0;
    lut_we = 0; lut_waddr = '0; lut_wdata = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    // table: S rising from 10, P falling (large SoI = adversarial)
    for (int i = 0; i < DEPTH; i++) begin
      if (($urandom % 3) == 0 && v < 250) v++;
      s_tab[i] = 8'(v);
      p_tab[i] = 8'(255 - (i / 2));
      lut_we = 1; lut_waddr = 9'(i); lut_wdata = {s_tab[i], p_tab[i]};
      @(posedge clk); #1;
    end
    lut_we = 0;
    detect(25'd0, 5'd0);
    detect(25'd200, 5'd0);
    detect('1, 5'd0);
    detect('1, 5'd17);
    for (int i = 0; i < 500; i++) detect(SOI_W'($urandom), 5'($urandom % 20));
    $display("saturated %0d clean %0d adversarial %0d", n_sat, n_clean, n_adv);
    checks += 3;
    if (n_sat == 0 || n_clean == 0 || n_adv == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
