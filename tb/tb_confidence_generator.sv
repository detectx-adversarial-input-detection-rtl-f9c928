// tb_confidence_generator: checks the decision rule det_clean = (RNG sample <
// P_k) for random P_k and the edge cases P_k = 0 (never clean) and P_k = 255,
// that det_valid pulses two cycles after p_valid, that busy covers the wait,
// and that the clean rate tracks P_k / 256.
module tb_confidence_generator;
  logic clk = 1'b0;
  logic rst_n, p_valid, busy, det_valid, det_clean;
  logic [7:0] p_k, rng_sample;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  confidence_generator dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic decide(input logic [7:0] p, output bit clean);
    p_valid = 1; p_k = p;
    @(posedge clk); #1;
    p_valid = 0; p_k = 8'($urandom);
    checks += 2;
    if (!busy || det_valid) begin failures++; $display("busy/det_valid wrong one cycle after p_valid"); end
    @(posedge clk); #1;
    if (!det_valid) begin failures++; $display("det_valid missing two cycles after p_valid"); end
    checks++;
    if (det_clean !== (rng_sample < p)) begin
      failures++; $display("P %0d rng %0d: det_clean %0b", p, rng_sample, det_clean);
    end
    clean = det_clean;
    @(posedge clk); #1;
    checks++;
    if (det_valid || busy) begin failures++; $display("det_valid/busy held too long"); end
  endtask

  initial begin
    bit c;
    int n_clean;
    rst_n = 0; p_valid = 0; p_k = '0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 500; i++) decide(8'($urandom), c);
    n_clean = 0;
    for (int i = 0; i < 200; i++) begin decide(8'd0, c); n_clean += c; end
    checks++;
    if (n_clean != 0) begin failures++; $display("P=0 gave %0d clean", n_clean); end
    n_clean = 0;
    for (int i = 0; i < 1000; i++) begin decide(8'd192, c); n_clean += c; end
    checks++;
    if (n_clean < 700 || n_clean > 800) begin failures++; $display("P=192/256 gave %0d/1000 clean", n_clean); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
