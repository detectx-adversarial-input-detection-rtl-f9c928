// tb_sram_rng: checks the RNG model: a sample is valid exactly one cycle after
// each request and not otherwise, and the samples look uniform (mean near 127.5,
// every quarter of the range hit, consecutive samples not all equal).
module tb_sram_rng;
  logic clk = 1'b0;
  logic rst_n, req, valid;
  logic [7:0] data;
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  sram_rng dut (.*);

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint sum = 0;
    int quarter [4] = '{0, 0, 0, 0};
    int same = 0;
    logic [7:0] prev = '0;
    rst_n = 0; req = 0;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int i = 0; i < 4000; i++) begin
      bit r;
      r = ($urandom % 2) == 1;
      req = r;
      @(posedge clk); #1;
      req = 0;
      checks++;
      if (valid !== r) begin failures++; $display("valid %0b after req %0b", valid, r); end
      if (r) begin
        sum += data;
        quarter[data[7:6]]++;
        if (data == prev) same++;
        prev = data;
      end
    end
    checks += 6;
    begin
      int n;
      real mean;
      n = quarter[0] + quarter[1] + quarter[2] + quarter[3];
      mean = real'(sum) / n;
      $display("%0d samples, mean %f", n, mean);
      if (mean < 115.0 || mean > 140.0) begin failures++; $display("mean %f", mean); end
      for (int q = 0; q < 4; q++) if (quarter[q] < n / 8) begin failures++; $display("quarter %0d: %0d", q, quarter[q]); end
      if (same > n / 20) begin failures++; $display("repeats %0d", same); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
