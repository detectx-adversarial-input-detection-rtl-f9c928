// tb_lut_sram: self-checking test of the 512 x 16-bit LUT storage. Fills it with
// random words, reads every address back (checking the one-cycle read latency
// and that rdata holds while re is low), overwrites some entries and rereads.
module tb_lut_sram;
  localparam int unsigned DEPTH = 512;
  localparam int unsigned WIDTH = 16;

  logic clk = 1'b0;
  logic we, re;
  logic [8:0] waddr, raddr;
  logic [WIDTH-1:0] wdata, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  lut_sram dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic rd(input int a);
    re = 1; raddr = 9'(a);
    @(posedge clk); #1;
    re = 0; raddr = 9'($urandom);
    checks++;
    if (rdata !== model[a]) begin
      failures++;
      $display("addr %0d: read %h expected %h", a, rdata, model[a]);
    end
    @(posedge clk); #1;        // re low: data holds
    checks++;
    if (rdata !== model[a]) begin failures++; $display("rdata did not hold"); end
  endtask

  initial begin
    we = 0; re = 0; waddr = '0; raddr = '0; wdata = '0;
    @(posedge clk); #1;
    for (int a = 0; a < DEPTH; a++) begin
      we = 1; waddr = 9'(a); wdata = WIDTH'($urandom); model[a] = wdata;
      @(posedge clk); #1;
    end
    we = 0;
    for (int a = 0; a < DEPTH; a++) rd(a);
    for (int i = 0; i < 200; i++) begin
      int a;
      a = $urandom % DEPTH;
      we = 1; waddr = 9'(a); wdata = WIDTH'($urandom); model[a] = wdata;
      @(posedge clk); #1;
      we = 0;
      rd($urandom % DEPTH);
      rd(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
