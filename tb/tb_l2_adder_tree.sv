// tb_l2_adder_tree: self-checking test of the L2 adder tree. Applies random and
// extreme register values to a 16-input tree (the default) and a 5-input tree
// (padding of a non-power-of-two count) and compares with a sum computed here.
module tb_l2_adder_tree;
  localparam int unsigned IN_W = 21;

  logic [15:0][IN_W-1:0] in16;
  logic [IN_W+3:0]       sum16;
  logic [4:0][IN_W-1:0]  in5;
  logic [IN_W+2:0]       sum5;
  int checks = 0, failures = 0;

  l2_adder_tree #(.N(16), .IN_W(IN_W)) dut16 (.in_vals(in16), .sum(sum16));
  l2_adder_tree #(.N(5),  .IN_W(IN_W)) dut5  (.in_vals(in5),  .sum(sum5));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    longint e16, e5;
    for (int t = 0; t < 300; t++) begin
      e16 = 0; e5 = 0;
      for (int i = 0; i < 16; i++) begin
        case (t)
          0: in16[i] = '1;                 // all maximal
          1: in16[i] = (i == 7) ? IN_W'(1) : '0;
          default: in16[i] = IN_W'($urandom);
        endcase
        e16 += longint'(in16[i]);
      end
      for (int i = 0; i < 5; i++) begin
        in5[i] = (t == 0) ? '1 : IN_W'($urandom);
        e5 += longint'(in5[i]);
      end
      #1;
      checks += 2;
      if (longint'(sum16) != e16) begin
        failures++;
        $display("N=16: sum %0d expected %0d", sum16, e16);
      end
      if (longint'(sum5) != e5) begin
        failures++;
        $display("N=5: sum %0d expected %0d", sum5, e5);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
