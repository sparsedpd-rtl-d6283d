// tb_csa_tree: for tree sizes 1, 2, 3, 5, 13 and 23 inputs, applies random
// words and checks that sum + carry equals the modular sum of the inputs.
module tb_csa_tree;
  localparam int unsigned W = 15;
  int checks = 0, failures = 0;

  logic [W-1:0] in1 [1], in2 [2], in3 [3], in5 [5], in13 [13], in23 [23];
  logic [W-1:0] s1, c1, s2, c2, s3, c3, s5, c5, s13, c13, s23, c23;

  csa_tree #(.N(1),  .W(W)) t1  (.in(in1),  .sum(s1),  .carry(c1));
  csa_tree #(.N(2),  .W(W)) t2  (.in(in2),  .sum(s2),  .carry(c2));
  csa_tree #(.N(3),  .W(W)) t3  (.in(in3),  .sum(s3),  .carry(c3));
  csa_tree #(.N(5),  .W(W)) t5  (.in(in5),  .sum(s5),  .carry(c5));
  csa_tree #(.N(13), .W(W)) t13 (.in(in13), .sum(s13), .carry(c13));
  csa_tree #(.N(23), .W(W)) t23 (.in(in23), .sum(s23), .carry(c23));

  task automatic chk(input string n, input logic [W-1:0] s, input logic [W-1:0] c,
                     input int unsigned ref_sum);
    checks++;
    if (W'(s + c) != W'(ref_sum)) begin
      failures++;
      if (failures < 10) $display("FAIL %s got %0d exp %0d", n, W'(s + c), W'(ref_sum));
    end
  endtask

  initial begin
    for (int it = 0; it < 2000; it++) begin
      int unsigned r1, r2, r3, r5, r13, r23;
      r1 = 0; r2 = 0; r3 = 0; r5 = 0; r13 = 0; r23 = 0;
      foreach (in1[i])  begin in1[i]  = W'($urandom); r1  += in1[i];  end
      foreach (in2[i])  begin in2[i]  = W'($urandom); r2  += in2[i];  end
      foreach (in3[i])  begin in3[i]  = W'($urandom); r3  += in3[i];  end
      foreach (in5[i])  begin in5[i]  = W'($urandom); r5  += in5[i];  end
      foreach (in13[i]) begin in13[i] = W'($urandom); r13 += in13[i]; end
      foreach (in23[i]) begin in23[i] = (it % 2) ? W'($urandom) : '1; r23 += in23[i]; end
      #1;
      chk("N=1", s1, c1, r1);   chk("N=2", s2, c2, r2);   chk("N=3", s3, c3, r3);
      chk("N=5", s5, c5, r5);   chk("N=13", s13, c13, r13); chk("N=23", s23, c23, r23);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
