// tb_relu: applies random and corner Q1.13 vectors to the ReLU and checks
// y = x for x >= 0 and y = 0 for x < 0.
module tb_relu;
  import sparsedpd_pkg::*;
  int checks = 0, failures = 0;
  act_t x [HIDDEN], y [HIDDEN];

  relu dut (.x(x), .y(y));

  initial begin
    for (int it = 0; it < 500; it++) begin
      for (int j = 0; j < HIDDEN; j++) begin
        int v;
        v = $urandom_range(16383) - 8192;
        if (it == 0) v = (j % 4 == 0) ? -8192 : (j % 4 == 1) ? 8191 : (j % 4 == 2) ? 0 : -1;
        x[j] = act_t'(v);
      end
      #1;
      for (int j = 0; j < HIDDEN; j++) begin
        int e;
        e = (int'(x[j]) < 0) ? 0 : int'(x[j]);
        checks++;
        if (int'(y[j]) != e) begin
          failures++;
          if (failures < 10) $display("FAIL x=%0d y=%0d", x[j], y[j]);
        end
      end
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
