// tb_fc_layer: drives the hidden FC layer (sparse_fc with the default hidden-layer weights) with
// random Q1.13 vectors, including full-scale ones that push neurons past
// [-1, 1), and compares every output with a floating-point reference of
// clamp(sum_i floor(x_i*w_i / 2^13) + b) computed from the weight table.
// Also checks the FC_LAT = 2 clock latency via valid_o and the clamp flags,
// and that the clamp was exercised.
module tb_fc_layer;
  import sparsedpd_pkg::*;
  localparam int unsigned NI = N_FC_IN, NO = HIDDEN;
  localparam act_t WT [NO][NI] = W_FC_DEFAULT;
  localparam act_t BT [NO] = B_FC_DEFAULT;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, valid_i, valid_o;
  act_t x [NI];
  act_t y [NO];
  logic [NO-1:0] clamp_o;
  int checks = 0, failures = 0, clamps = 0, cyc = 0;
  typedef struct { int v [NI]; int t; } vec_t;
  vec_t sent [$];

  sparse_fc #(.NI(NI), .NO(NO), .W(WT), .B(BT)) dut (.*);

  always @(posedge clk) cyc <= cyc + 1;

  always @(posedge clk) begin
    if (rst_n && valid_o) begin
      vec_t s;
      s = sent.pop_front();
      checks++;
      if (cyc - s.t != FC_LAT) begin failures++; $display("FAIL latency %0d", cyc - s.t); end
      for (int o = 0; o < NO; o++) begin
        real acc;
        int exp_y;
        logic exp_c;
        acc = real'(BT[o]);
        for (int i = 0; i < NI; i++) acc += $floor(real'(s.v[i]) * real'(WT[o][i]) / 8192.0);
        exp_c = (acc > 8191.0) || (acc < -8192.0);
        exp_y = (acc > 8191.0) ? 8191 : (acc < -8192.0) ? -8192 : int'(acc);
        checks += 2;
        if (int'(y[o]) != exp_y) begin
          failures++;
          if (failures < 20) $display("FAIL neuron %0d got %0d exp %0d", o, y[o], exp_y);
        end
        if (clamp_o[o] != exp_c) begin failures++; $display("FAIL clamp flag neuron %0d", o); end
        if (clamp_o[o]) clamps++;
      end
    end
  end

  task automatic send(input int lim);
    vec_t s;
    for (int i = 0; i < NI; i++) begin
      s.v[i] = $urandom_range(2*lim) - lim;
      if (lim == 8192) s.v[i] = ($urandom_range(1)) ? 8191 : -8192;
      x[i] = act_t'(s.v[i]);
    end
    s.t = cyc;
    sent.push_back(s);
    valid_i = 1;
    @(posedge clk); #1;
    valid_i = 0;
  endtask

  initial begin
    rst_n = 0; valid_i = 0;
    for (int i = 0; i < NI; i++) x[i] = '0;
    repeat (3) @(posedge clk); #1;
    rst_n = 1;
    @(posedge clk); #1;
    for (int n = 0; n < 2000; n++) begin
      send((n % 5 == 0) ? 8192 : (n % 5 == 1) ? 100 : 8191);
      if (n % 97 == 0) begin @(posedge clk); #1; end
    end
    repeat (FC_LAT + 2) @(posedge clk);
    checks++;
    if (sent.size() != 0) begin failures++; $display("FAIL %0d vectors lost", sent.size()); end
    checks++;
    if (clamps == 0) begin failures++; $display("FAIL clamp never exercised"); end
    $display("clamped outputs: %0d", clamps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
