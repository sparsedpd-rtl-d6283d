// tb_time_delay: feeds a numbered sample stream with random idle cycles into
// the delay line and checks that the K taps hold the previous N valid samples,
// the A/A^3 vectors the current and previous N ones, that idle cycles do not
// shift the line, and that reset clears it.
module tb_time_delay;
  import sparsedpd_pkg::*;
  localparam int unsigned N = MEM_DEPTH;
  logic clk = 0;
  always #5 clk = ~clk;
  logic rst_n, valid_i;
  act_t i_i, q_i, amp_i, amp3_i;
  act_t k_i [N], k_q [N], amp_v [N+1], amp3_v [N+1];
  int checks = 0, failures = 0;
  int hist [$];   // sample numbers already shifted in, newest first

  time_delay dut (.*);

  function automatic act_t fi(input int n);  return act_t'(n * 3 + 1);    endfunction
  function automatic act_t fq(input int n);  return act_t'(-n * 5 - 2);   endfunction
  function automatic act_t fa(input int n);  return act_t'(n * 7 + 3);    endfunction
  function automatic act_t fa3(input int n); return act_t'(n * 11 + 4);   endfunction

  task automatic expect_taps(input int cur);
    for (int j = 0; j < N; j++) begin
      int n;
      n = (j < hist.size()) ? hist[j] : -1;
      checks += 4;
      if (n < 0) begin
        if (k_i[j] != 0 || k_q[j] != 0 || amp_v[j+1] != 0 || amp3_v[j+1] != 0) begin
          failures++; $display("FAIL tap %0d not cleared", j);
        end
      end else begin
        if (k_i[j] != fi(n))       begin failures++; $display("FAIL k_i[%0d]", j); end
        if (k_q[j] != fq(n))       begin failures++; $display("FAIL k_q[%0d]", j); end
        if (amp_v[j+1] != fa(n))   begin failures++; $display("FAIL amp_v[%0d]", j+1); end
        if (amp3_v[j+1] != fa3(n)) begin failures++; $display("FAIL amp3_v[%0d]", j+1); end
      end
    end
    checks += 2;
    if (amp_v[0] != fa(cur) || amp3_v[0] != fa3(cur)) begin
      failures++; $display("FAIL current tap");
    end
  endtask

  initial begin
    rst_n = 0; valid_i = 0; i_i = 0; q_i = 0; amp_i = 0; amp3_i = 0;
    repeat (2) @(posedge clk); #1;
    rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      if (n == 150) begin
        rst_n = 0; #1; rst_n = 1; hist.delete();
      end
      i_i = fi(n); q_i = fq(n); amp_i = fa(n); amp3_i = fa3(n);
      valid_i = 1;
      #1; expect_taps(n);
      @(posedge clk); #1;
      hist.push_front(n);
      valid_i = 0;
      repeat ($urandom_range(2)) begin
        i_i = fi(999); amp_i = fa(999); amp3_i = fa3(999);
        @(posedge clk); #1;
        expect_taps(999);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
