// dpd_ref_pkg: reference model of the predistorter for the end-to-end
// testbenches, written independently of the RTL. Features come from a
// floating-point square root (exact I/A, Q/A, A, A^3, then rounded to the
// hardware formats); the delay taps, the phase rotation, both sparse layers
// (floor-truncated products, clamp to [-1,1)), ReLU and the conjugate
// rotation follow the arithmetic the design documents. step() takes one input
// sample and returns the expected Q2.27 output; the object also counts the
// mechanisms a sample exercised.
package dpd_ref_pkg;
  import sparsedpd_pkg::*;

  class dpd_ref;
    int hist_i [$], hist_q [$], hist_a [$], hist_a3 [$];   // newest first
    int n_zero = 0, n_small = 0, n_shift = 0, n_relu = 0, n_hclamp = 0, n_oclamp = 0;

    static function int clampi(input real v, input int lo, input int hi);
      if (v > real'(hi)) return hi;
      if (v < real'(lo)) return lo;
      return int'(v);
    endfunction

    static function int rq13(input real v);   // Q2.27 -> Q1.13, round half up
      return clampi($floor(v / 16384.0 + 0.5), -8192, 8191);
    endfunction

    static function int neuron(input int x [], input act_t w [], input act_t b,
                               output bit clamped);
      real acc;
      acc = real'(b);
      for (int i = 0; i < x.size(); i++) acc += $floor(real'(x[i]) * real'(w[i]) / 8192.0);
      clamped = (acc > 8191.0) || (acc < -8192.0);
      return clampi(acc, -8192, 8191);
    endfunction

    function void step(input int si, input int sq, output longint yi, output longint yq);
      localparam int unsigned N = MEM_DEPTH;
      real z, a;
      int ia, qa, amp, amp3;
      int xfc [], xout [];
      int yo [N_OUT];
      act_t wr [];
      bit cl;
      z = real'(si) * si + real'(sq) * sq;
      a = $sqrt(z);
      if (z == 0) n_zero++; else if (z < 16384.0) n_small++; else n_shift++;
      ia   = (z == 0) ? 0 : clampi($floor(real'(si) / a * 16384.0 + 0.5), -16384, 16383);
      qa   = (z == 0) ? 0 : clampi($floor(real'(sq) / a * 16384.0 + 0.5), -16384, 16383);
      amp  = clampi($floor(a + 0.5), 0, 8191);
      amp3 = clampi($floor(a * a * a / 67108864.0 + 0.5), 0, 8191);
      xfc = new[N_FC_IN];
      for (int j = 0; j < N; j++) begin
        int ki, kq;
        ki = (j < hist_i.size()) ? hist_i[j] : 0;
        kq = (j < hist_q.size()) ? hist_q[j] : 0;
        xfc[j]     = rq13(real'(ki) * ia + real'(kq) * qa);
        xfc[N + j] = rq13(real'(kq) * ia - real'(ki) * qa);
      end
      for (int j = 0; j <= N; j++) begin
        xfc[2*N + j]     = (j == 0) ? amp  : (j - 1 < hist_a.size())  ? hist_a[j-1]  : 0;
        xfc[3*N + 1 + j] = (j == 0) ? amp3 : (j - 1 < hist_a3.size()) ? hist_a3[j-1] : 0;
      end
      xout = new[N_OUT_IN];
      for (int j = 0; j < N_FC_IN; j++) xout[j] = xfc[j];
      wr = new[N_FC_IN];
      for (int o = 0; o < HIDDEN; o++) begin
        int h;
        for (int i = 0; i < N_FC_IN; i++) wr[i] = W_FC_DEFAULT[o][i];
        h = neuron(xfc, wr, B_FC_DEFAULT[o], cl);
        if (cl) n_hclamp++;
        if (h < 0) n_relu++;
        xout[N_FC_IN + o] = (h < 0) ? 0 : h;
      end
      wr = new[N_OUT_IN];
      for (int o = 0; o < N_OUT; o++) begin
        for (int i = 0; i < N_OUT_IN; i++) wr[i] = W_OUT_DEFAULT[o][i];
        yo[o] = neuron(xout, wr, B_OUT_DEFAULT[o], cl);
        if (cl) n_oclamp++;
      end
      yi = longint'(yo[0]) * ia - longint'(yo[1]) * qa;
      yq = longint'(yo[0]) * qa + longint'(yo[1]) * ia;
      hist_i.push_front(si); hist_q.push_front(sq);
      hist_a.push_front(amp); hist_a3.push_front(amp3);
      if (hist_i.size() > N) begin
        void'(hist_i.pop_back()); void'(hist_q.pop_back());
        void'(hist_a.pop_back()); void'(hist_a3.pop_back());
      end
    endfunction
  endclass

endpackage
