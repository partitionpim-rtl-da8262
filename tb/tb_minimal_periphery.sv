// tb_minimal_periphery: random minimal-model messages at N=1024, K=32.
// From the range, period, distance and direction fields the testbench lists
// the gates (input partition, output partition) and expects V_IN on the
// shared InA/InB bitlines of each input partition, V_OUT on the shared Out
// bitline of each output partition, conducting transistors inside every gate
// span and isolating ones at both span ends. Also checks the 36-bit width.
module tb_minimal_periphery
  import pim_pkg::*;
;
  localparam int N = 1024, K = 32, W = N / K, IW = $clog2(W), LK = $clog2(K);
  localparam int MW = minimal_bits(N, K);
  logic [MW-1:0] msg;
  logic [N-1:0]  vin, vout;
  logic [K-2:0]  tsel;
  int checks = 0, failures = 0;

  minimal_periphery #(.N(N), .K(K)) dut (.msg(msg), .vin(vin), .vout(vout), .tsel(tsel));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    checks++;
    if (MW != 36) begin
      failures++;
      $display("FAIL message width %0d, expected 36", MW);
    end
    for (int t = 0; t < 500; t++) begin
      logic [N-1:0] ev, eo;
      int exp_t [K-1];
      int s, e, per, d, ia, ib, io;
      logic dir;
      ia = $urandom_range(W - 1); ib = $urandom_range(W - 1); io = $urandom_range(W - 1);
      d   = (t % 5 == 0) ? 0 : $urandom_range(K - 2);
      per = d + 1 + $urandom_range(K - 1 - d);
      dir = $urandom_range(1);
      s   = $urandom_range(K - 1);
      e   = s + $urandom_range(K - 1 - s);
      if (!dir && s + d > K - 1) s = K - 1 - d;
      if (!dir && e + d > K - 1) e = K - 1 - d;
      if (dir && s < d) s = d;
      if (e < s) e = s;
      ev = '0; eo = '0;
      for (int j = 0; j < K - 1; j++) exp_t[j] = -1;
      for (int p = s; p <= e; p += per) begin
        int o, lo, hi;
        o = dir ? p - d : p + d;
        ev[p*W + ia] = 1'b1; ev[p*W + ib] = 1'b1;
        eo[o*W + io] = 1'b1;
        lo = (p < o) ? p : o;
        hi = (p < o) ? o : p;
        for (int j = lo; j < hi; j++) exp_t[j] = 1;
        if (lo > 0) exp_t[lo-1] = 0;
        if (hi < K - 1) exp_t[hi] = 0;
      end
      msg = {dir, LK'(d), LK'(per - 1), LK'(e), LK'(s), IW'(io), IW'(ib), IW'(ia)};
      #1;
      checks++;
      if (vin !== ev || vout !== eo) begin
        failures++;
        $display("FAIL t=%0d vin/vout mismatch (%0d %0d)", t, vin !== ev, vout !== eo);
      end
      for (int j = 0; j < K - 1; j++)
        if (exp_t[j] >= 0) begin
          checks++;
          if (tsel[j] !== exp_t[j][0]) begin
            failures++;
            $display("FAIL t=%0d tsel[%0d]=%b exp %0d", t, j, tsel[j], exp_t[j]);
          end
        end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
