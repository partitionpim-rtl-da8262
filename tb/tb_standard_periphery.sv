// tb_standard_periphery: random standard-model messages at N=1024, K=32.
// Each message is built from intent: a random tight section division, random
// shared indices, a direction and a random choice of which sections hold a
// gate. Expected: V_IN on bitlines InA/InB of the input partition of every
// used section, V_OUT on bitline Out of its output partition, nothing
// elsewhere, and the transistor selects passed through.
module tb_standard_periphery
  import pim_pkg::*;
;
  localparam int N = 1024, K = 32, W = N / K, IW = $clog2(W);
  localparam int MW = standard_bits(N, K);
  logic [MW-1:0] msg;
  logic [N-1:0]  vin, vout;
  logic [K-2:0]  tsel;
  int checks = 0, failures = 0;

  standard_periphery #(.N(N), .K(K)) dut (.msg(msg), .vin(vin), .vout(vout), .tsel(tsel));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    if (MW != 79) begin
      failures++;
      $display("FAIL message width %0d, expected 79", MW);
    end
    checks++;
    for (int t = 0; t < 300; t++) begin
      logic [N-1:0] ev, eo;
      logic [K-2:0] ts;
      logic [K-1:0] en;
      logic dir;
      int ia, ib, io, p;
      ia = $urandom_range(W - 1); ib = $urandom_range(W - 1); io = $urandom_range(W - 1);
      dir = t[0];
      ts = '0; en = '0; ev = '0; eo = '0;
      p = 0;
      while (p < K) begin
        int len, first, last, in_p, out_p;
        len = 1 + $urandom_range((t % 3 == 0) ? K - 1 : 3);
        if (p + len > K) len = K - p;
        first = p; last = p + len - 1;
        for (int j = first; j < last; j++) ts[j] = 1'b1;
        if ($urandom_range(2) != 0) begin
          in_p  = dir ? last : first;
          out_p = dir ? first : last;
          en[first] = 1'b1; en[last] = 1'b1;
          ev[in_p*W + ia] = 1'b1; ev[in_p*W + ib] = 1'b1;
          eo[out_p*W + io] = 1'b1;
        end
        p += len;
      end
      msg = {dir, ts, en, IW'(io), IW'(ib), IW'(ia)};
      #1;
      checks++;
      if (vin !== ev || vout !== eo || tsel !== ts) begin
        failures++;
        $display("FAIL t=%0d vin/vout/tsel mismatch (%0d %0d %0d)", t,
                 vin !== ev, vout !== eo, tsel !== ts);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
