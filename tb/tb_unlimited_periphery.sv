// tb_unlimited_periphery: random unlimited-model messages at N=1024, K=32.
// Every partition gets its own random indices and opcode; the expected
// bitline selects are set per partition from the opcode table (bit 2 InA,
// bit 1 InB, bit 0 Out). Also checks the 607-bit message width.
module tb_unlimited_periphery
  import pim_pkg::*;
;
  localparam int N = 1024, K = 32, W = N / K, IW = $clog2(W);
  localparam int MW = unlimited_bits(N, K);
  logic [MW-1:0] msg;
  logic [N-1:0]  vin, vout;
  logic [K-2:0]  tsel;
  int checks = 0, failures = 0;

  unlimited_periphery #(.N(N), .K(K)) dut (.msg(msg), .vin(vin), .vout(vout), .tsel(tsel));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    checks++;
    if (MW != 607) begin
      failures++;
      $display("FAIL message width %0d, expected 607", MW);
    end
    for (int t = 0; t < 300; t++) begin
      logic [N-1:0] ev, eo;
      logic [K-2:0] ts;
      logic [3*K*IW-1:0] idx;
      logic [3*K-1:0] ops;
      ev = '0; eo = '0;
      ts = (K-1)'({$urandom, $urandom});
      for (int p = 0; p < K; p++) begin
        int a, b, o;
        logic [2:0] op;
        a = $urandom_range(W - 1); b = $urandom_range(W - 1); o = $urandom_range(W - 1);
        op = 3'($urandom);
        idx[(3*p+0)*IW +: IW] = IW'(a);
        idx[(3*p+1)*IW +: IW] = IW'(b);
        idx[(3*p+2)*IW +: IW] = IW'(o);
        ops[3*p +: 3] = op;
        if (op[2]) ev[p*W + a] = 1'b1;
        if (op[1]) ev[p*W + b] = 1'b1;
        if (op[0]) eo[p*W + o] = 1'b1;
      end
      msg = {ts, ops, idx};
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
