// tb_minimal_pattern_generator: random periodic operations on K=32
// partitions (period T greater than the distance, so gates do not overlap).
// For every gate the expected picture is built from its two partitions: the
// input partition gets both input bits, the output partition the output bit,
// transistors strictly inside a gate's span must conduct and the transistors
// at the two ends of a span must isolate. Transistors outside every span are
// not checked (they join idle partitions only).
module tb_minimal_pattern_generator
  import pim_pkg::*;
;
  localparam int K  = 32;
  localparam int LK = $clog2(K);
  logic [LK-1:0] p_start, p_end, t_code, p_dist;
  logic          dir;
  opcode_t       op [K];
  logic [K-2:0]  tsel;
  int checks = 0, failures = 0;

  minimal_pattern_generator #(.K(K)) dut (
    .p_start(p_start), .p_end(p_end), .t_code(t_code), .p_dist(p_dist), .dir(dir),
    .op(op), .tsel(tsel));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 2000; t++) begin
      logic [2:0] exp_op [K];
      int exp_t [K-1];     // -1 don't care, 0 isolate, 1 conduct
      int s, e, per, d;
      d   = $urandom_range(K - 2);
      if (t % 7 == 0) d = 0;
      per = d + 1 + $urandom_range(K - 1 - d);
      dir = $urandom_range(1);
      s   = $urandom_range(K - 1);
      e   = s + $urandom_range(K - 1 - s);
      // keep every output inside the array
      if (!dir && s + d > K - 1) s = K - 1 - d;
      if (!dir && e + d > K - 1) e = K - 1 - d;
      if (dir && s < d) s = d;
      if (e < s) e = s;
      p_start = LK'(s); p_end = LK'(e); t_code = LK'(per - 1); p_dist = LK'(d);
      for (int q = 0; q < K; q++) exp_op[q] = 3'b000;
      for (int j = 0; j < K - 1; j++) exp_t[j] = -1;
      for (int p = s; p <= e; p += per) begin
        int o, lo, hi;
        o  = dir ? p - d : p + d;
        lo = (p < o) ? p : o;
        hi = (p < o) ? o : p;
        exp_op[p][2:1] = 2'b11;
        exp_op[o][0]   = 1'b1;
        for (int j = lo; j < hi; j++) exp_t[j] = 1;
        if (lo > 0) exp_t[lo-1] = 0;
        if (hi < K - 1) exp_t[hi] = 0;
      end
      #1;
      for (int q = 0; q < K; q++) begin
        checks++;
        if (op[q] !== exp_op[q]) begin
          failures++;
          $display("FAIL op s=%0d e=%0d T=%0d d=%0d dir=%0d p=%0d op=%b exp=%b",
                   s, e, per, d, dir, q, op[q], exp_op[q]);
        end
      end
      for (int j = 0; j < K - 1; j++) begin
        if (exp_t[j] >= 0) begin
          checks++;
          if (tsel[j] !== exp_t[j][0]) begin
            failures++;
            $display("FAIL tsel s=%0d e=%0d T=%0d d=%0d dir=%0d j=%0d t=%b exp=%0d",
                     s, e, per, d, dir, j, tsel[j], exp_t[j]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
