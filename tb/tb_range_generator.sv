// tb_range_generator: exhaustive over p_start and T, random p_end, at K=32.
// The expected mask is built by walking p = p_start, p_start+T, ... up to
// p_end, independently of the decoder/shifter structure of the block.
module tb_range_generator;
  localparam int K  = 32;
  localparam int LK = $clog2(K);
  logic [LK-1:0] p_start, p_end, t_code;
  logic [K-1:0]  mask;
  int checks = 0, failures = 0;

  range_generator #(.K(K)) dut (.p_start(p_start), .p_end(p_end), .t_code(t_code), .mask(mask));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int s = 0; s < K; s++) begin
      for (int t = 1; t <= K; t++) begin
        for (int r = 0; r < 4; r++) begin
          logic [K-1:0] exp_mask;
          int e;
          e = (r == 0) ? K - 1 : $urandom_range(K - 1);
          p_start = LK'(s); p_end = LK'(e); t_code = LK'(t - 1);
          exp_mask = '0;
          for (int p = s; p <= e; p += t) exp_mask[p] = 1'b1;
          #1;
          checks++;
          if (mask !== exp_mask) begin
            failures++;
            $display("FAIL s=%0d e=%0d T=%0d mask=%h exp=%h", s, e, t, mask, exp_mask);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
