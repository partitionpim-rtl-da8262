// tb_opcode_generator: builds random tight section divisions of K=32
// partitions, marks each section as holding a gate or not, and checks that
// the generated opcodes put the inputs (InA and InB) in the first partition
// of every used section and the output in its last one (mirrored for
// dir = 1), with idle middle partitions and idle unused sections. Also checks
// the four-partition example (sections {0},{1,2},{3}; opcodes 111, 110, 001,
// 111 for "inputs left of outputs").
module tb_opcode_generator
  import pim_pkg::*;
;
  localparam int K = 32;
  logic [K-2:0] tsel;
  logic [K-1:0] en;
  logic         dir;
  opcode_t      op [K];
  int checks = 0, failures = 0;

  opcode_generator #(.K(K)) dut (.tsel(tsel), .en(en), .dir(dir), .op(op));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      logic [2:0] exp_op [K];
      int p;
      dir = (t % 2 == 1);
      tsel = '0; en = '0;
      for (int q = 0; q < K; q++) exp_op[q] = 3'b000;
      p = 0;
      while (p < K) begin
        int len, first, last, in_p, out_p;
        len = (t < 4) ? ((t < 2) ? 1 : K) : 1 + $urandom_range(5);
        if (p + len > K) len = K - p;
        first = p; last = p + len - 1;
        for (int j = first; j < last; j++) tsel[j] = 1'b1;
        if ($urandom_range(3) != 0) begin   // this section holds a gate
          in_p  = dir ? last : first;
          out_p = dir ? first : last;
          en[first] = 1'b1; en[last] = 1'b1;
          for (int j = first + 1; j < last; j++) en[j] = $urandom_range(1);
          exp_op[in_p][2:1] = 2'b11;
          exp_op[out_p][0]  = 1'b1;
        end else begin
          for (int j = first; j <= last; j++) en[j] = 1'b0;
        end
        p += len;
      end
      #1;
      for (int q = 0; q < K; q++) begin
        checks++;
        if (op[q] !== exp_op[q]) begin
          failures++;
          $display("FAIL t=%0d p=%0d op=%b exp=%b", t, q, op[q], exp_op[q]);
        end
      end
    end
    // four-partition example mapped onto partitions 0..3, rest idle
    dir = DIR_IN_LEFT; en = '0; en[3:0] = 4'b1111; tsel = '0; tsel[1] = 1'b1;
    #1;
    begin
      logic [2:0] ex [4];
      ex = '{3'b111, 3'b110, 3'b001, 3'b111};
      for (int q = 0; q < 4; q++) begin
        checks++;
        if (op[q] !== ex[q]) begin
          failures++;
          $display("FAIL example p=%0d op=%b exp=%b", q, op[q], ex[q]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
