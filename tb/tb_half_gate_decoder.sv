// tb_half_gate_decoder: checks all eight half-gate opcodes of the opcode
// table against random one-hot selects, plus the four-partition example
// (indices 0, 1, 3; opcodes 111, 110, 001, 111).
module tb_half_gate_decoder
  import pim_pkg::*;
;
  localparam int W = 32;
  opcode_t      op;
  logic [W-1:0] sa, sb, so, vin, vout;
  int checks = 0, failures = 0;

  half_gate_decoder #(.W(W)) dut (
    .op(op), .sel_a(sa), .sel_b(sb), .sel_out(so), .vin(vin), .vout(vout));

  task automatic check(input logic [W-1:0] exp_vin, input logic [W-1:0] exp_vout);
    #1;
    checks++;
    if (vin !== exp_vin || vout !== exp_vout) begin
      failures++;
      $display("FAIL op=%b vin=%h exp=%h vout=%h exp=%h", op, vin, exp_vin, vout, exp_vout);
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [2:0] ex_op [4];
    for (int t = 0; t < 50; t++) begin
      for (int o = 0; o < 8; o++) begin
        logic [W-1:0] ev, eo;
        int a, b, c;
        a = $urandom_range(W - 1); b = $urandom_range(W - 1); c = $urandom_range(W - 1);
        sa = '0; sb = '0; so = '0;
        sa[a] = 1'b1; sb[b] = 1'b1; so[c] = 1'b1;
        op = opcode_t'(o[2:0]);
        ev = '0; eo = '0;
        if (o[2]) ev[a] = 1'b1;
        if (o[1]) ev[b] = 1'b1;
        if (o[0]) eo[c] = 1'b1;
        check(ev, eo);
      end
    end
    // example: InA=0, InB=1, Out=3 in every partition
    ex_op = '{3'b111, 3'b110, 3'b001, 3'b111};
    sa = W'(1); sb = W'(2); so = W'(8);
    for (int p = 0; p < 4; p++) begin
      op = opcode_t'(ex_op[p]);
      check((ex_op[p][2] ? W'(3) : W'(0)), (ex_op[p][0] ? W'(8) : W'(0)));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
