// opcode_generator: derives all half-gate opcodes of the standard model.
//
// In the standard model both gate inputs lie in one partition and all gates
// of an operation point the same way. With a tight section division (no
// section can be split) the first and last partition of a section hold the
// inputs and the output, and the partitions between them are idle. So each
// partition's opcode follows from the transistors on its two sides, its
// enable and the global direction:
//   dir = 0 (inputs left of outputs): input bits = en & left side isolating,
//                                     output bit = en & right side isolating
//   dir = 1 (outputs left of inputs): the two sides swap.
// Per partition this is two 2:1 multiplexers (choose left/right side for the
// input and for the output bits) and the enable gating.
//
// tsel[j] = 1 means the transistor between partitions j and j+1 conducts; a
// side "isolates" when its transistor select is 0. The array edges count as
// isolating. Taking select 1 as conducting follows the example figure of the
// paper (the transistor inside a merged section carries a 1); its text
// describes the same rule in terms of the transistor being "selected".
//
// Interface: tsel[K-1], en[K], dir in; op[K] (opcode_t) out.
// Timing: purely combinational.
module opcode_generator
  import pim_pkg::*;
#(
  parameter int K = 32
) (
  input  logic [K-2:0] tsel,
  input  logic [K-1:0] en,
  input  logic         dir,
  output opcode_t      op [K]
);

  for (genvar p = 0; p < K; p++) begin : g_part
    logic iso_left, iso_right, in_bit, out_bit;
    if (p == 0) begin : g_left_edge
      assign iso_left = 1'b1;
    end else begin : g_left
      assign iso_left = ~tsel[p-1];
    end
    if (p == K - 1) begin : g_right_edge
      assign iso_right = 1'b1;
    end else begin : g_right
      assign iso_right = ~tsel[p];
    end
    // the two 2:1 multiplexers of this partition
    assign in_bit  = (dir == DIR_IN_LEFT) ? iso_left  : iso_right;
    assign out_bit = (dir == DIR_IN_LEFT) ? iso_right : iso_left;
    assign op[p] = '{in_a: en[p] & in_bit, in_b: en[p] & in_bit, out: en[p] & out_bit};
  end

endmodule
