// half_gate_decoder: column decoder of one partition using half-gates.
//
// Every partition owns one column decoder made of three decoder units (InA,
// InB, Out). Its 3-bit opcode enables each unit separately, so a partition may
// apply only the input voltages of a gate, only its output voltage, both, or
// nothing. A gate whose inputs sit in one partition and whose output sits in
// another partition of the same section is then formed by two "half-gates"
// that together apply the full set of voltages. Opcode bits, following the
// paper's opcode table: bit 2 enables InA, bit 1 enables InB, bit 0 enables
// Out ("000" applies nothing, "111" is a complete gate).
//
// The one-hot selects of the three indices come from cmos_decoder instances,
// either private to this partition (unlimited model) or shared by all
// partitions (standard and minimal models). The outputs are the digital
// selects of the per-bitline analog multiplexers: vin[i] connects V_IN to
// bitline i, vout[i] connects V_OUT. Representing the multiplexer by these
// two selects is this design's choice.
//
// Timing: purely combinational.
module half_gate_decoder
  import pim_pkg::*;
#(
  parameter int W = 32
) (
  input  opcode_t        op,
  input  logic [W-1:0]   sel_a,
  input  logic [W-1:0]   sel_b,
  input  logic [W-1:0]   sel_out,
  output logic [W-1:0]   vin,
  output logic [W-1:0]   vout
);

  always_comb begin
    vin  = ({W{op.in_a}} & sel_a) | ({W{op.in_b}} & sel_b);
    vout = {W{op.out}} & sel_out;
  end

endmodule
