// minimal_pattern_generator: opcodes and transistor selects of the minimal
// model, generated from a handful of pattern fields.
//
// In the minimal model all concurrent gates share one partition distance and
// repeat with a period T, so an operation is fully described by a range
// (p_start, p_end, T), a distance and a direction:
//   * input partitions  = range_generator mask (both input bits of the opcode)
//   * output partitions = input mask shifted by the distance, towards higher
//     partition indices when dir = 0 (inputs left of outputs) and towards
//     lower ones when dir = 1; bits shifted past the array edge are dropped
//   * transistor j (between partitions j and j+1) isolates when, for dir = 0,
//     partition j holds an output or partition j+1 holds an input; for
//     dir = 1 when partition j holds an input or partition j+1 an output.
//     Otherwise it conducts (tsel = 1).
// This follows the paper's description; reading "to its left / right" as
// the immediately adjacent partition is this design's interpretation.
//
// Interface: p_start, p_end, t_code, p_dist [$clog2(K)], dir in;
// op[K] (opcode_t) and tsel[K-1] out. Timing: purely combinational.
module minimal_pattern_generator
  import pim_pkg::*;
#(
  parameter int K = 32
) (
  input  logic [$clog2(K)-1:0] p_start,
  input  logic [$clog2(K)-1:0] p_end,
  input  logic [$clog2(K)-1:0] t_code,
  input  logic [$clog2(K)-1:0] p_dist,
  input  logic                 dir,
  output opcode_t              op [K],
  output logic [K-2:0]         tsel
);

  logic [K-1:0] in_mask, out_mask;

  range_generator #(.K(K)) u_range (
    .p_start(p_start), .p_end(p_end), .t_code(t_code), .mask(in_mask)
  );

  // partition-distance shifter
  assign out_mask = (dir == DIR_IN_LEFT) ? (in_mask << p_dist) : (in_mask >> p_dist);

  for (genvar p = 0; p < K; p++) begin : g_op
    assign op[p] = '{in_a: in_mask[p], in_b: in_mask[p], out: out_mask[p]};
  end

  for (genvar j = 0; j < K - 1; j++) begin : g_t
    assign tsel[j] = (dir == DIR_IN_LEFT) ? ~(out_mask[j] | in_mask[j+1])
                                          : ~(in_mask[j]  | out_mask[j+1]);
  end

endmodule
