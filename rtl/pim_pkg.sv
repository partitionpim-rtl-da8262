// pim_pkg: shared constants, types and message-width functions for the
// partitioned memristive crossbar periphery.
//
// A crossbar of N bitlines is split into K equal partitions of N/K bitlines by
// K-1 isolation transistors. An operation is one stateful NOR per section,
// executed in every row in one cycle. Three control models are provided:
//   UNLIMITED : per-partition indices and opcodes, explicit transistor selects
//               (3K*log2(N/K) + 3K + (K-1) bits, 607 for N=1024, K=32)
//   STANDARD  : shared indices, per-partition enables, transistor selects and
//               a direction bit (3*log2(N/K) + (2K-1) + 1 bits, 79)
//   MINIMAL   : shared indices, a periodic partition range, a partition
//               distance and a direction bit
//               (3*log2(N/K) + 3*log2(K) + log2(K) + 1 bits, 36)
// The message widths follow the paper's formulas. The order of the fields
// inside each message is this design's own choice (lowest field first):
//   unlimited: [indices of partition 0..K-1: InA,InB,Out][opcodes 0..K-1][tsel]
//   standard : [InA][InB][Out][en K][tsel K-1][dir]
//   minimal  : [InA][InB][Out][p_start][p_end][t_code][p_dist][dir]
// Conventions: partition 0 is the leftmost one; tsel[j] sits between
// partitions j and j+1 and is 1 when the transistor conducts (joins the two
// partitions into one section). dir = 0 means "inputs left of outputs".
package pim_pkg;

  typedef enum logic [1:0] {
    MODEL_UNLIMITED = 2'd0,
    MODEL_STANDARD  = 2'd1,
    MODEL_MINIMAL   = 2'd2
  } model_e;

  // Half-gate opcode of one partition (Table I order: InA, InB, Out).
  typedef struct packed {
    logic in_a;
    logic in_b;
    logic out;
  } opcode_t;

  localparam logic DIR_IN_LEFT  = 1'b0;  // inputs left of outputs

  function automatic int unlimited_bits(int n, int k);
    return 3 * k * $clog2(n / k) + 3 * k + (k - 1);
  endfunction

  function automatic int standard_bits(int n, int k);
    return 3 * $clog2(n / k) + (2 * k - 1) + 1;
  endfunction

  function automatic int minimal_bits(int n, int k);
    return 3 * $clog2(n / k) + 3 * $clog2(k) + $clog2(k) + 1;
  endfunction

  function automatic int msg_bits(model_e model, int n, int k);
    case (model)
      MODEL_UNLIMITED: return unlimited_bits(n, k);
      MODEL_STANDARD:  return standard_bits(n, k);
      default:         return minimal_bits(n, k);
    endcase
  endfunction

endpackage
