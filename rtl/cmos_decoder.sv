// cmos_decoder: the CMOS part of one decoder unit of a column decoder.
//
// A decoder unit receives one bitline index and selects that bitline's analog
// multiplexer so that it passes the unit's fixed voltage (V_IN or V_OUT). This
// module is the digital half: a binary-to-one-hot decoder of W outputs with
// an enable. With partitions, W is the partition width N/K, so the design
// needs K decoders of log2(N/K) index bits (unlimited model) or a single
// shared one (standard and minimal models) instead of one log2(N)-bit
// decoder. The plain one-hot decoder structure is this design's choice; the
// paper gives only the function.
//
// Interface: en, idx[$clog2(W)] in; sel[W] out, one-hot when en, else 0.
// Timing: purely combinational.
module cmos_decoder #(
  parameter int W = 32
) (
  input  logic                 en,
  input  logic [$clog2(W)-1:0] idx,
  output logic [W-1:0]         sel
);

  always_comb begin
    sel = '0;
    for (int i = 0; i < W; i++)
      sel[i] = en && (idx == i[$clog2(W)-1:0]);
  end

endmodule
