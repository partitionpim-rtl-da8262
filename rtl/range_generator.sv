// range_generator: periodic partition mask for the minimal model.
//
// Produces a K-bit mask with a one in every T-th partition from p_start up to
// and including p_end: mask[p] = (p_start <= p <= p_end) && ((p - p_start) % T == 0).
// Structure, as the paper suggests: a decoder turns T into the periodic
// pattern (bit i set when i % T == 0; the one-hot decode of T picks one of K
// constant patterns), one shifter moves that pattern up to p_start, and a
// second shifter builds the ones-mask that ends at p_end.
// T is carried as t_code = T - 1, so T ranges over 1..K; this encoding is
// this design's choice. If p_end < p_start the mask is empty.
//
// Interface: p_start, p_end, t_code [$clog2(K)] in; mask[K] out.
// Timing: purely combinational.
module range_generator #(
  parameter int K = 32
) (
  input  logic [$clog2(K)-1:0] p_start,
  input  logic [$clog2(K)-1:0] p_end,
  input  logic [$clog2(K)-1:0] t_code,
  output logic [K-1:0]         mask
);

  localparam int LK = $clog2(K);

  logic [K-1:0] period_pat;   // decoder for T
  logic [K-1:0] start_pat;    // shifter for p_start
  logic [K-1:0] end_mask;     // shifter for p_end

  // constant pattern with a one at every multiple of t
  function automatic logic [K-1:0] pattern(int t);
    logic [K-1:0] v;
    v = '0;
    for (int i = 0; i < K; i += t) v[i] = 1'b1;
    return v;
  endfunction

  // decoder for T: the one-hot decode of t_code selects one pattern
  logic [K-1:0] pat_sel [K];
  for (genvar t = 0; t < K; t++) begin : g_pat
    assign pat_sel[t] = (t_code == LK'(t)) ? pattern(t + 1) : '0;
  end

  always_comb begin
    period_pat = '0;
    for (int t = 0; t < K; t++) period_pat = period_pat | pat_sel[t];
  end

  assign start_pat = period_pat << p_start;
  assign end_mask  = {K{1'b1}} >> (LK'(K - 1) - p_end);
  assign mask      = start_pat & end_mask;

endmodule
