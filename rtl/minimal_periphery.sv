// minimal_periphery: column periphery for the minimal model.
//
// Same decoder structure as the standard model (three shared cmos_decoder
// units feeding K half-gate decoders), with the opcode generator replaced by
// minimal_pattern_generator, which also produces the transistor selects. The
// whole operation is described by 36 bits at N=1024, K=32: three shared
// intra-partition indices, the range (p_start, p_end, T-1), the partition
// distance and the direction. Structure follows the paper; field order is
// this design's choice (see pim_pkg).
//
// Interface: msg[minimal_bits(N,K)] in; vin[N], vout[N], tsel[K-1] out.
// Timing: purely combinational.
module minimal_periphery
  import pim_pkg::*;
#(
  parameter int N = 1024,
  parameter int K = 32
) (
  input  logic [minimal_bits(N, K)-1:0] msg,
  output logic [N-1:0]                  vin,
  output logic [N-1:0]                  vout,
  output logic [K-2:0]                  tsel
);

  localparam int W  = N / K;
  localparam int IW = $clog2(W);
  localparam int LK = $clog2(K);

  logic [IW-1:0] ia, ib, io;
  logic [LK-1:0] p_start, p_end, t_code, p_dist;
  logic          dir;
  logic [W-1:0]  sa, sb, so;
  opcode_t       op [K];

  assign ia      = msg[0*IW +: IW];
  assign ib      = msg[1*IW +: IW];
  assign io      = msg[2*IW +: IW];
  assign p_start = msg[3*IW + 0*LK +: LK];
  assign p_end   = msg[3*IW + 1*LK +: LK];
  assign t_code  = msg[3*IW + 2*LK +: LK];
  assign p_dist  = msg[3*IW + 3*LK +: LK];
  assign dir     = msg[3*IW + 4*LK];

  cmos_decoder #(.W(W)) u_dec_a   (.en(1'b1), .idx(ia), .sel(sa));
  cmos_decoder #(.W(W)) u_dec_b   (.en(1'b1), .idx(ib), .sel(sb));
  cmos_decoder #(.W(W)) u_dec_out (.en(1'b1), .idx(io), .sel(so));

  minimal_pattern_generator #(.K(K)) u_pat (
    .p_start(p_start), .p_end(p_end), .t_code(t_code), .p_dist(p_dist), .dir(dir),
    .op(op), .tsel(tsel)
  );

  for (genvar p = 0; p < K; p++) begin : g_part
    half_gate_decoder #(.W(W)) u_hg (
      .op(op[p]), .sel_a(sa), .sel_b(sb), .sel_out(so),
      .vin(vin[p*W +: W]), .vout(vout[p*W +: W])
    );
  end

endmodule
