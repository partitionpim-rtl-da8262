// standard_periphery: column periphery for the standard model.
//
// The standard model requires identical intra-partition indices in all
// partitions, both inputs of a gate in one partition and one direction for
// all gates. The three indices are therefore decoded once by shared
// cmos_decoder units whose one-hot selects fan out to all K partitions, and
// the K opcodes are produced by opcode_generator from the transistor selects,
// the partition enables and the direction bit. Each partition keeps its own
// half_gate_decoder (the gating of the analog multiplexer selects).
// Structure follows the paper; the message field order is this design's
// choice (see pim_pkg).
//
// Interface: msg[standard_bits(N,K)] in (79 bits at N=1024, K=32);
// vin[N], vout[N] and tsel[K-1] (1 = conducting) out.
// Timing: purely combinational.
module standard_periphery
  import pim_pkg::*;
#(
  parameter int N = 1024,
  parameter int K = 32
) (
  input  logic [standard_bits(N, K)-1:0] msg,
  output logic [N-1:0]                   vin,
  output logic [N-1:0]                   vout,
  output logic [K-2:0]                   tsel
);

  localparam int W  = N / K;
  localparam int IW = $clog2(W);

  logic [IW-1:0] ia, ib, io;
  logic [K-1:0]  en;
  logic          dir;
  logic [W-1:0]  sa, sb, so;
  opcode_t       op [K];

  assign ia   = msg[0*IW +: IW];
  assign ib   = msg[1*IW +: IW];
  assign io   = msg[2*IW +: IW];
  assign en   = msg[3*IW +: K];
  assign tsel = msg[3*IW+K +: K-1];
  assign dir  = msg[3*IW+2*K-1];

  // shared CMOS decoders
  cmos_decoder #(.W(W)) u_dec_a   (.en(1'b1), .idx(ia), .sel(sa));
  cmos_decoder #(.W(W)) u_dec_b   (.en(1'b1), .idx(ib), .sel(sb));
  cmos_decoder #(.W(W)) u_dec_out (.en(1'b1), .idx(io), .sel(so));

  opcode_generator #(.K(K)) u_opgen (.tsel(tsel), .en(en), .dir(dir), .op(op));

  for (genvar p = 0; p < K; p++) begin : g_part
    half_gate_decoder #(.W(W)) u_hg (
      .op(op[p]), .sel_a(sa), .sel_b(sb), .sel_out(so),
      .vin(vin[p*W +: W]), .vout(vout[p*W +: W])
    );
  end

endmodule
