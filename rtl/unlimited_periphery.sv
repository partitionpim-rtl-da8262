// unlimited_periphery: half-gate column periphery for the unlimited model.
//
// The unlimited model allows any serial, parallel or semi-parallel operation:
// every partition gets its own InA/InB/Out indices and its own half-gate
// opcode, and every isolation transistor its own select. The periphery is K
// copies of a baseline column decoder of width N/K (three private
// cmos_decoder units each) placed side by side, each gated by its opcode.
// This follows the paper's half-gate periphery; the message field order is
// this design's choice (see pim_pkg).
//
// Interface: msg[unlimited_bits(N,K)] in (607 bits at N=1024, K=32);
// vin[N], vout[N] bitline selects and tsel[K-1] (1 = conducting) out.
// Timing: purely combinational.
module unlimited_periphery
  import pim_pkg::*;
#(
  parameter int N = 1024,
  parameter int K = 32
) (
  input  logic [unlimited_bits(N, K)-1:0] msg,
  output logic [N-1:0]                    vin,
  output logic [N-1:0]                    vout,
  output logic [K-2:0]                    tsel
);

  localparam int W  = N / K;
  localparam int IW = $clog2(W);
  localparam int IDX_BITS = 3 * K * IW;
  localparam int OP_BITS  = 3 * K;

  assign tsel = msg[IDX_BITS+OP_BITS +: K-1];

  for (genvar p = 0; p < K; p++) begin : g_part
    logic [IW-1:0] ia, ib, io;
    opcode_t       op;
    logic [W-1:0]  sa, sb, so;

    assign ia = msg[(3*p+0)*IW +: IW];
    assign ib = msg[(3*p+1)*IW +: IW];
    assign io = msg[(3*p+2)*IW +: IW];
    assign op = opcode_t'(msg[IDX_BITS + 3*p +: 3]);

    cmos_decoder #(.W(W)) u_dec_a   (.en(op.in_a), .idx(ia), .sel(sa));
    cmos_decoder #(.W(W)) u_dec_b   (.en(op.in_b), .idx(ib), .sel(sb));
    cmos_decoder #(.W(W)) u_dec_out (.en(op.out),  .idx(io), .sel(so));

    half_gate_decoder #(.W(W)) u_hg (
      .op(op), .sel_a(sa), .sel_b(sb), .sel_out(so),
      .vin(vin[p*W +: W]), .vout(vout[p*W +: W])
    );
  end

endmodule
