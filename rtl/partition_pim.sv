// partition_pim: one memristive processing-in-memory crossbar with row
// partitions and its column periphery.
//
// Each cycle in which msg_valid is high, the control message is decoded into
// V_IN / V_OUT bitline selects and partition transistor selects, and the
// crossbar performs the resulting set of concurrent NOR gates in all rows at
// once (serial, parallel or semi-parallel, depending on the sections).
// MODEL picks one of the three peripheries and, with it, the message format:
//   MODEL_UNLIMITED : unlimited_periphery, 607-bit message
//   MODEL_STANDARD  : standard_periphery,  79-bit message
//   MODEL_MINIMAL   : minimal_periphery,   36-bit message (default)
// (widths at N=1024, K=32; see pim_pkg for field layouts). The minimal model
// as default, the single-cycle timing and the row read/write port are this
// design's choices; the peripheries follow the paper. The controller that
// produces the messages lies outside this module.
//
// Interface: msg_valid, msg in; wr_en/wr_row/wr_data row write;
// rd_row in, rd_data out (combinational row read).
// Timing: one operation per clock, result visible after the clock edge.
module partition_pim
  import pim_pkg::*;
#(
  parameter int     N     = 1024,
  parameter int     K     = 32,
  parameter int     ROWS  = 1024,
  parameter model_e MODEL = MODEL_MINIMAL
) (
  input  logic                            clk,
  input  logic                            msg_valid,
  input  logic [msg_bits(MODEL, N, K)-1:0] msg,
  input  logic                            wr_en,
  input  logic [$clog2(ROWS)-1:0]         wr_row,
  input  logic [N-1:0]                    wr_data,
  input  logic [$clog2(ROWS)-1:0]         rd_row,
  output logic [N-1:0]                    rd_data
);

  logic [N-1:0] vin, vout;
  logic [K-2:0] tsel;

  if (MODEL == MODEL_UNLIMITED) begin : g_unlimited
    unlimited_periphery #(.N(N), .K(K)) u_periph (
      .msg(msg), .vin(vin), .vout(vout), .tsel(tsel));
  end else if (MODEL == MODEL_STANDARD) begin : g_standard
    standard_periphery #(.N(N), .K(K)) u_periph (
      .msg(msg), .vin(vin), .vout(vout), .tsel(tsel));
  end else begin : g_minimal
    minimal_periphery #(.N(N), .K(K)) u_periph (
      .msg(msg), .vin(vin), .vout(vout), .tsel(tsel));
  end

  crossbar #(.N(N), .K(K), .ROWS(ROWS)) u_xbar (
    .clk(clk), .op_valid(msg_valid), .vin(vin), .vout(vout), .tsel(tsel),
    .wr_en(wr_en), .wr_row(wr_row), .wr_data(wr_data),
    .rd_row(rd_row), .rd_data(rd_data)
  );

endmodule
