// crossbar: behavioural model of a memristive crossbar with row partitions.
//
// The real part is an analog array of ROWS x N memristors, one bit each,
// whose rows are cut into K partitions by K-1 isolation transistors. This
// model reproduces its logical effect and is not meant as a circuit. Applying
// V_IN to some bitlines and V_OUT to others performs a stateful NOR in every
// row at once: within each section (a run of partitions joined by conducting
// transistors), the cells of the V_OUT bitlines take the NOR of the cells on
// the V_IN bitlines of that same section. Transistors that do not conduct
// isolate sections, so several gates run in one cycle. NOT is a NOR whose two
// inputs are the same bitline.
//
// Modelling choices of this design: the gate is ideal (the output cell is
// overwritten with the NOR whatever it held before; output initialisation is
// not modelled); a section with output but no input drives its outputs to 1
// (NOR of nothing); a row read/write port is provided for loading and
// reading data, which the paper does not describe.
//
// Storage is column-major (one ROWS-bit vector per bitline) so that a column
// operation is a handful of wide vector operations.
//
// Interface: op_valid, vin[N], vout[N], tsel[K-1] (1 = conducting);
// wr_en, wr_row, wr_data[N]; rd_row in, rd_data[N] out.
// Timing: an operation or a row write takes effect at the rising clock edge
// where op_valid / wr_en is high (op_valid has priority on the same cell);
// rd_data is combinational from rd_row. No reset: the array holds data.
module crossbar #(
  parameter int N    = 1024,
  parameter int K    = 32,
  parameter int ROWS = 1024
) (
  input  logic                    clk,
  input  logic                    op_valid,
  input  logic [N-1:0]            vin,
  input  logic [N-1:0]            vout,
  input  logic [K-2:0]            tsel,
  input  logic                    wr_en,
  input  logic [$clog2(ROWS)-1:0] wr_row,
  input  logic [N-1:0]            wr_data,
  input  logic [$clog2(ROWS)-1:0] rd_row,
  output logic [N-1:0]            rd_data
);

  localparam int W = N / K;

  logic [ROWS-1:0] col     [N];   // col[c][r] = cell (row r, bitline c)
  logic [ROWS-1:0] part_or [K];   // OR of V_IN cells of partition p, per row
  logic [ROWS-1:0] fwd     [K];   // OR accumulated from the left in a section
  logic [ROWS-1:0] bwd     [K];   // OR accumulated from the right in a section
  logic [ROWS-1:0] nor_val [K];   // NOR result of the section of partition p

  always_comb begin
    for (int p = 0; p < K; p++) begin
      part_or[p] = '0;
      for (int i = 0; i < W; i++)
        if (vin[p*W + i]) part_or[p] = part_or[p] | col[p*W + i];
    end
    fwd[0] = part_or[0];
    for (int p = 1; p < K; p++)
      fwd[p] = part_or[p] | (tsel[p-1] ? fwd[p-1] : '0);
    bwd[K-1] = part_or[K-1];
    for (int p = K - 2; p >= 0; p--)
      bwd[p] = part_or[p] | (tsel[p] ? bwd[p+1] : '0);
    for (int p = 0; p < K; p++)
      nor_val[p] = ~(fwd[p] | bwd[p]);
  end

  always_ff @(posedge clk) begin
    for (int c = 0; c < N; c++) begin
      if (wr_en) col[c][wr_row] <= wr_data[c];
      if (op_valid && vout[c]) col[c] <= nor_val[c / W];
    end
  end

  always_comb begin
    for (int c = 0; c < N; c++)
      rd_data[c] = col[c][rd_row];
  end

endmodule
