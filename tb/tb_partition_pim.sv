// tb_partition_pim: end-to-end test of the partitioned crossbar with all
// three peripheries side by side, at reduced size (N=64, K=8, ROWS=16).
//
// Each step draws one operation in the common subset of the three models: a
// periodic set of gates with inputs in partitions p_start, p_start+T, ... up
// to p_end, outputs at a fixed partition distance in a given direction, and
// shared indices InA, InB, Out. The operation is encoded as a minimal,
// standard and unlimited message and applied to three instances at once. A
// reference array updated gate by gate (Out = NOR(InA, InB), per row) must
// match every instance after every operation. The test counts the
// mechanisms it exercises (serial, parallel, semi-parallel, both directions,
// NOT) and fails if one of them never happened. Each operation must take
// effect after exactly one clock edge.
module tb_partition_pim
  import pim_pkg::*;
;
  localparam int N = 64, K = 8, ROWS = 16, W = N / K, IW = $clog2(W), LK = $clog2(K);
  localparam int RW = $clog2(ROWS);
  localparam int MW_MIN = minimal_bits(N, K);
  localparam int MW_STD = standard_bits(N, K);
  localparam int MW_UNL = unlimited_bits(N, K);

  logic clk = 0;
  logic msg_valid, wr_en;
  logic [RW-1:0] wr_row, rd_row;
  logic [N-1:0] wr_data, rd_min, rd_std, rd_unl;
  logic [MW_MIN-1:0] msg_min;
  logic [MW_STD-1:0] msg_std;
  logic [MW_UNL-1:0] msg_unl;
  logic [N-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;
  int n_serial = 0, n_parallel = 0, n_semi = 0, n_dir0 = 0, n_dir1 = 0, n_not = 0;

  partition_pim #(.N(N), .K(K), .ROWS(ROWS), .MODEL(MODEL_MINIMAL)) dut_min (
    .clk(clk), .msg_valid(msg_valid), .msg(msg_min), .wr_en(wr_en), .wr_row(wr_row),
    .wr_data(wr_data), .rd_row(rd_row), .rd_data(rd_min));
  partition_pim #(.N(N), .K(K), .ROWS(ROWS), .MODEL(MODEL_STANDARD)) dut_std (
    .clk(clk), .msg_valid(msg_valid), .msg(msg_std), .wr_en(wr_en), .wr_row(wr_row),
    .wr_data(wr_data), .rd_row(rd_row), .rd_data(rd_std));
  partition_pim #(.N(N), .K(K), .ROWS(ROWS), .MODEL(MODEL_UNLIMITED)) dut_unl (
    .clk(clk), .msg_valid(msg_valid), .msg(msg_unl), .wr_en(wr_en), .wr_row(wr_row),
    .wr_data(wr_data), .rd_row(rd_row), .rd_data(rd_unl));

  always #5 clk = ~clk;

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all(input string what);
    for (int r = 0; r < ROWS; r++) begin
      rd_row = RW'(r);
      #1;
      checks++;
      if (rd_min !== ref_mem[r] || rd_std !== ref_mem[r] || rd_unl !== ref_mem[r]) begin
        failures++;
        $display("FAIL %s row %0d min=%h std=%h unl=%h exp=%h", what, r,
                 rd_min, rd_std, rd_unl, ref_mem[r]);
      end
    end
  endtask

  // Encode and apply one operation; update the reference.
  task automatic do_op(input int s, input int e, input int per, input int d, input logic dir,
                       input int ia, input int ib, input int io);
    logic [K-2:0] ts;
    logic [K-1:0] en, is_in, is_out;
    logic [3*K*IW-1:0] idx;
    logic [3*K-1:0] ops;
    int ngates;
    logic [N-1:0] snap [ROWS];
    ts = '0; en = '0; is_in = '0; is_out = '0; ngates = 0;
    for (int p = s; p <= e; p += per) begin
      int o, lo, hi;
      o = dir ? p - d : p + d;
      lo = (p < o) ? p : o;
      hi = (p < o) ? o : p;
      for (int j = lo; j < hi; j++) ts[j] = 1'b1;
      is_in[p] = 1'b1; is_out[o] = 1'b1; en[p] = 1'b1; en[o] = 1'b1;
      ngates++;
    end
    for (int p = 0; p < K; p++) begin
      idx[(3*p+0)*IW +: IW] = IW'(ia);
      idx[(3*p+1)*IW +: IW] = IW'(ib);
      idx[(3*p+2)*IW +: IW] = IW'(io);
      ops[3*p +: 3] = {is_in[p], is_in[p], is_out[p]};
    end
    msg_min = {dir, LK'(d), LK'(per - 1), LK'(e), LK'(s), IW'(io), IW'(ib), IW'(ia)};
    msg_std = {dir, ts, en, IW'(io), IW'(ib), IW'(ia)};
    msg_unl = {ts, ops, idx};
    // reference: all gates read the state before the operation
    for (int r = 0; r < ROWS; r++) snap[r] = ref_mem[r];
    for (int p = s; p <= e; p += per) begin
      int o;
      o = dir ? p - d : p + d;
      for (int r = 0; r < ROWS; r++)
        ref_mem[r][o*W + io] = ~(snap[r][p*W + ia] | snap[r][p*W + ib]);
    end
    // mechanism counters
    if (ngates == 1 && d == K - 1) n_serial++;
    if (ngates == K && d == 0) n_parallel++;
    if (ngates > 1 && d > 0) n_semi++;
    if (dir) n_dir1++; else n_dir0++;
    if (ia == ib) n_not++;
    @(negedge clk);
    msg_valid = 1;
    @(negedge clk);
    msg_valid = 0;
    compare_all("op");
  endtask

  initial begin
    msg_valid = 0; wr_en = 0; wr_row = '0; wr_data = '0; rd_row = '0;
    msg_min = '0; msg_std = '0; msg_unl = '0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = RW'(r); wr_data = {$urandom, $urandom};
      ref_mem[r] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    compare_all("load");
    // directed: serial gate across the whole row (partition 0 -> K-1)
    do_op(0, 0, 1, K - 1, 1'b0, 0, 1, W - 1);
    // directed: serial gate right to left
    do_op(K - 1, K - 1, 1, K - 1, 1'b1, 2, 3, 0);
    // directed: fully parallel, one gate per partition, and a parallel NOT
    do_op(0, K - 1, 1, 0, 1'b0, 0, 1, 3);
    do_op(0, K - 1, 1, 0, 1'b0, 4, 4, 5);
    // directed: semi-parallel pairs (distance 1, period 2)
    do_op(0, K - 1, 2, 1, 1'b0, 0, 1, 6);
    do_op(1, K - 1, 2, 1, 1'b1, 2, 3, 7);
    // random operations
    for (int t = 0; t < 200; t++) begin
      int s, e, per, d, ia, ib, io;
      logic dir;
      d   = $urandom_range(K - 1);
      per = d + 1 + $urandom_range(K - 1 - d);
      dir = $urandom_range(1);
      s   = $urandom_range(K - 1);
      e   = s + $urandom_range(K - 1 - s);
      if (!dir && s + d > K - 1) s = K - 1 - d;
      if (!dir && e + d > K - 1) e = K - 1 - d;
      if (dir && s < d) s = d;
      if (e < s) e = s;
      ia = $urandom_range(W - 1);
      ib = ($urandom_range(3) == 0) ? ia : $urandom_range(W - 1);
      do begin io = $urandom_range(W - 1); end while (io == ia || io == ib);
      do_op(s, e, per, d, dir, ia, ib, io);
    end
    $display("mechanisms: serial=%0d parallel=%0d semi_parallel=%0d dir0=%0d dir1=%0d not=%0d",
             n_serial, n_parallel, n_semi, n_dir0, n_dir1, n_not);
    if (n_serial == 0) failures++;
    if (n_parallel == 0) failures++;
    if (n_semi == 0) failures++;
    if (n_dir0 == 0) failures++;
    if (n_dir1 == 0) failures++;
    if (n_not == 0) failures++;
    checks += 6;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
