// tb_partition_pim_full: the top at its default size (1024 x 1024 crossbar,
// 32 partitions, minimal-model 36-bit messages). Every row is loaded with
// random data, then a short program of serial, parallel and semi-parallel
// NOR/NOT operations in both directions runs, one operation per clock, and
// all rows are compared with a reference array after every operation.
module tb_partition_pim_full
  import pim_pkg::*;
;
  localparam int N = 1024, K = 32, ROWS = 1024, W = N / K, IW = $clog2(W), LK = $clog2(K);
  localparam int RW = $clog2(ROWS);
  localparam int MW = minimal_bits(N, K);

  logic clk = 0;
  logic msg_valid, wr_en;
  logic [RW-1:0] wr_row, rd_row;
  logic [N-1:0] wr_data, rd_data;
  logic [MW-1:0] msg;
  logic [N-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  partition_pim dut (
    .clk(clk), .msg_valid(msg_valid), .msg(msg), .wr_en(wr_en), .wr_row(wr_row),
    .wr_data(wr_data), .rd_row(rd_row), .rd_data(rd_data));

  always #5 clk = ~clk;

  initial begin
    #100000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all();
    int bad;
    bad = 0;
    for (int r = 0; r < ROWS; r++) begin
      rd_row = RW'(r);
      #1;
      if (rd_data !== ref_mem[r]) bad++;
    end
    checks++;
    if (bad != 0) begin
      failures++;
      $display("FAIL %0d rows differ", bad);
    end
  endtask

  task automatic do_op(input int s, input int e, input int per, input int d, input logic dir,
                       input int ia, input int ib, input int io);
    msg = {dir, LK'(d), LK'(per - 1), LK'(e), LK'(s), IW'(io), IW'(ib), IW'(ia)};
    for (int r = 0; r < ROWS; r++) begin
      logic [N-1:0] snap;
      snap = ref_mem[r];
      for (int p = s; p <= e; p += per) begin
        int o;
        o = dir ? p - d : p + d;
        ref_mem[r][o*W + io] = ~(snap[p*W + ia] | snap[p*W + ib]);
      end
    end
    @(negedge clk);
    msg_valid = 1;
    @(negedge clk);
    msg_valid = 0;
    compare_all();
  endtask

  initial begin
    msg_valid = 0; wr_en = 0; wr_row = '0; wr_data = '0; rd_row = '0; msg = '0;
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = RW'(r);
      for (int i = 0; i < N / 32; i++) wr_data[i*32 +: 32] = $urandom;
      ref_mem[r] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    compare_all();
    do_op(0, 0, 1, K - 1, 1'b0, 0, 1, W - 1);     // serial, across the whole row
    do_op(0, K - 1, 1, 0, 1'b0, 2, 3, 4);         // parallel NOR in all 32 partitions
    do_op(0, K - 1, 1, 0, 1'b0, 4, 4, 5);         // parallel NOT
    do_op(0, K - 1, 2, 1, 1'b0, 5, 6, 7);         // semi-parallel, pairs to the right
    do_op(3, K - 1, 4, 3, 1'b1, 7, 8, 9);         // semi-parallel, distance 3, to the left
    do_op(K - 1, K - 1, 1, K - 1, 1'b1, 9, 10, 0); // serial, right to left
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
