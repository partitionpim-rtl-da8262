// tb_crossbar: random operations on a reduced crossbar (N=64, K=8, ROWS=16)
// against a bit-level reference array kept in the testbench. For each
// operation the reference walks the transistor selects to find the sections,
// ORs the V_IN cells of each section row by row and writes the NOR into the
// V_OUT cells. Row writes and reads are checked as well; one operation
// completes per clock.
module tb_crossbar;
  localparam int N = 64, K = 8, ROWS = 16, W = N / K, RW = $clog2(ROWS);
  logic clk = 0;
  logic op_valid, wr_en;
  logic [N-1:0] vin, vout, wr_data, rd_data;
  logic [K-2:0] tsel;
  logic [RW-1:0] wr_row, rd_row;
  logic [N-1:0] ref_mem [ROWS];
  int checks = 0, failures = 0;

  crossbar #(.N(N), .K(K), .ROWS(ROWS)) dut (
    .clk(clk), .op_valid(op_valid), .vin(vin), .vout(vout), .tsel(tsel),
    .wr_en(wr_en), .wr_row(wr_row), .wr_data(wr_data), .rd_row(rd_row), .rd_data(rd_data));

  always #5 clk = ~clk;

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic compare_all();
    for (int r = 0; r < ROWS; r++) begin
      rd_row = RW'(r);
      #1;
      checks++;
      if (rd_data !== ref_mem[r]) begin
        failures++;
        $display("FAIL row %0d got %h exp %h", r, rd_data, ref_mem[r]);
      end
    end
  endtask

  initial begin
    op_valid = 0; wr_en = 0; vin = '0; vout = '0; tsel = '0;
    wr_row = '0; wr_data = '0; rd_row = '0;
    // load random data
    for (int r = 0; r < ROWS; r++) begin
      @(negedge clk);
      wr_en = 1; wr_row = RW'(r);
      wr_data = {$urandom, $urandom};
      ref_mem[r] = wr_data;
    end
    @(negedge clk); wr_en = 0;
    compare_all();
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      tsel = (K-1)'($urandom);
      vin = '0; vout = '0;
      // a few random input and output bitlines
      for (int i = 0; i < 1 + $urandom_range(6); i++) vin[$urandom_range(N - 1)] = 1'b1;
      for (int i = 0; i < 1 + $urandom_range(3); i++) begin
        int c;
        c = $urandom_range(N - 1);
        if (!vin[c]) vout[c] = 1'b1;
      end
      op_valid = 1;
      // reference update
      for (int r = 0; r < ROWS; r++) begin
        logic [N-1:0] nxt;
        nxt = ref_mem[r];
        for (int p = 0; p < K; p++) begin
          int lo, hi;
          logic acc;
          lo = p; hi = p;
          while (lo > 0 && tsel[lo-1]) lo--;
          while (hi < K - 1 && tsel[hi]) hi++;
          acc = 1'b0;
          for (int c = lo * W; c < (hi + 1) * W; c++)
            if (vin[c]) acc |= ref_mem[r][c];
          for (int c = p * W; c < (p + 1) * W; c++)
            if (vout[c]) nxt[c] = ~acc;
        end
        ref_mem[r] = nxt;
      end
      @(negedge clk);
      op_valid = 0;
      compare_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
