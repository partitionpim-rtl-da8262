// tb_cmos_decoder: exhaustive check of the one-hot index decoder at the
// default partition width (32). For every index and both enable values the
// output must equal 1 << idx (or 0 when disabled).
module tb_cmos_decoder;
  localparam int W = 32;
  logic                 en;
  logic [$clog2(W)-1:0] idx;
  logic [W-1:0]         sel;
  int checks = 0, failures = 0;

  cmos_decoder #(.W(W)) dut (.en(en), .idx(idx), .sel(sel));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int e = 0; e < 2; e++) begin
      for (int i = 0; i < W; i++) begin
        logic [W-1:0] exp_sel;
        en  = e[0];
        idx = i[$clog2(W)-1:0];
        #1;
        exp_sel = '0;
        if (e != 0) exp_sel[i] = 1'b1;
        checks++;
        if (sel !== exp_sel) begin
          failures++;
          $display("FAIL en=%0d idx=%0d sel=%h exp=%h", e, i, sel, exp_sel);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
