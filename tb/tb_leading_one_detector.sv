// tb_leading_one_detector: exhaustive check of the leading-one detector.
// Every 16-bit input is applied; the expected one-hot is found by scanning
// from the top bit down. Also checks `any`.
module tb_leading_one_detector;
  localparam int W = 16;
  logic [W-1:0] in, onehot, exp_oh;
  logic any;
  int checks = 0, failures = 0;

  leading_one_detector #(.W(W)) dut (.in(in), .onehot(onehot), .any(any));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = 0; v < (1 << W); v++) begin
      in = W'(v);
      #1;
      exp_oh = '0;
      for (int j = 0; j < W; j++) if (in[j]) exp_oh = '0 | (W'(1) << j);
      checks++;
      if (onehot !== exp_oh || any !== (v != 0)) begin
        failures++;
        if (failures < 10) $display("FAIL in=%h onehot=%h exp=%h any=%b", in, onehot, exp_oh, any);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
