// tb_precision_detector: runtime precision detection.
// Instance A: 4 activations of 8 bits, the worked example of the README
// (0x30, 0x14, 0x22, 0x08: highest 1 at bit 5, lowest at bit 1),
// then random groups. Instance B: the default 16 activations of 16 bits with
// random values whose bit range is also random. Expected nH/nL come from
// scanning each bit of each activation in the testbench.
module tb_precision_detector;
  logic [3:0][7:0]   act_a;
  logic [7:0]        or_a;
  logic [2:0]        nh_a, nl_a;
  logic              nz_a;
  logic [15:0][15:0] act_b;
  logic [15:0]       or_b;
  logic [3:0]        nh_b, nl_b;
  logic              nz_b;
  int checks = 0, failures = 0;

  precision_detector #(.N(4), .BITS(8)) dut_a (
    .act(act_a), .or_bits(or_a), .n_h(nh_a), .n_l(nl_a), .nonzero(nz_a));
  precision_detector dut_b (
    .act(act_b), .or_bits(or_b), .n_h(nh_b), .n_l(nl_b), .nonzero(nz_b));

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_a();
    int hi = 0, lo = 0; bit seen = 0; logic [7:0] o = '0;
    for (int i = 0; i < 4; i++)
      for (int j = 0; j < 8; j++)
        if (act_a[i][j]) begin
          o[j] = 1'b1;
          if (!seen || j > hi) hi = j;
          if (!seen || j < lo) lo = j;
          seen = 1;
        end
    checks++;
    if (or_a !== o || nz_a !== seen || nh_a != 3'(hi) || nl_a != 3'(lo)) begin
      failures++;
      $display("FAIL A act=%h or=%h nH=%0d nL=%0d exp %0d %0d", act_a, or_a, nh_a, nl_a, hi, lo);
    end
  endtask

  task automatic check_b();
    int hi = 0, lo = 0; bit seen = 0;
    for (int i = 0; i < 16; i++)
      for (int j = 0; j < 16; j++)
        if (act_b[i][j]) begin
          if (!seen || j > hi) hi = j;
          if (!seen || j < lo) lo = j;
          seen = 1;
        end
    checks++;
    if (nz_b !== seen || nh_b != 4'(hi) || nl_b != 4'(lo)) begin
      failures++;
      $display("FAIL B nH=%0d nL=%0d exp %0d %0d", nh_b, nl_b, hi, lo);
    end
  endtask

  initial begin
    act_a = {8'h08, 8'h22, 8'h14, 8'h30};
    act_b = '0;
    #1;
    check_a();
    checks++;
    if (nh_a != 3'b101 || nl_a != 3'b001) begin
      failures++; $display("FAIL example nH=%b nL=%b", nh_a, nl_a);
    end
    check_b();  // all zero
    for (int t = 0; t < 3000; t++) begin
      automatic int sh = $urandom_range(0, 15);
      automatic int wd = $urandom_range(1, 16);
      logic [15:0] mask;
      mask = 16'((32'(1) << wd) - 1) << sh;
      for (int i = 0; i < 4; i++) act_a[i] = 8'($urandom) & 8'(mask);
      for (int i = 0; i < 16; i++)
        act_b[i] = ($urandom_range(0, 3) == 0) ? 16'h0 : (16'($urandom) & mask);
      #1;
      check_a();
      check_b();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
