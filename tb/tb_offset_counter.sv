// tb_offset_counter: the per-subgroup bit-position counter.
// Random (nH, nL) pairs are started, some back to back in the EOG cycle and
// some after idle gaps. Each cycle the offset must follow nH, nH-1, ..., nL,
// EOG must be high only at nL, and the subgroup must take nH - nL + 1 cycles.
module tb_offset_counter;
  logic clk = 0, rst_n = 0, start = 0;
  logic [3:0] n_h = '0, n_l = '0, offset;
  logic eog, active;
  int checks = 0, failures = 0;

  offset_counter #(.OFF_W(4)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #200000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int h, l, exp_off, cyc;
    bit b2b = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 400; t++) begin
      h = $urandom_range(0, 15);
      l = $urandom_range(0, h);
      if (!b2b) begin
        repeat ($urandom_range(0, 2)) @(posedge clk);
        #1;
      end
      start = 1; n_h = 4'(h); n_l = 4'(l);
      @(posedge clk); #1;
      start = 0;
      exp_off = h; cyc = 0;
      forever begin
        cyc++;
        checks++;
        if (!active || offset != 4'(exp_off) || eog != (exp_off == l)) begin
          failures++;
          if (failures < 10) $display("FAIL t=%0d off=%0d exp=%0d eog=%b act=%b", t, offset, exp_off, eog, active);
        end
        if (exp_off == l) break;
        exp_off--;
        @(posedge clk); #1;
      end
      checks++;
      if (cyc != h - l + 1) failures++;
      b2b = ($urandom_range(0, 1) == 1);
      if (!b2b) begin
        @(posedge clk); #1;
        checks++;
        if (active) begin failures++; $display("FAIL still active"); end
      end
      // for a back-to-back start the next iteration raises start in the eog cycle
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
