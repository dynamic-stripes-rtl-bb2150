// tb_sip: the modified serial inner-product unit.
// Random inner products are fed bit-serially, one bit position per cycle
// from the group's highest set bit down to its lowest, with sB set to the
// position. Several groups accumulate into one sum that starts from a
// random i_nbout (load). The accumulator must equal i_nbout + sum(w * a),
// computed directly in the testbench. A second phase sends all 16 bits of
// signed activations with sign_bit on bit 15. The output mux, max unit and
// << prec are checked against the same reference values.
module tb_sip;
  localparam int LANES = 16, WBITS = 16, ACC_W = 40;
  logic clk = 0, rst_n = 0, en = 0, load = 0, sign_bit = 0, pool = 0;
  logic [LANES-1:0] n_bits = '0;
  logic [LANES-1:0][WBITS-1:0] weights = '0;
  logic [3:0] sb = '0, prec = '0;
  logic signed [ACC_W-1:0] i_nbout = '0, o_nbout, out;
  int checks = 0, failures = 0;

  sip #(.LANES(LANES), .WBITS(WBITS), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #2000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [LANES-1:0][15:0] acts;
  longint expected;

  // send one group of activations over bit positions hi..lo
  task automatic send(int hi, int lo, bit first, bit signed_mode);
    for (int p = hi; p >= lo; p--) begin
      en = 1; load = first && (p == hi); sb = 4'(p);
      sign_bit = signed_mode && (p == 15);
      for (int i = 0; i < LANES; i++) n_bits[i] = acts[i][p];
      @(posedge clk); #1;
    end
    en = 0; load = 0; sign_bit = 0;
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1; #1;
    for (int t = 0; t < 300; t++) begin
      automatic int groups = $urandom_range(1, 3);
      automatic bit signed_mode = (t % 3 == 2);
      i_nbout = ACC_W'($signed(32'($urandom)) >>> $urandom_range(0, 20));
      expected = longint'(i_nbout);
      for (int g = 0; g < groups; g++) begin
        automatic int hi = 0, lo = 0;
        automatic bit seen = 0;
        automatic int sh = $urandom_range(0, 15), wd = $urandom_range(1, 16);
        logic [15:0] mask;
        mask = 16'((32'(1) << wd) - 1) << sh;
        for (int i = 0; i < LANES; i++) begin
          weights[i] = 16'($urandom);
          acts[i] = signed_mode ? 16'($urandom) : 16'($urandom) & mask;
          if (signed_mode) expected += longint'($signed(weights[i])) * longint'($signed(acts[i]));
          else             expected += longint'($signed(weights[i])) * longint'(acts[i]);
          for (int j = 0; j < 16; j++) if (acts[i][j]) begin
            if (!seen || j > hi) hi = j;
            if (!seen || j < lo) lo = j;
            seen = 1;
          end
        end
        if (signed_mode) begin hi = 15; lo = 0; end
        send(hi, lo, g == 0, signed_mode);
        // i_nbout only matters in the load cycle; change it to catch misuse
        if (g == 0) i_nbout = ACC_W'($signed(32'($urandom)));
      end
      checks++;
      if (o_nbout != ACC_W'(expected)) begin
        failures++;
        if (failures < 10) $display("FAIL t=%0d acc=%0d exp=%0d", t, o_nbout, expected);
      end
      // output path: max unit and << prec
      pool = $urandom_range(0, 1); prec = 4'($urandom_range(0, 15)); #1;
      begin
        longint sel;
        sel = (pool && longint'(i_nbout) > expected) ? longint'(i_nbout) : expected;
        checks++;
        if (out != ACC_W'(sel << prec)) begin
          failures++;
          if (failures < 10) $display("FAIL out t=%0d pool=%b prec=%0d got %0d", t, pool, prec, out);
        end
      end
      // idle cycles leave the accumulator alone
      @(posedge clk); #1;
      checks++;
      if (o_nbout != ACC_W'(expected)) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
