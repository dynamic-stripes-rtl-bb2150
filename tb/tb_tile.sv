// tb_tile: a 3 x 4 grid of SIPs with 4 lanes each.
// The testbench plays the dispatcher: for each group it loads the weights
// (wt_load) and then broadcasts, per column, the bits of that column's
// activations from its own nH down to its nL with the position as offset and
// EOG on the last one. Columns with shorter ranges finish early; after their
// EOG the testbench drives random garbage on their bit lines, which the
// tile must ignore. Weights on wt_in also change during a group and must
// not be used. Each SIP's sum is checked against i_nbout + sum(w * a)
// computed in the testbench, over several groups per output.
module tb_tile;
  localparam int ROWS = 3, COLS = 4, LANES = 4, WBITS = 16, ACC_W = 40;
  logic clk = 0, rst_n = 0, wt_load = 0, bc_valid = 0, bc_load = 0, sign_bit = 0, pool = 0;
  logic [ROWS-1:0][LANES-1:0][WBITS-1:0] wt_in = '0, wts;
  logic [COLS-1:0][LANES-1:0] bc_bits = '0;
  logic [COLS-1:0][3:0] bc_offset = '0;
  logic [COLS-1:0] bc_eog = '0;
  logic [ROWS-1:0][COLS-1:0][ACC_W-1:0] i_nbout = '0, o_nbout, out;
  logic [3:0] prec = '0;
  int checks = 0, failures = 0, early_cols = 0;

  tile #(.ROWS(ROWS), .COLS(COLS), .LANES(LANES), .WBITS(WBITS), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  logic [COLS-1:0][LANES-1:0][15:0] acts;
  longint expected [ROWS][COLS];
  int nh[COLS], nl[COLS];

  initial begin
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int t = 0; t < 200; t++) begin
      int groups, span;
      groups = $urandom_range(1, 3);
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          i_nbout[r][c] = ACC_W'($signed(32'($urandom)) >>> 4);
          expected[r][c] = longint'($signed(i_nbout[r][c]));
        end
      for (int g = 0; g < groups; g++) begin
        for (int r = 0; r < ROWS; r++)
          for (int l = 0; l < LANES; l++) wts[r][l] = 16'($urandom);
        span = 0;
        for (int c = 0; c < COLS; c++) begin
          int sh, wd;
          logic [15:0] mask;
          sh = $urandom_range(0, 15); wd = $urandom_range(1, 16);
          mask = 16'((32'(1) << wd) - 1) << sh;
          nh[c] = 0; nl[c] = 15;
          for (int l = 0; l < LANES; l++) begin
            acts[c][l] = 16'($urandom) & mask;
            acts[c][l][sh] = 1'b1;                 // keep the range non-empty
            for (int j = 0; j < 16; j++) if (acts[c][l][j]) begin
              if (j > nh[c]) nh[c] = j;
              if (j < nl[c]) nl[c] = j;
            end
            for (int r = 0; r < ROWS; r++)
              expected[r][c] += longint'($signed(wts[r][l])) * longint'(acts[c][l]);
          end
          if (nh[c] - nl[c] + 1 > span) span = nh[c] - nl[c] + 1;
        end
        for (int c = 0; c < COLS; c++) if (nh[c] - nl[c] + 1 < span) early_cols++;
        // weight load cycle
        wt_in = wts; wt_load = 1;
        @(posedge clk); #1;
        wt_load = 0; wt_in = '1;
        for (int k = 0; k < span; k++) begin
          bc_valid = 1; bc_load = (g == 0) && (k == 0);
          for (int c = 0; c < COLS; c++) begin
            int p;
            p = nh[c] - k;
            if (p >= nl[c]) begin
              bc_offset[c] = 4'(p);
              bc_eog[c] = (p == nl[c]);
              for (int l = 0; l < LANES; l++) bc_bits[c][l] = acts[c][l][p];
            end else begin
              bc_offset[c] = 4'($urandom); bc_eog[c] = 0;
              bc_bits[c] = LANES'($urandom);     // must be ignored
            end
          end
          @(posedge clk); #1;
        end
        bc_valid = 0; bc_load = 0; bc_eog = '0; bc_bits = '0;
        if (g == 0)
          for (int r = 0; r < ROWS; r++)
            for (int c = 0; c < COLS; c++) i_nbout[r][c] = ACC_W'($urandom);
      end
      for (int r = 0; r < ROWS; r++)
        for (int c = 0; c < COLS; c++) begin
          checks++;
          if (o_nbout[r][c] != ACC_W'(expected[r][c])) begin
            failures++;
            if (failures < 10) $display("FAIL t=%0d r=%0d c=%0d got %0d exp %0d", t, r, c,
                                        $signed(o_nbout[r][c]), expected[r][c]);
          end
        end
    end
    checks++;
    if (early_cols == 0) failures++;
    $display("columns that finished early: %0d", early_cols);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
