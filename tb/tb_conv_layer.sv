// tb_conv_layer: a small convolutional layer run end to end.
//
// Layer: 6 x 6 input, 8 channels, 3 x 3 kernels, 8 filters, stride 1, no
// padding (4 x 4 outputs). Activations are non-negative 16-bit values of
// varied magnitude, as after a ReLU; weights are signed 16-bit.
// Mapping on a reduced design (2 tiles of 4 x 4 SIPs, 4 lanes):
//   * row r of tile t computes filter 4t + r;
//   * column c works on output position 4p + c of pass p (4 passes);
//   * lane l carries input channel 4b + l of channel block b;
//   * one group = one kernel position (ky, kx) and one channel block, so an
//     output set is 9 x 2 = 18 groups, first/last marking the set.
// Every output is compared with a direct convolution. The testbench also
// reports the cycles used against the 16 cycles per group a fixed 16-bit
// precision would need.
module tb_conv_layer;
  localparam int TILES = 2, ROWS = 4, COLS = 4, LANES = 4, BITS = 16, WBITS = 16, ACC_W = 40;
  localparam int H = 6, W = 6, C = 8, K = 3, F = TILES * ROWS, OH = H - K + 1, OW = W - K + 1;
  localparam int NPOS = OH * OW, PASSES = NPOS / COLS, CBLK = C / LANES, NGROUPS = K * K * CBLK;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_first = 0, in_last = 0, pool = 0, out_valid;
  logic [COLS-1:0][LANES-1:0][BITS-1:0] in_act = '0;
  logic [TILES-1:0][ROWS-1:0][LANES-1:0][WBITS-1:0] wt_in = '0;
  logic [TILES-1:0][ROWS-1:0][COLS-1:0][ACC_W-1:0] i_nbout = '0, o_nbout, out;
  logic [3:0] prec = '0;
  logic [3:0] layer_nh = 4'd15, layer_nl = 4'd0;   // full 16-bit layer window

  dynamic_stripes #(.TILES(TILES), .ROWS(ROWS), .COLS(COLS), .LANES(LANES), .BITS(BITS), .WBITS(WBITS), .ACC_W(ACC_W)) dut (.*);

  always #5 clk = ~clk;

  int checks = 0, failures = 0, cycles = 0, busy_cycles = 0, groups = 0;
  logic [15:0] x [H][W][C];
  logic [15:0] wk [F][K][K][C];

  always @(posedge clk) begin
    cycles <= cycles + 1;
    if (dut.bc_valid) busy_cycles <= busy_cycles + 1;
  end

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // layer data: activations with a random magnitude per pixel, some zeros
    for (int i = 0; i < H; i++)
      for (int j = 0; j < W; j++)
        for (int c = 0; c < C; c++)
          x[i][j][c] = ($urandom_range(0, 3) == 0) ? 16'h0 : 16'($urandom) >> $urandom_range(4, 12);
    for (int f = 0; f < F; f++)
      for (int a = 0; a < K; a++)
        for (int b = 0; b < K; b++)
          for (int c = 0; c < C; c++) wk[f][a][b][c] = 16'($urandom);
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    for (int p = 0; p < PASSES; p++) begin
      for (int g = 0; g < NGROUPS; g++) begin
        int ky, kx, blk;
        ky = g / (K * CBLK); kx = (g / CBLK) % K; blk = g % CBLK;
        for (int c = 0; c < COLS; c++) begin
          int pos, oy, ox;
          pos = p * COLS + c; oy = pos / OW; ox = pos % OW;
          for (int l = 0; l < LANES; l++) in_act[c][l] = x[oy + ky][ox + kx][blk * LANES + l];
        end
        for (int t = 0; t < TILES; t++)
          for (int r = 0; r < ROWS; r++)
            for (int l = 0; l < LANES; l++) wt_in[t][r][l] = wk[t * ROWS + r][ky][kx][blk * LANES + l];
        in_first = (g == 0); in_last = (g == NGROUPS - 1); in_valid = 1;
        // in_ready is sampled mid-cycle; the group is taken at the next edge
        forever begin
          bit acc;
          #1 acc = in_ready;
          @(posedge clk);
          if (acc) break;
        end
        #1 in_valid = 0;
        groups++;
      end
      // wait for the set's sums
      while (!out_valid) begin @(posedge clk); #1; end
      for (int t = 0; t < TILES; t++)
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++) begin
            longint ref_sum;
            int pos, oy, ox, f;
            pos = p * COLS + c; oy = pos / OW; ox = pos % OW; f = t * ROWS + r;
            ref_sum = 0;
            for (int a = 0; a < K; a++)
              for (int b = 0; b < K; b++)
                for (int ch = 0; ch < C; ch++)
                  ref_sum += longint'($signed(wk[f][a][b][ch])) * longint'(x[oy + a][ox + b][ch]);
            checks++;
            if (o_nbout[t][r][c] != ACC_W'(ref_sum)) begin
              failures++;
              if (failures < 10) $display("FAIL pass %0d filter %0d pos %0d: got %0d exp %0d", p, f, pos,
                                          $signed(o_nbout[t][r][c]), ref_sum);
            end
          end
    end
    checks++;
    if (busy_cycles >= groups * BITS) failures++;   // runtime precision must save cycles here
    $display("groups=%0d broadcast cycles=%0d (fixed 16-bit: %0d)", groups, busy_cycles, groups * BITS);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
