// tb_dynamic_stripes: end-to-end test of the accelerator at a reduced size
// (2 tiles of 3 x 4 SIPs, 4 activations per subgroup, 16-bit activations).
//
// The testbench offers groups of activations and per-tile weights with a
// random valid pattern; a set of 1 to 4 groups forms one output (in_first on
// the first group, in_last on the last). i_nbout changes every cycle, so
// the partial sum loaded at the start of a set is the value present in the
// first broadcast cycle after that set's first group was accepted. When
// out_valid rises, every o_nbout must equal that value plus
// sum(w * a) over the set's groups, and out must equal the pooled /
// prec-shifted value. Timing: out_valid must come exactly max over
// subgroups of (nH - nL + 1) cycles + 1 after the last group's acceptance,
// and a group waiting at the input must be accepted in the final broadcast
// cycle of the previous one.
//
// Mechanisms counted, each of which must occur: input stall, a subgroup
// waiting for a longer one, an all-zero subgroup, back-to-back groups,
// reload from i_nbout, max pooling picking i_nbout, a non-zero prec shift,
// a group using fewer than 16 bit positions (the runtime precision gain),
// and a per-layer precision window that drops activation bits.
module tb_dynamic_stripes;
  localparam int TILES = 2, ROWS = 3, COLS = 4, LANES = 4, BITS = 16, WBITS = 16, ACC_W = 40;
  localparam int NSETS = 150;

  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_first = 0, in_last = 0, pool = 0, out_valid;
  logic [COLS-1:0][LANES-1:0][BITS-1:0] in_act = '0;
  logic [TILES-1:0][ROWS-1:0][LANES-1:0][WBITS-1:0] wt_in = '0;
  logic [TILES-1:0][ROWS-1:0][COLS-1:0][ACC_W-1:0] i_nbout = '0, o_nbout, out;
  logic [3:0] prec = '0;
  logic [3:0] layer_nh = 4'd15, layer_nl = 4'd0;
  logic [COLS-1:0][LANES-1:0][BITS-1:0] win_act;

  dynamic_stripes #(.TILES(TILES), .ROWS(ROWS), .COLS(COLS), .LANES(LANES), .BITS(BITS), .WBITS(WBITS), .ACC_W(ACC_W)) dut (.*);

  int checks = 0, failures = 0;
  int n_stall = 0, n_wait = 0, n_zero_sub = 0, n_b2b = 0, n_reload = 0;
  int n_pool = 0, n_prec = 0, n_short = 0, n_trim = 0;

  always #5 clk = ~clk;

  initial begin
    #(NSETS * 4 * 40 * 10 + 100000);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("FAIL %s at %0t", msg, $time);
  endtask

  // ---------------------------------------------------------------- stimulus
  int set_groups_left = 0;


  // the activations as the dispatcher keeps them: bits outside the layer window cleared
  function automatic logic [COLS-1:0][LANES-1:0][BITS-1:0] windowed(
      logic [COLS-1:0][LANES-1:0][BITS-1:0] a, logic [3:0] hi, logic [3:0] lo);
    for (int c = 0; c < COLS; c++)
      for (int l = 0; l < LANES; l++)
        for (int j = 0; j < BITS; j++) if (j > int'(hi) || j < int'(lo)) a[c][l][j] = 1'b0;
    return a;
  endfunction

  task automatic new_group();
    for (int c = 0; c < COLS; c++) begin
      int sh, wd;
      logic [BITS-1:0] mask;
      sh = $urandom_range(0, BITS - 1); wd = $urandom_range(1, BITS);
      mask = BITS'((64'(1) << wd) - 1) << sh;
      for (int l = 0; l < LANES; l++)
        in_act[c][l] = ($urandom_range(0, 4) == 0) ? '0 : BITS'($urandom) & mask;
      if ($urandom_range(0, 7) == 0) in_act[c] = '0;
    end
    for (int t = 0; t < TILES; t++)
      for (int r = 0; r < ROWS; r++)
        for (int l = 0; l < LANES; l++) wt_in[t][r][l] = WBITS'($urandom);
    if (set_groups_left == 0) begin
      set_groups_left = $urandom_range(1, 4);
      in_first = 1;
    end else in_first = 0;
    set_groups_left--;
    in_last = (set_groups_left == 0);
    if ($urandom_range(0, 3) == 0) begin
      layer_nl = 4'($urandom_range(0, 6));
      layer_nh = 4'($urandom_range(int'(layer_nl) + 4, 15));
    end else begin
      layer_nh = 4'd15; layer_nl = 4'd0;
    end
  endtask

  // ---------------------------------------------------------------- model
  typedef struct {
    longint sum [TILES][ROWS][COLS];
    int     done_cycle;
  } result_t;

  longint contrib [TILES][ROWS][COLS];
  longint run [TILES][ROWS][COLS];
  result_t results[$];
  bit post_accept = 0, post_first = 0, post_last = 0;
  int post_span = 0, cycle = 0, busy_until = -1, sets_checked = 0;

  function automatic int span_of(logic [COLS-1:0][LANES-1:0][BITS-1:0] a, ref int waits,
                                 ref int zeros);
    int sp = 0;
    int lens [COLS];
    for (int c = 0; c < COLS; c++) begin
      int hi = 0, lo = 0;
      bit seen = 0;
      for (int l = 0; l < LANES; l++)
        for (int j = 0; j < BITS; j++) if (a[c][l][j]) begin
          if (!seen || j > hi) hi = j;
          if (!seen || j < lo) lo = j;
          seen = 1;
        end
      if (!seen) zeros++;
      lens[c] = hi - lo + 1;
      if (lens[c] > sp) sp = lens[c];
    end
    for (int c = 0; c < COLS; c++) if (lens[c] < sp) waits++;
    return sp;
  endfunction

  initial begin
    bit acc;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    new_group();
    while (sets_checked < NSETS) begin
      // inputs for this cycle
      if (!in_valid && $urandom_range(0, 3) != 0) in_valid = 1;
      for (int t = 0; t < TILES; t++)
        for (int r = 0; r < ROWS; r++)
          for (int c = 0; c < COLS; c++)
            i_nbout[t][r][c] = ACC_W'($signed(32'($urandom)) >>> $urandom_range(0, 24));
      pool = ($urandom_range(0, 3) == 0);
      prec = ($urandom_range(0, 3) == 0) ? 4'($urandom_range(1, 3)) : 4'd0;
      #1;
      // first broadcast cycle of a group accepted at the previous edge
      if (post_accept) begin
        for (int t = 0; t < TILES; t++)
          for (int r = 0; r < ROWS; r++)
            for (int c = 0; c < COLS; c++) begin
              if (post_first) run[t][r][c] = longint'($signed(i_nbout[t][r][c])) + contrib[t][r][c];
              else            run[t][r][c] += contrib[t][r][c];
            end
        if (post_first) n_reload++;
        if (post_last) begin
          result_t res;
          res.sum = run;
          res.done_cycle = cycle + post_span;   // out_valid cycle
          results.push_back(res);
        end
        post_accept = 0;
      end
      // output check
      if (out_valid) begin
        checks++;
        if (results.size() == 0) fail("out_valid with no result expected");
        else begin
          result_t res;
          res = results.pop_front();
          if (res.done_cycle != cycle) fail($sformatf("out_valid at cycle %0d, expected %0d", cycle, res.done_cycle));
          for (int t = 0; t < TILES; t++)
            for (int r = 0; r < ROWS; r++)
              for (int c = 0; c < COLS; c++) begin
                longint sel;
                checks++;
                if (o_nbout[t][r][c] != ACC_W'(res.sum[t][r][c]))
                  fail($sformatf("sum t%0d r%0d c%0d got %0d exp %0d", t, r, c,
                                 $signed(o_nbout[t][r][c]), res.sum[t][r][c]));
                sel = res.sum[t][r][c];
                if (pool && longint'($signed(i_nbout[t][r][c])) > sel) begin
                  sel = longint'($signed(i_nbout[t][r][c]));
                  n_pool++;
                end
                checks++;
                if (out[t][r][c] != ACC_W'(sel << prec)) fail("pooled/shifted output");
              end
          if (prec != 0) n_prec++;
          sets_checked++;
        end
      end
      // handshake
      acc = in_valid && in_ready;
      checks++;
      if (in_ready != (cycle >= busy_until)) fail($sformatf("in_ready=%b at cycle %0d, busy until %0d", in_ready, cycle, busy_until));
      if (in_valid && !in_ready) n_stall++;
      if (acc && cycle == busy_until) n_b2b++;
      if (acc) begin
        int sp;
        win_act = windowed(in_act, layer_nh, layer_nl);
        if (win_act != in_act) n_trim++;
        sp = span_of(win_act, n_wait, n_zero_sub);
        if (sp < BITS) n_short++;
        for (int t = 0; t < TILES; t++)
          for (int r = 0; r < ROWS; r++)
            for (int c = 0; c < COLS; c++) begin
              contrib[t][r][c] = 0;
              for (int l = 0; l < LANES; l++)
                contrib[t][r][c] += longint'($signed(wt_in[t][r][l])) * longint'(win_act[c][l]);
            end
        post_accept = 1; post_first = in_first; post_last = in_last; post_span = sp;
        busy_until = cycle + sp;   // last broadcast cycle, when in_ready rises again
      end
      @(posedge clk);
      cycle++;
      #1;
      if (acc) begin
        in_valid = 0;
        new_group();
        if ($urandom_range(0, 1) == 0) in_valid = 1;
      end
    end
    checks++;
    if (n_stall == 0 || n_wait == 0 || n_zero_sub == 0 || n_b2b == 0 || n_reload == 0 ||
        n_pool == 0 || n_prec == 0 || n_short == 0 || n_trim == 0) fail("a mechanism never happened");
    $display("sets=%0d stalls=%0d subgroup_waits=%0d zero_subgroups=%0d back_to_back=%0d reloads=%0d pool_picks=%0d prec_shifts=%0d short_groups=%0d layer_window_trims=%0d",
             sets_checked, n_stall, n_wait, n_zero_sub, n_b2b, n_reload, n_pool, n_prec, n_short, n_trim);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
