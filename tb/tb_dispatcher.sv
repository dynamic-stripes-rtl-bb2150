// tb_dispatcher: runtime-precision bit-serial broadcast.
// Configuration 4 subgroups x 4 activations x 16 bits. Random groups are
// offered with random gaps; subgroups get random bit ranges and some are all
// zero. For every accepted group the testbench computes each subgroup's nH
// and nL and checks, cycle by cycle, that subgroup c sends offset nH..nL with
// EOG only at nL and zero bits once done; that the bits sent rebuild every
// activation exactly; that the group takes max(nH - nL + 1) cycles; that the
// next group follows with no idle cycle when it is waiting; and that
// bc_load / bc_last mark the first / final cycle of first / last groups.
// Some groups use a per-layer window narrower than 16 bits; the bits outside
// it must never be sent.
module tb_dispatcher;
  localparam int COLS = 4, LANES = 4, BITS = 16;
  logic clk = 0, rst_n = 0;
  logic in_valid = 0, in_ready, in_first = 0, in_last = 0;
  logic [COLS-1:0][LANES-1:0][BITS-1:0] in_act = '0;
  logic [COLS-1:0][LANES-1:0] bc_bits;
  logic [COLS-1:0][3:0] bc_offset;
  logic [COLS-1:0] bc_eog;
  logic bc_valid, bc_load, bc_last;
  logic [3:0] layer_nh = 4'd15, layer_nl = 4'd0;
  logic [COLS-1:0][LANES-1:0][BITS-1:0] win_act;
  int checks = 0, failures = 0;
  int stalls = 0, waits = 0, zero_groups = 0, back_to_back = 0, trimmed = 0;

  dispatcher #(.COLS(COLS), .LANES(LANES), .BITS(BITS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    #5000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic fail(string msg);
    failures++;
    if (failures < 15) $display("FAIL %s at %0t", msg, $time);
  endtask

  // model of the group in flight
  logic [COLS-1:0][LANES-1:0][BITS-1:0] g_act;
  logic [COLS-1:0][LANES-1:0][BITS-1:0] rebuilt;
  int nh[COLS], nl[COLS];
  bit g_first, g_last, busy_m = 0;
  int cyc, span;

  // highest and lowest set bit over a subgroup, packed as {hi, lo}
  function automatic int range_of(logic [LANES-1:0][BITS-1:0] a);
    int hi = 0, lo = 0;
    bit seen = 0;
    for (int i = 0; i < LANES; i++)
      for (int j = 0; j < BITS; j++) if (a[i][j]) begin
        if (!seen || j > hi) hi = j;
        if (!seen || j < lo) lo = j;
        seen = 1;
      end
    return (hi << 8) | lo;
  endfunction


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
      automatic int sh = $urandom_range(0, BITS - 1), wd = $urandom_range(1, BITS);
      logic [BITS-1:0] mask;
      mask = BITS'((32'(1) << wd) - 1) << sh;
      for (int l = 0; l < LANES; l++)
        in_act[c][l] = ($urandom_range(0, 5) == 0) ? '0 : BITS'($urandom) & mask;
      if ($urandom_range(0, 6) == 0) in_act[c] = '0;
    end
    in_first = $urandom_range(0, 2) == 0;
    in_last  = $urandom_range(0, 2) == 0;
    if ($urandom_range(0, 3) == 0) begin
      layer_nl = 4'($urandom_range(0, 6));
      layer_nh = 4'($urandom_range(int'(layer_nl) + 4, 15));
    end else begin
      layer_nh = 4'd15; layer_nl = 4'd0;
    end
  endtask

  int groups_done = 0;

  initial begin
    bit acc;
    repeat (2) @(posedge clk);
    #1 rst_n = 1;
    new_group();
    while (groups_done < 500) begin
      // --- drive the offer (held while not accepted)
      if (!in_valid && $urandom_range(0, 3) != 0) in_valid = 1;
      #0;
      // --- check the broadcast of the current cycle
      checks++;
      if (bc_valid != busy_m) fail("bc_valid");
      if (busy_m) begin
        automatic bit all_done = 1;
        for (int c = 0; c < COLS; c++) begin
          automatic int cur = nh[c] - cyc;
          automatic bit act = cur >= nl[c];
          if (act) begin
            if (bc_offset[c] != 4'(cur)) fail($sformatf("offset c=%0d got %0d exp %0d", c, bc_offset[c], cur));
            if (bc_eog[c] != (cur == nl[c])) fail("eog");
            for (int l = 0; l < LANES; l++) rebuilt[c][l] |= BITS'(bc_bits[c][l]) << cur;
            if (cur != nl[c]) all_done = 0;
          end else begin
            if (bc_eog[c] || bc_bits[c] != '0) fail("idle subgroup sends");
          end
        end
        if (bc_load != (g_first && cyc == 0)) fail("bc_load");
        if (bc_last != (g_last && all_done)) fail("bc_last");
        if (all_done) begin
          checks++;
          if (rebuilt != g_act) fail("rebuilt activations differ");
          checks++;
          if (cyc + 1 != span) fail($sformatf("group took %0d cycles, exp %0d", cyc + 1, span));
          groups_done++;
          busy_m = 0;
          for (int c = 0; c < COLS; c++) if (nh[c] - nl[c] + 1 < span) waits++;
        end
        if (in_ready != all_done) fail("in_ready while busy");
      end else begin
        if (!in_ready) fail("not ready while idle");
      end
      if (in_valid && !in_ready) stalls++;
      acc = in_valid && in_ready;
      if (acc && busy_m) fail("accepted while busy");
      if (acc && bc_valid && !busy_m) back_to_back++;
      @(posedge clk); #1;
      if (busy_m) cyc++;
      if (acc) begin
        win_act = windowed(in_act, layer_nh, layer_nl);
        if (win_act != in_act) trimmed++;
        g_act = win_act; g_first = in_first; g_last = in_last;
        rebuilt = '0; cyc = 0; span = 0; busy_m = 1;
        if (win_act == '0) zero_groups++;
        for (int c = 0; c < COLS; c++) begin
          int r;
          r = range_of(win_act[c]);
          nh[c] = r >> 8; nl[c] = r & 255;
          if (nh[c] - nl[c] + 1 > span) span = nh[c] - nl[c] + 1;
        end
        in_valid = 0;
        new_group();
        if ($urandom_range(0, 1) == 0) in_valid = 1;
      end
    end
    checks++;
    if (stalls == 0 || waits == 0 || back_to_back == 0 || trimmed == 0) fail("a mechanism never happened");
    $display("stalls=%0d subgroup_waits=%0d back_to_back=%0d zero_groups=%0d layer_window_trims=%0d", stalls, waits, back_to_back, zero_groups, trimmed);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
