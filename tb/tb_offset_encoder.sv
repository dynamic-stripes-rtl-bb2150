// tb_offset_encoder: one-hot to binary encoder for 16 (4-bit offset) and 8
// (3-bit offset, as in the 8-bit example) positions. Every one-hot input and
// the all-zero input are applied.
module tb_offset_encoder;
  logic [15:0] oh16;
  logic [3:0]  off16;
  logic [7:0]  oh8;
  logic [2:0]  off8;
  int checks = 0, failures = 0;

  offset_encoder #(.W(16)) dut16 (.onehot(oh16), .offset(off16));
  offset_encoder #(.W(8))  dut8  (.onehot(oh8),  .offset(off8));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    oh16 = '0; oh8 = '0; #1;
    checks++; if (off16 != 0 || off8 != 0) failures++;
    for (int j = 0; j < 16; j++) begin
      oh16 = 16'(1) << j; oh8 = 8'(1) << (j % 8); #1;
      checks += 2;
      if (off16 != 4'(j))     begin failures++; $display("FAIL16 j=%0d got %0d", j, off16); end
      if (off8 != 3'(j % 8))  begin failures++; $display("FAIL8 j=%0d got %0d", j, off8); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
