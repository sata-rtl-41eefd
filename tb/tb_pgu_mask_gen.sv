// tb_pgu_mask_gen: checks the firing-gradient mask for every 8-bit value of
// U (|U - 12| < 20, i.e. U in -7 .. 31).
module tb_pgu_mask_gen;
  int checks = 0, failures = 0;
  logic signed [7:0] u;
  logic mask;

  pgu_mask_gen dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int v = -128; v < 128; v++) begin
      u = 8'(v); #1;
      checks++;
      if (mask !== (v >= -7 && v <= 31)) begin failures++; $display("u=%0d mask=%b", v, mask); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
