// tb_zero_buffer: writes values (about a third of them zero) and checks that
// the stored mask bit is 1 exactly for the non-zero ones.
module tb_zero_buffer;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we;
  logic [10:0] waddr, raddr;
  logic [7:0]  wdata;
  logic        mask;
  bit          model [1152];

  zero_buffer #(.DEPTH(1152), .DATA_W(8)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 1152; i++) begin
      @(negedge clk);
      we = 1; waddr = 11'(i);
      wdata = ($urandom % 3 == 0) ? 8'h00 : 8'($urandom % 255 + 1);
      if (i == 3) wdata = 8'h80;       // sign bit only
      if (i == 4) wdata = 8'h01;
      model[i] = (wdata != 0);
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 1152; i++) begin
      raddr = 11'(i); #1;
      checks++;
      if (mask !== model[i]) begin failures++; $display("mask %0d: %b != %b", i, mask, model[i]); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
