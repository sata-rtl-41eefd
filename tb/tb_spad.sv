// tb_spad: writes random bytes to every entry of a 1152-entry scratch pad,
// reads them back, and checks that a gated read (re = 0) returns zero.
module tb_spad;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic we, re;
  logic [10:0] waddr, raddr;
  logic [7:0]  wdata, rdata;
  logic [7:0]  model [1152];

  spad #(.DEPTH(1152), .DATA_W(8)) dut (.*);

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; re = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < 1152; i++) begin
      @(negedge clk);
      we = 1; waddr = 11'(i); wdata = 8'($urandom); model[i] = wdata;
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 1152; i += 7) begin
      re = 1; raddr = 11'(i); #1;
      checks++; if (rdata !== model[i]) begin failures++; $display("read %0d: %h != %h", i, rdata, model[i]); end
      re = 0; #1;
      if (model[i] != 0) begin checks++; if (rdata !== 8'h00) failures++; end
    end
    // overwrite one entry, neighbour unchanged
    @(negedge clk); we = 1; waddr = 11'd5; wdata = ~model[5]; model[5] = ~model[5];
    @(negedge clk); we = 0; re = 1; raddr = 11'd5; #1;
    checks++; if (rdata !== model[5]) failures++;
    raddr = 11'd6; #1; checks++; if (rdata !== model[6]) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
