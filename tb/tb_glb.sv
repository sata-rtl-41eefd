// tb_glb: global buffer at the S-buffer size (4096 x 64 bit). Writes full
// words and single bytes, and checks the read data one cycle after re.
module tb_glb;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic re, we;
  logic [11:0] raddr, waddr;
  logic [63:0] rdata, wdata;
  logic [7:0]  wbe;
  logic [63:0] model [4096];

  glb #(.DEPTH(4096), .WORD_W(64)) dut (.*);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    re = 0; we = 0; raddr = 0; waddr = 0; wdata = 0; wbe = 0;
    for (int i = 0; i < 4096; i++) begin
      @(negedge clk); we = 1; waddr = 12'(i); wdata = {$urandom, $urandom}; wbe = '1; model[i] = wdata;
    end
    // byte writes
    for (int k = 0; k < 2000; k++) begin
      int a, b;
      a = int'($urandom % 4096); b = int'($urandom % 8);
      @(negedge clk); we = 1; waddr = 12'(a); wdata = {8{8'($urandom)}}; wbe = 8'(1 << b);
      model[a][8*b +: 8] = wdata[8*b +: 8];
    end
    @(negedge clk); we = 0;
    for (int i = 0; i < 4096; i++) begin
      re = 1; raddr = 12'(i);
      @(negedge clk);
      checks++;
      if (rdata !== model[i]) begin failures++; $display("word %0d: %h want %h", i, rdata, model[i]); end
    end
    re = 0; raddr = 12'd9; @(negedge clk);
    checks++; if (rdata !== model[4095]) failures++;   // holds without re
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
