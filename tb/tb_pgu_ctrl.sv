// tb_pgu_ctrl: checks that the PGU control walks t = 7 .. 0 in consecutive
// cycles with `first` only on t = 7, then pulses done once (T + 1 cycles).
module tb_pgu_ctrl;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;
  logic rst_n, start, busy, first, valid, done;
  logic [2:0] t;

  pgu_ctrl #(.T(8)) dut (.*);

  initial begin
    repeat (1000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    rst_n = 0; start = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 3; rep++) begin
      @(negedge clk); start = 1; @(negedge clk); start = 0;
      for (int e = 7; e >= 0; e--) begin
        checks++;
        if (!(busy && valid && t == 3'(e) && first == (e == 7) && !done)) begin
          failures++; $display("step %0d: busy=%b valid=%b t=%0d first=%b", e, busy, valid, t, first);
        end
        @(negedge clk);
      end
      checks++; if (!(done && !busy && !valid)) failures++;
      @(negedge clk);
      checks++; if (done || busy) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
