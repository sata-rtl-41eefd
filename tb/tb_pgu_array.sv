// tb_pgu_array: loads 8 PGUs with different neurons one per cycle, runs them
// together and reads every result back, comparing with the reference model
// and the summed dS computed/skipped counts.
module tb_pgu_array;
  import sata_ref_pkg::*;
  localparam int J = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, load, start, busy, done;
  logic [2:0]  sel;
  logic [63:0] u_word, dh_word, du_word;
  logic [7:0]  s_bits;
  logic [3:0]  cnt_ds, cnt_skip;

  pgu_array #(.NUM_PGU(J)) dut (.*);

  int n_ds, n_skip;
  always @(posedge clk) begin n_ds += int'(cnt_ds); n_skip += int'(cnt_skip); end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] exp_w [J];
    int e_ds, e_skip, a, b;
    rst_n = 0; load = 0; start = 0; sel = 0; u_word = 0; dh_word = 0; s_bits = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int rep = 0; rep < 4; rep++) begin
      e_ds = 0; e_skip = 0;
      for (int j = 0; j < J; j++) begin
        @(negedge clk);
        for (int t = 0; t < 8; t++) begin
          u_word[8*t +: 8]  = 8'(int'($urandom % 90) - 35);
          dh_word[8*t +: 8] = 8'(int'($urandom % 80) - 40);
        end
        s_bits = 8'($urandom);
        exp_w[j] = pgu_model(u_word, s_bits, dh_word, a, b);
        e_ds += a; e_skip += b;
        sel = 3'(j); load = 1;
      end
      @(negedge clk); load = 0; n_ds = 0; n_skip = 0;
      start = 1; @(negedge clk); start = 0;
      while (!done) @(negedge clk);
      checks++; if (n_ds != e_ds || n_skip != e_skip) begin failures++; $display("counts"); end
      for (int j = 0; j < J; j++) begin
        sel = 3'(j); #1;
        checks++;
        if (du_word !== exp_w[j]) begin failures++; $display("PGU %0d: %h want %h", j, du_word, exp_w[j]); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
