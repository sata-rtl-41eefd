// tb_pgu: loads random neurons (potentials clustered around the threshold so
// that both masked and unmasked timesteps occur, random spikes and dH) into
// one PGU, runs it and compares dU_t for all t with the reference model, the
// dS computed/skipped counts and the run time of T + 1 cycles.
module tb_pgu;
  import sata_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, load, start, busy, done, st_ds, st_skip;
  logic [63:0] u_word, dh_word, du_word;
  logic [7:0]  s_bits;

  pgu dut (.*);

  int n_ds, n_skip;
  always @(posedge clk) begin n_ds += int'(st_ds); n_skip += int'(st_skip); end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] exp_w;
    int e_ds, e_skip, cyc;
    rst_n = 0; load = 0; start = 0; u_word = 0; dh_word = 0; s_bits = 0;
    n_ds = 0; n_skip = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int n = 0; n < 300; n++) begin
      for (int t = 0; t < 8; t++) begin
        u_word[8*t +: 8]  = 8'(int'($urandom % 80) - 30);
        dh_word[8*t +: 8] = (n % 5 == 0) ? 8'(int'($urandom % 256) - 128) : 8'(int'($urandom % 60) - 30);
      end
      s_bits = 8'($urandom);
      exp_w = pgu_model(u_word, s_bits, dh_word, e_ds, e_skip);
      @(negedge clk); load = 1; @(negedge clk); load = 0;
      n_ds = 0; n_skip = 0;
      start = 1; @(negedge clk); start = 0; cyc = 1;
      while (!done) begin @(negedge clk); cyc++; end
      checks++;
      if (du_word !== exp_w) begin
        failures++; $display("neuron %0d: %h want %h", n, du_word, exp_w);
      end
      checks++; if (n_ds != e_ds || n_skip != e_skip) begin failures++; $display("counts %0d/%0d want %0d/%0d", n_ds, n_skip, e_ds, e_skip); end
      checks++; if (cyc != 9) begin failures++; $display("cycles %0d", cyc); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
