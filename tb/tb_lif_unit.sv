// tb_lif_unit: checks the LIF update against the integer model for all
// carried potentials and a spread of input sums, including saturation,
// the threshold edge (U = 12 does not fire, 13 does) and reset after a spike.
// The same values are run again in integrate-only mode (output layer), where
// the model adds without leak and never fires. The unit is combinational, so
// each check applies inputs, waits 1 time unit and compares.
module tb_lif_unit;
  import sata_ref_pkg::*;
  int checks = 0, failures = 0;

  logic signed [27:0] psum;
  logic signed [7:0]  u_carry, u_t, u_next;
  logic               s_t;
  logic               integrate_only;

  lif_unit dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input int uc, input int ps, input bit io = 1'b0);
    int eu; bit es;
    u_carry = 8'(uc); psum = 28'(ps); integrate_only = io; #1;
    eu = clamp8((io ? uc : leak(uc)) + ps);
    es = !io && eu > UTH_R;
    checks++;
    if (int'(u_t) != eu || s_t !== es || int'(u_next) != (es ? 0 : eu)) begin
      failures++;
      $display("io=%b uc=%0d ps=%0d: u=%0d s=%b next=%0d, want %0d %b", io, uc, ps, u_t, s_t, u_next, eu, es);
    end
  endtask

  initial begin
    for (int uc = -128; uc < 128; uc++) begin
      check(uc, 0);
      check(uc, 5);
      check(uc, -37);
      check(uc, 300);
      check(uc, -300);
      check(uc, int'($urandom % 64) - 32);
    end
    check(0, 12);  // at threshold: no spike
    check(0, 13);  // above: spike and reset
    for (int uc = -128; uc < 128; uc += 3) begin
      check(uc, 0, 1'b1);
      check(uc, 40, 1'b1);   // far above threshold: still no spike
      check(uc, -300, 1'b1);
      check(uc, int'($urandom % 64) - 32, 1'b1);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
