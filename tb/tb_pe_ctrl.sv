// tb_pe_ctrl: runs the PE control for a few (n_entries, t_first, n_steps)
// settings and checks the full index/timestep sequence, the end-of-step
// cycles and that done arrives n_steps*(n_entries+1) cycles after start.
module tb_pe_ctrl;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic        rst_n, start, busy, mac_phase, step_end, done;
  logic [10:0] n_entries, idx;
  logic [2:0]  t_first, t;
  logic [3:0]  n_steps;

  pe_ctrl #(.DEPTH(1152), .T(8)) dut (.*);

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic run(input int n, input int tf, input int ns);
    int cyc;
    @(negedge clk);
    n_entries = 11'(n); t_first = 3'(tf); n_steps = 4'(ns); start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    for (int s = 0; s < ns; s++) begin
      for (int i = 0; i < n; i++) begin
        checks++;
        if (!(busy && mac_phase && !step_end && idx == 11'(i) && t == 3'(tf + s))) begin
          failures++; $display("n=%0d step %0d entry %0d: busy=%b mac=%b idx=%0d t=%0d", n, s, i, busy, mac_phase, idx, t);
        end
        @(negedge clk); cyc++;
      end
      checks++;
      if (!(step_end && !mac_phase && t == 3'(tf + s))) begin failures++; $display("no step_end"); end
      @(negedge clk); cyc++;
    end
    checks++;
    if (!(done && !busy)) begin failures++; $display("done missing"); end
    checks++;
    if (cyc - 1 != ns * (n + 1)) failures++;
    @(negedge clk);
    checks++; if (done) failures++;
  endtask

  initial begin
    rst_n = 0; start = 0; n_entries = 0; t_first = 0; n_steps = 0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    run(5, 0, 8);
    run(1, 3, 1);
    run(9, 2, 3);
    run(1152, 0, 2);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
