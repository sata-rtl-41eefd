// tb_pe: one PE at full spad depth. Loads random filters and runs
//   FWD with random spike bytes (about 10% of spikes set) and checks U_t,
//       S_t against the LIF reference, the run time T*(N+1)+1 and that
//       exactly the zero spikes were gated;
//   OUT (output layer) on the same inputs and checks the non-leaky sums,
//       that no spike fires, and the same run time;
//   BWD for every timestep with random dU (half zero) and checks dH_t and
//       the gating by the zero buffer;
//   WUP over two output positions and checks the psum spad (dW), then its
//       readout-and-clear.
module tb_pe;
  import sata_ref_pkg::*;
  import sata_pkg::*;
  localparam int N = 300;      // entries per receptive field in this test
  localparam int T = 8;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  stage_e mode;
  logic in_we, w_we, du_we, start, ps_re, ps_clr;
  logic [10:0] in_addr, w_addr, ps_addr, n_entries;
  logic [7:0] in_wdata, w_wdata, ps_rdata;
  logic [63:0] du_wdata, out_word;
  logic [2:0] t_first;
  logic [3:0] n_steps;
  logic busy, done, st_mac, st_gated, st_spike;
  logic [7:0] out_spikes;

  pe dut (.*);

  logic [7:0] w [N];
  logic [7:0] x [N];
  int macs, gated, spikes;
  always @(posedge clk) begin
    macs   += int'(st_mac);
    gated  += int'(st_gated);
    spikes += int'(st_spike);
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic load_in();
    for (int i = 0; i < N; i++) begin
      @(negedge clk); in_we = 1; in_addr = 11'(i); in_wdata = x[i];
    end
    @(negedge clk); in_we = 0;
  endtask

  task automatic run(input stage_e m, input int tf, input int ns, output int cyc);
    @(negedge clk);
    mode = m; t_first = 3'(tf); n_steps = 4'(ns); n_entries = 11'(N); start = 1;
    @(negedge clk); start = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  initial begin
    int cyc, u_c, ps, eu, exp_gated, acc;
    bit es;
    int dw [N];
    logic [63:0] du_v;
    rst_n = 0; mode = STAGE_FWD; in_we = 0; w_we = 0; du_we = 0; start = 0;
    ps_re = 0; ps_clr = 0; in_addr = 0; w_addr = 0; ps_addr = 0; in_wdata = 0;
    w_wdata = 0; du_wdata = 0; t_first = 0; n_steps = 0; n_entries = 0;
    macs = 0; gated = 0; spikes = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    // clear psum spad
    for (int i = 0; i < N; i++) begin @(negedge clk); ps_clr = 1; ps_addr = 11'(i); end
    @(negedge clk); ps_clr = 0;
    // filters
    for (int i = 0; i < N; i++) begin
      w[i] = 8'(int'($urandom % 24) - 8);
      @(negedge clk); w_we = 1; w_addr = 11'(i); w_wdata = w[i];
    end
    @(negedge clk); w_we = 0;

    // ---------------- FWD ----------------
    exp_gated = 0;
    for (int i = 0; i < N; i++) begin
      for (int t = 0; t < T; t++) x[i][t] = ($urandom % 10 == 0);
      for (int t = 0; t < T; t++) exp_gated += int'(!x[i][t]);
    end
    load_in();
    macs = 0; gated = 0; spikes = 0;
    run(STAGE_FWD, 0, T, cyc);
    checks++; if (cyc != T * (N + 1) + 1) begin failures++; $display("FWD cycles %0d", cyc); end
    checks++; if (gated != exp_gated || macs != T * N - exp_gated) begin failures++; $display("gating %0d/%0d", gated, exp_gated); end
    u_c = 0;
    begin
      int nsp; nsp = 0;
      for (int t = 0; t < T; t++) begin
        ps = 0;
        for (int i = 0; i < N; i++) if (x[i][t]) ps += s8(w[i]);
        eu = clamp8(leak(u_c) + ps);
        es = eu > UTH_R;
        nsp += int'(es);
        checks++;
        if (s8(out_word[8*t +: 8]) != eu || out_spikes[t] !== es) begin
          failures++; $display("FWD t=%0d U=%0d S=%b want %0d %b", t, s8(out_word[8*t +: 8]), out_spikes[t], eu, es);
        end
        u_c = es ? 0 : eu;
      end
      checks++; if (spikes != nsp) failures++;
    end

    // ---------------- OUT (output layer: integrate only) ----------------
    spikes = 0;
    run(STAGE_OUT, 0, T, cyc);
    checks++; if (cyc != T * (N + 1) + 1) begin failures++; $display("OUT cycles %0d", cyc); end
    u_c = 0;
    for (int t = 0; t < T; t++) begin
      ps = 0;
      for (int i = 0; i < N; i++) if (x[i][t]) ps += s8(w[i]);
      eu = clamp8(u_c + ps);
      checks++;
      if (s8(out_word[8*t +: 8]) != eu || out_spikes[t] !== 1'b0) begin
        failures++; $display("OUT t=%0d U=%0d S=%b want %0d 0", t, s8(out_word[8*t +: 8]), out_spikes[t], eu);
      end
      u_c = eu;
    end
    checks++; if (spikes != 0) begin failures++; $display("OUT fired %0d spikes", spikes); end

    // ---------------- BWD ----------------
    for (int t = 0; t < T; t++) begin
      exp_gated = 0; acc = 0;
      for (int i = 0; i < N; i++) begin
        x[i] = ($urandom % 2 != 0) ? 8'h00 : 8'(int'($urandom % 64) - 32);
        exp_gated += int'(x[i] == 0);
        acc += s8(x[i]) * s8(w[i]);
      end
      load_in();
      macs = 0; gated = 0;
      run(STAGE_BWD, t, 1, cyc);
      checks++; if (cyc != N + 2) begin failures++; $display("BWD cycles %0d", cyc); end
      checks++; if (gated != exp_gated || macs != N - exp_gated) begin failures++; $display("BWD gating"); end
      checks++;
      if (s8(out_word[8*t +: 8]) != clamp8(fdiv(acc, 4))) begin
        failures++; $display("BWD t=%0d dH=%0d want %0d", t, s8(out_word[8*t +: 8]), clamp8(fdiv(acc, 4)));
      end
    end

    // ---------------- WUP ----------------
    for (int i = 0; i < N; i++) dw[i] = 0;
    for (int pos = 0; pos < 2; pos++) begin
      for (int i = 0; i < N; i++) for (int t = 0; t < T; t++) x[i][t] = ($urandom % 4 == 0);
      for (int t = 0; t < T; t++) du_v[8*t +: 8] = 8'(int'($urandom % 40) - 20);
      load_in();
      @(negedge clk); du_we = 1; du_wdata = du_v; @(negedge clk); du_we = 0;
      run(STAGE_WUP, 0, T, cyc);
      for (int t = 0; t < T; t++)
        for (int i = 0; i < N; i++)
          if (x[i][t]) dw[i] = clamp8(dw[i] + s8(du_v[8*t +: 8]));
    end
    for (int i = 0; i < N; i++) begin
      @(negedge clk); ps_re = 1; ps_addr = 11'(i); #1;
      checks++;
      if (s8(ps_rdata) != dw[i]) begin failures++; $display("dW %0d: %0d want %0d", i, s8(ps_rdata), dw[i]); end
      ps_clr = 1;
    end
    @(negedge clk); ps_clr = 0; ps_addr = 11'd7; #1;
    checks++; if (ps_rdata != 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
