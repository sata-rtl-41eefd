// tb_pe_array: 8 PEs with different random filters receive one broadcast
// receptive field; checks every PE's U_t / S_t after FWD, its dH after one
// BWD step, the per-cycle activity counts summed over the array, and that
// filter writes reach only the selected PE.
module tb_pe_array;
  import sata_ref_pkg::*;
  import sata_pkg::*;
  localparam int K = 8, N = 40, T = 8;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n;
  stage_e mode;
  logic in_we, w_we, du_we, start, ps_re, ps_clr, busy, done;
  logic [10:0] in_addr, w_addr, ps_addr, n_entries;
  logic [7:0]  in_wdata, w_wdata, ps_rdata;
  logic [2:0]  pe_sel, t_first;
  logic [63:0] du_wdata, out_word;
  logic [3:0]  n_steps, cnt_mac, cnt_gated, cnt_spike;
  logic [7:0]  out_spikes;

  pe_array #(.NUM_PE(K)) dut (.*);

  logic [7:0] w [K][N];
  logic [7:0] x [N];
  int macs, gated;
  always @(posedge clk) begin macs += int'(cnt_mac); gated += int'(cnt_gated); end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic go(input stage_e m, input int tf, input int ns);
    @(negedge clk); mode = m; t_first = 3'(tf); n_steps = 4'(ns); n_entries = 11'(N); start = 1;
    @(negedge clk); start = 0;
    while (!done) @(negedge clk);
  endtask

  initial begin
    int u_c, ps, eu, zeros, acc;
    bit es;
    rst_n = 0; mode = STAGE_FWD; in_we = 0; w_we = 0; du_we = 0; start = 0; ps_re = 0; ps_clr = 0;
    in_addr = 0; w_addr = 0; ps_addr = 0; n_entries = 0; in_wdata = 0; w_wdata = 0; pe_sel = 0;
    t_first = 0; du_wdata = 0; n_steps = 0; macs = 0; gated = 0;
    repeat (3) @(negedge clk); rst_n = 1;
    for (int k = 0; k < K; k++)
      for (int i = 0; i < N; i++) begin
        w[k][i] = 8'(int'($urandom % 30) - 10);
        @(negedge clk); pe_sel = 3'(k); w_we = 1; w_addr = 11'(i); w_wdata = w[k][i];
      end
    @(negedge clk); w_we = 0;
    zeros = 0;
    for (int i = 0; i < N; i++) begin
      x[i] = 8'($urandom) & 8'($urandom);
      for (int t = 0; t < T; t++) zeros += int'(!x[i][t]);
      @(negedge clk); in_we = 1; in_addr = 11'(i); in_wdata = x[i];
    end
    @(negedge clk); in_we = 0;
    macs = 0; gated = 0;
    go(STAGE_FWD, 0, T);
    checks++; if (gated != K * zeros || macs != K * (T * N - zeros)) begin failures++; $display("counts %0d %0d", macs, gated); end
    for (int k = 0; k < K; k++) begin
      pe_sel = 3'(k); #1;
      u_c = 0;
      for (int t = 0; t < T; t++) begin
        ps = 0;
        for (int i = 0; i < N; i++) if (x[i][t]) ps += s8(w[k][i]);
        eu = clamp8(leak(u_c) + ps); es = eu > UTH_R;
        checks++;
        if (s8(out_word[8*t +: 8]) != eu || out_spikes[t] !== es) begin
          failures++; $display("PE %0d t=%0d U=%0d want %0d", k, t, s8(out_word[8*t +: 8]), eu);
        end
        u_c = es ? 0 : eu;
      end
    end
    // one BWD step at t = 3
    for (int i = 0; i < N; i++) begin
      x[i] = ($urandom % 3 == 0) ? 8'h00 : 8'(int'($urandom % 50) - 25);
      @(negedge clk); in_we = 1; in_addr = 11'(i); in_wdata = x[i];
    end
    @(negedge clk); in_we = 0;
    go(STAGE_BWD, 3, 1);
    for (int k = 0; k < K; k++) begin
      pe_sel = 3'(k); #1;
      acc = 0;
      for (int i = 0; i < N; i++) acc += s8(x[i]) * s8(w[k][i]);
      checks++;
      if (s8(out_word[31:24]) != clamp8(fdiv(acc, 4))) begin failures++; $display("PE %0d dH wrong", k); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
