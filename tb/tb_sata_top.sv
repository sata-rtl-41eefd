// tb_sata_top: end-to-end test of the accelerator at reduced size (4 PEs,
// 4 PGUs, 36-entry receptive fields = 4 channels x 3x3, small buffers).
// It runs one training step of one convolution layer through the host port
// and the command interface:
//   load filters -> forward pass of P output positions (U, S written back)
//   -> the same first position as an output layer (no leak, no spikes)
//   -> PGU pass over every neuron (dU from U, S and a random dH)
//   -> backward convolution of one position (dH for all T)
//   -> weight-update accumulation over the P positions using the PGU's dU
//   -> readout of dW from the psum spads.
// Every value written back to the buffers is checked against the reference
// model, every command's latency against its cycle formula, and every
// mechanism (spike gating, zero-buffer gating in BWD, LIF firing and reset,
// nabla-f skipping in the PGU, saturation, the output-layer mode giving a
// result different from the LIF one) must have happened at least once.
module tb_sata_top;
  import sata_ref_pkg::*;
  import sata_pkg::*;
  localparam int K = 4, N = 36, T = 8, P = 3;
  localparam int HA = 10;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, cmd_valid, cmd_ready, busy, done;
  sata_cmd_t cmd;
  logic host_we, host_re;
  logic [1:0] host_wbuf, host_rbuf;
  logic [HA-1:0] host_waddr, host_raddr;
  logic [63:0] host_wdata, host_rdata;
  logic [7:0] host_wbe;
  sata_stats_t stats;

  sata_top #(.NUM_PE(K), .NUM_PGU(K), .DEPTH(64), .W_WORDS(512), .U_WORDS(1024),
             .DU_WORDS(1024), .S_WORDS(256)) dut (.*);

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- host helpers ----------------
  task automatic wr_byte(input int buf_id, input int baddr, input logic [7:0] b);
    @(negedge clk);
    host_we = 1; host_wbuf = 2'(buf_id); host_waddr = HA'(baddr >> 3);
    host_wdata = {8{b}}; host_wbe = 8'(1 << (baddr & 7));
    @(negedge clk); host_we = 0;
  endtask
  task automatic wr_word(input int buf_id, input int waddr, input logic [63:0] w);
    @(negedge clk);
    host_we = 1; host_wbuf = 2'(buf_id); host_waddr = HA'(waddr); host_wdata = w; host_wbe = '1;
    @(negedge clk); host_we = 0;
  endtask
  task automatic rd_word(input int buf_id, input int waddr, output logic [63:0] w);
    @(negedge clk); host_re = 1; host_rbuf = 2'(buf_id); host_raddr = HA'(waddr);
    @(negedge clk); host_re = 0; w = host_rdata;
  endtask
  task automatic rd_byte(input int buf_id, input int baddr, output logic [7:0] b);
    logic [63:0] w;
    rd_word(buf_id, baddr >> 3, w);
    b = w[8*(baddr & 7) +: 8];
  endtask
  task automatic run_cmd(input op_e op, input int n, input int k, input int a, input int b,
                         input int c, input int d, output int cyc);
    @(negedge clk);
    cmd_valid = 1; cmd = '0; cmd.op = op; cmd.n_entries = 11'(n); cmd.n_units = 8'(k);
    cmd.a_base = 20'(a); cmd.b_base = 20'(b); cmd.c_base = 20'(c); cmd.d_base = 20'(d);
    @(negedge clk); cmd_valid = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  // ---------------- model state ----------------
  logic [7:0]  w [K][N];
  logic [7:0]  xin [P][N];
  logic [63:0] u_exp [P][K];
  logic [7:0]  s_exp [P][K];
  logic [63:0] dh_in [P][K];
  logic [63:0] du_exp [P][K];
  int dw [K][N];

  // buffer layout used by this test
  localparam int W_B = 0, DW_B = 1024;         // W buffer bytes
  localparam int IN_B = 0, SOUT_B = 512;        // S buffer bytes
  localparam int U_W = 0;                       // U buffer words
  localparam int DH_W = 0, DU_W = 100, BWDH_W = 200, BWIN_B = 4096;  // dU buffer

  int n_fire, n_reset, n_sat, n_skip_ds, n_gate_fwd, n_gate_bwd, n_ds, n_out_diff;

  initial begin
    int cyc, u_c, ps, eu, acc, a, b, exp_cyc;
    bit es;
    logic [63:0] rw;
    logic [7:0] rb;
    logic [7:0] bx [T][N];
    sata_stats_t st0;
    rst_n = 0; cmd_valid = 0; cmd = '0; host_we = 0; host_re = 0; host_wbuf = 0; host_rbuf = 0;
    host_waddr = 0; host_raddr = 0; host_wdata = 0; host_wbe = 0;
    n_fire = 0; n_reset = 0; n_sat = 0; n_skip_ds = 0; n_gate_fwd = 0; n_gate_bwd = 0; n_ds = 0; n_out_diff = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // ---- filters ----
    for (int k = 0; k < K; k++)
      for (int i = 0; i < N; i++) begin
        w[k][i] = 8'(int'($urandom % 26) - 6 + (k == 0 ? 40 : 0));  // PE 0 saturates
        wr_byte(0, W_B + k * N + i, w[k][i]);
      end
    run_cmd(OP_LOAD_W, N, K, W_B, 0, 0, 0, cyc);
    checks++; if (cyc != K * N + 4) begin failures++; $display("LOAD_W took %0d", cyc); end

    // ---- forward, P positions ----
    for (int p = 0; p < P; p++) begin
      for (int i = 0; i < N; i++) begin
        xin[p][i] = 8'($urandom) & 8'($urandom) & 8'($urandom);
        wr_byte(3, IN_B + p * N + i, xin[p][i]);
      end
      st0 = stats;
      run_cmd(OP_FWD, N, K, IN_B + p * N, U_W + p * K, SOUT_B + p * K, 0, cyc);
      exp_cyc = (N + 2) + 1 + (T * (N + 1) + 1) + (K + 1) + 1 + 1;
      checks++; if (cyc != exp_cyc) begin failures++; $display("FWD took %0d, want %0d", cyc, exp_cyc); end
      n_gate_fwd += int'(stats.mac_gated - st0.mac_gated);
      for (int k = 0; k < K; k++) begin
        u_c = 0; u_exp[p][k] = '0; s_exp[p][k] = '0;
        for (int t = 0; t < T; t++) begin
          ps = 0;
          for (int i = 0; i < N; i++) if (xin[p][i][t]) ps += s8(w[k][i]);
          if (leak(u_c) + ps > 127) n_sat++;
          eu = clamp8(leak(u_c) + ps); es = eu > UTH_R;
          if (es) begin n_fire++; if (t < T - 1) n_reset++; end
          u_exp[p][k][8*t +: 8] = 8'(eu); s_exp[p][k][t] = es;
          u_c = es ? 0 : eu;
        end
        rd_word(1, U_W + p * K + k, rw);
        checks++; if (rw !== u_exp[p][k]) begin failures++; $display("U p%0d k%0d %h want %h", p, k, rw, u_exp[p][k]); end
        rd_byte(3, SOUT_B + p * K + k, rb);
        checks++; if (rb !== s_exp[p][k]) begin failures++; $display("S p%0d k%0d %h want %h", p, k, rb, s_exp[p][k]); end
      end
    end
    checks++; if (int'(stats.spikes) != n_fire) begin failures++; $display("spike count %0d want %0d", stats.spikes, n_fire); end

    // ---- output-layer forward (integrate only) of position 0 ----
    for (int k = 0; k < K; k++) wr_byte(3, SOUT_B + 64 + k, 8'hff);   // must become 0
    st0 = stats;
    run_cmd(OP_FWD_OUT, N, K, IN_B, U_W + 64, SOUT_B + 64, 0, cyc);
    checks++; if (cyc != exp_cyc) begin failures++; $display("FWD_OUT took %0d, want %0d", cyc, exp_cyc); end
    checks++; if (stats.spikes != st0.spikes) begin failures++; $display("output layer fired"); end
    for (int k = 0; k < K; k++) begin
      logic [63:0] e;
      u_c = 0;
      for (int t = 0; t < T; t++) begin
        ps = 0;
        for (int i = 0; i < N; i++) if (xin[0][i][t]) ps += s8(w[k][i]);
        u_c = clamp8(u_c + ps);
        e[8*t +: 8] = 8'(u_c);
      end
      if (e != u_exp[0][k]) n_out_diff++;
      rd_word(1, U_W + 64 + k, rw);
      checks++; if (rw !== e) begin failures++; $display("OUT U k%0d %h want %h", k, rw, e); end
      rd_byte(3, SOUT_B + 64 + k, rb);
      checks++; if (rb !== 8'h00) begin failures++; $display("OUT S k%0d %h", k, rb); end
    end

    // ---- PGU pass: one command per position (K neurons each) ----
    for (int p = 0; p < P; p++) begin
      for (int k = 0; k < K; k++) begin
        for (int t = 0; t < T; t++) dh_in[p][k][8*t +: 8] = 8'(int'($urandom % 60) - 30);
        wr_word(2, DH_W + p * K + k, dh_in[p][k]);
        du_exp[p][k] = pgu_model(u_exp[p][k], s_exp[p][k], dh_in[p][k], a, b);
        n_ds += a; n_skip_ds += b;
      end
      run_cmd(OP_PGU, N, K, U_W + p * K, DH_W + p * K, SOUT_B + p * K, DU_W + p * K, cyc);
      checks++; if (cyc != 2 * K + T + 7) begin failures++; $display("PGU took %0d", cyc); end
      for (int k = 0; k < K; k++) begin
        rd_word(2, DU_W + p * K + k, rw);
        checks++; if (rw !== du_exp[p][k]) begin failures++; $display("dU p%0d k%0d %h want %h", p, k, rw, du_exp[p][k]); end
      end
    end
    checks++; if (int'(stats.ds) != n_ds || int'(stats.ds_skip) != n_skip_ds) begin
      failures++; $display("ds counts %0d/%0d want %0d/%0d", stats.ds, stats.ds_skip, n_ds, n_skip_ds);
    end

    // ---- backward convolution of one position ----
    for (int t = 0; t < T; t++)
      for (int i = 0; i < N; i++) begin
        bx[t][i] = ($urandom % 2 != 0) ? 8'h00 : 8'(int'($urandom % 40) - 20);
        wr_byte(2, BWIN_B + t * N + i, bx[t][i]);
      end
    st0 = stats;
    run_cmd(OP_BWD, N, K, BWIN_B, BWDH_W, 0, 0, cyc);
    checks++; if (cyc != T * (2 * N + 5) + K + 3) begin failures++; $display("BWD took %0d", cyc); end
    n_gate_bwd = int'(stats.mac_gated - st0.mac_gated);
    for (int k = 0; k < K; k++) begin
      logic [63:0] e;
      for (int t = 0; t < T; t++) begin
        acc = 0;
        for (int i = 0; i < N; i++) acc += s8(bx[t][i]) * s8(w[k][i]);
        e[8*t +: 8] = 8'(clamp8(fdiv(acc, 4)));
      end
      rd_word(2, BWDH_W + k, rw);
      checks++; if (rw !== e) begin failures++; $display("dH k%0d %h want %h", k, rw, e); end
    end

    // ---- weight update over P positions, then dW readout ----
    for (int k = 0; k < K; k++) for (int i = 0; i < N; i++) dw[k][i] = 0;
    run_cmd(OP_WREAD, N, K, 0, 0, DW_B, 0, cyc);      // clear psum spads
    for (int p = 0; p < P; p++) begin
      run_cmd(OP_WUP, N, K, IN_B + p * N, DU_W + p * K, 0, 0, cyc);
      checks++; if (cyc != N + K + T * (N + 1) + 8) begin failures++; $display("WUP took %0d", cyc); end
      for (int k = 0; k < K; k++)
        for (int t = 0; t < T; t++)
          for (int i = 0; i < N; i++)
            if (xin[p][i][t]) dw[k][i] = clamp8(dw[k][i] + s8(du_exp[p][k][8*t +: 8]));
    end
    run_cmd(OP_WREAD, N, K, 0, 0, DW_B, 0, cyc);
    checks++; if (cyc != K * N + 3) begin failures++; $display("WREAD took %0d", cyc); end
    for (int k = 0; k < K; k++)
      for (int i = 0; i < N; i++) begin
        rd_byte(0, DW_B + k * N + i, rb);
        checks++; if (s8(rb) != dw[k][i]) begin failures++; $display("dW k%0d i%0d %0d want %0d", k, i, s8(rb), dw[k][i]); end
      end
    // filters are untouched by the readout
    rd_byte(0, W_B + 5, rb);
    checks++; if (rb !== w[0][5]) failures++;

    // ---- every mechanism must have happened ----
    $display("mechanisms: spikes=%0d resets=%0d saturations=%0d fwd_gated=%0d bwd_gated=%0d ds=%0d ds_skipped=%0d out_layer_differs=%0d",
             n_fire, n_reset, n_sat, n_gate_fwd, n_gate_bwd, n_ds, n_skip_ds, n_out_diff);
    checks++; if (n_fire == 0)     begin failures++; $display("no spike fired"); end
    checks++; if (n_reset == 0)    begin failures++; $display("no reset after spike"); end
    checks++; if (n_sat == 0)      begin failures++; $display("no saturation"); end
    checks++; if (n_gate_fwd == 0) begin failures++; $display("no spike gating"); end
    checks++; if (n_gate_bwd == 0) begin failures++; $display("no dU gating"); end
    checks++; if (n_ds == 0)       begin failures++; $display("no dS computed"); end
    checks++; if (n_skip_ds == 0)  begin failures++; $display("no nabla-f skip"); end
    checks++; if (n_out_diff == 0) begin failures++; $display("output layer never differed from LIF"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
