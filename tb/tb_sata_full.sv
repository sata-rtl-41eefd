// tb_sata_full: the accelerator at its default size (128 PEs, 128 PGUs,
// 1152-entry spads, 144/256/256/32 KB buffers). One complete layer operation
// at full width: the filters of 128 output channels x 128 input channels x
// 3x3 are loaded, one output position is computed for all 8 timesteps, and
// the 128 resulting neurons go through a PGU pass. Then the backward
// convolution runs on 8 x 1152 random dU values, the weight update uses the
// PGU's dU with the forward input spikes, and all 147456 dW bytes are read
// back. Every U word, spike byte, dU word, dH word and dW byte is checked
// against the reference model, and every command's latency against its
// cycle formula.
module tb_sata_full;
  import sata_ref_pkg::*;
  import sata_pkg::*;
  localparam int K = 128, N = 1152, T = 8;

  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  logic rst_n, cmd_valid, cmd_ready, busy, done;
  sata_cmd_t cmd;
  logic host_we, host_re;
  logic [1:0] host_wbuf, host_rbuf;
  logic [14:0] host_waddr, host_raddr;
  logic [63:0] host_wdata, host_rdata;
  logic [7:0] host_wbe;
  sata_stats_t stats;

  sata_top dut (.*);

  initial begin
    repeat (3000000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic wr_word(input int buf_id, input int waddr, input logic [63:0] w);
    @(negedge clk);
    host_we = 1; host_wbuf = 2'(buf_id); host_waddr = 15'(waddr); host_wdata = w; host_wbe = '1;
  endtask
  task automatic rd_word(input int buf_id, input int waddr, output logic [63:0] w);
    @(negedge clk); host_we = 0; host_re = 1; host_rbuf = 2'(buf_id); host_raddr = 15'(waddr);
    @(negedge clk); host_re = 0; w = host_rdata;
  endtask
  task automatic run_cmd(input op_e op, input int n, input int k, input int a, input int b,
                         input int c, input int d, output int cyc);
    @(negedge clk);
    host_we = 0;
    cmd_valid = 1; cmd = '0; cmd.op = op; cmd.n_entries = 11'(n); cmd.n_units = 8'(k);
    cmd.a_base = 20'(a); cmd.b_base = 20'(b); cmd.c_base = 20'(c); cmd.d_base = 20'(d);
    @(negedge clk); cmd_valid = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
  endtask

  logic [7:0] w [K][N];
  logic [7:0] x [N];
  logic [7:0] bx [T][N];
  localparam int BW_W = 20000;   // dU buffer word of the backward input

  initial begin
    int cyc, u_c, ps, eu, a, b, nsp, acc;
    bit es;
    logic [63:0] rw, word, u_e [K], dh [K], du_e [K];
    logic [7:0] s_e [K];
    rst_n = 0; cmd_valid = 0; cmd = '0; host_we = 0; host_re = 0; host_wbuf = 0; host_rbuf = 0;
    host_waddr = 0; host_raddr = 0; host_wdata = 0; host_wbe = 0;
    repeat (3) @(negedge clk); rst_n = 1;

    // filters, written as 64-bit words into the W buffer (byte k*N + i)
    for (int k = 0; k < K; k++)
      for (int i = 0; i < N; i++) w[k][i] = 8'(int'($urandom % 5) - 2);
    for (int wa = 0; wa < K * N / 8; wa++) begin
      for (int j = 0; j < 8; j++) word[8*j +: 8] = w[(wa * 8 + j) / N][(wa * 8 + j) % N];
      wr_word(0, wa, word);
    end
    // receptive field: 1152 spike bytes, about 6% of spikes set
    for (int i = 0; i < N; i++)
      for (int t = 0; t < T; t++) x[i][t] = ($urandom % 16 == 0);
    for (int wa = 0; wa < N / 8; wa++) begin
      for (int j = 0; j < 8; j++) word[8*j +: 8] = x[wa * 8 + j];
      wr_word(3, wa, word);
    end

    run_cmd(OP_LOAD_W, N, K, 0, 0, 0, 0, cyc);
    checks++; if (cyc != K * N + 4) begin failures++; $display("LOAD_W took %0d", cyc); end
    run_cmd(OP_FWD, N, K, 0, 0, 2048, 0, cyc);
    checks++;
    if (cyc != (N + 2) + 1 + (T * (N + 1) + 1) + (K + 1) + 2) begin failures++; $display("FWD took %0d", cyc); end

    nsp = 0;
    for (int k = 0; k < K; k++) begin
      u_c = 0; u_e[k] = '0; s_e[k] = '0;
      for (int t = 0; t < T; t++) begin
        ps = 0;
        for (int i = 0; i < N; i++) if (x[i][t]) ps += s8(w[k][i]);
        eu = clamp8(leak(u_c) + ps); es = eu > UTH_R;
        nsp += int'(es);
        u_e[k][8*t +: 8] = 8'(eu); s_e[k][t] = es;
        u_c = es ? 0 : eu;
      end
      rd_word(1, k, rw);
      checks++; if (rw !== u_e[k]) begin failures++; $display("U k%0d %h want %h", k, rw, u_e[k]); end
    end
    for (int wa = 0; wa < K / 8; wa++) begin
      rd_word(3, 2048 / 8 + wa, rw);
      for (int j = 0; j < 8; j++) begin
        checks++; if (rw[8*j +: 8] !== s_e[wa * 8 + j]) begin failures++; $display("S k%0d", wa * 8 + j); end
      end
    end
    checks++; if (int'(stats.spikes) != nsp) failures++;

    // PGU pass over the 128 neurons with a random dH
    for (int k = 0; k < K; k++) begin
      for (int t = 0; t < T; t++) dh[k][8*t +: 8] = 8'(int'($urandom % 60) - 30);
      wr_word(2, k, dh[k]);
    end
    run_cmd(OP_PGU, N, K, 0, 0, 2048, 1000, cyc);
    checks++; if (cyc != 2 * K + T + 7) begin failures++; $display("PGU took %0d", cyc); end
    for (int k = 0; k < K; k++) begin
      rd_word(2, 1000 + k, rw);
      checks++;
      du_e[k] = pgu_model(u_e[k], s_e[k], dh[k], a, b);
      if (rw !== du_e[k]) begin failures++; $display("dU k%0d", k); end
    end

    // backward convolution: 8 timesteps of 1152 dU bytes (about half zero)
    // against the same filters, written at dU word BW_W on
    for (int wa = 0; wa < T * N / 8; wa++) begin
      for (int j = 0; j < 8; j++) begin
        bx[(wa * 8 + j) / N][(wa * 8 + j) % N] = ($urandom % 2 != 0) ? 8'h00 : 8'(int'($urandom % 40) - 20);
        word[8*j +: 8] = bx[(wa * 8 + j) / N][(wa * 8 + j) % N];
      end
      wr_word(2, BW_W + wa, word);
    end
    run_cmd(OP_BWD, N, K, BW_W * 8, 3000, 0, 0, cyc);
    checks++; if (cyc != T * (2 * N + 5) + K + 3) begin failures++; $display("BWD took %0d", cyc); end
    for (int k = 0; k < K; k++) begin
      for (int t = 0; t < T; t++) begin
        acc = 0;
        for (int i = 0; i < N; i++) acc += s8(bx[t][i]) * s8(w[k][i]);
        word[8*t +: 8] = 8'(clamp8(fdiv(acc, 4)));
      end
      rd_word(2, 3000 + k, rw);
      checks++; if (rw !== word) begin failures++; $display("dH k%0d %h want %h", k, rw, word); end
    end

    // weight update with the PGU's dU and the forward spikes, then dW
    // readout over the whole W buffer (the filters stay in the spads)
    run_cmd(OP_WREAD, N, K, 0, 0, 0, 0, cyc);          // clear psum spads
    checks++; if (cyc != K * N + 3) begin failures++; $display("WREAD took %0d", cyc); end
    run_cmd(OP_WUP, N, K, 0, 1000, 0, 0, cyc);
    checks++; if (cyc != N + K + T * (N + 1) + 8) begin failures++; $display("WUP took %0d", cyc); end
    run_cmd(OP_WREAD, N, K, 0, 0, 0, 0, cyc);
    for (int wa = 0; wa < K * N / 8; wa++) begin
      rd_word(0, wa, rw);
      for (int j = 0; j < 8; j++) begin
        int k, i, d;
        k = (wa * 8 + j) / N; i = (wa * 8 + j) % N; d = 0;
        for (int t = 0; t < T; t++) if (x[i][t]) d = clamp8(d + s8(du_e[k][8*t +: 8]));
        checks++;
        if (s8(rw[8*j +: 8]) != d) begin
          failures++;
          if (failures < 10) $display("dW k%0d i%0d %0d want %0d", k, i, s8(rw[8*j +: 8]), d);
        end
      end
    end
    $display("spikes=%0d macs=%0d gated=%0d ds=%0d ds_skipped=%0d", nsp, stats.mac, stats.mac_gated, stats.ds, stats.ds_skip);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
