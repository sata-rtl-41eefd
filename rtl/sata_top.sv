// sata_top: SATA, a training accelerator for spiking neural networks trained
// with backpropagation through time (BPTT).
//
// Four global buffers (W 144 KB, U 256 KB, dU 256 KB, S 32 KB), an array of
// 128 PEs for the three convolution stages and an array of 128 potential
// gradient units (PGUs). The top carries out the temporal weight-stationary
// dataflow: the filters of K output channels stay in the K PEs' filter spads
// while receptive fields of successive output positions are broadcast to
// all PEs, and each PE finishes all T timesteps of its output neuron before
// the next position is fetched.
//
// Work is given as commands (cmd_valid / cmd_ready, a sata_cmd_t). With
// K = n_units, N = n_entries (C*R*R), byte addresses "B" and 64-bit word
// addresses "w" into the buffers:
//
//   OP_LOAD_W  W.B[a + k*N + i]          -> filter spad i of PE k
//   OP_FWD     S.B[a + i]                -> input spad i (T spikes per byte);
//              run T timesteps;           U.w[b + k] <- U_t of PE k (byte t),
//                                         S.B[c + k] <- S_t of PE k (bit t)
//   OP_FWD_OUT as OP_FWD for the network's output layer: the neurons only
//              integrate (no leak, no spikes; S.B[c + k] is written as 0)
//   OP_BWD     for t = 0..T-1: dU.B[a + t*N + i] -> input spad i; run step t;
//              then                       dU.w[b + k] <- dH_t of PE k (byte t)
//   OP_WUP     S.B[a + i] -> input spad i; dU.w[b + k] -> PE k (its dU_t);
//              run T timesteps, dW accumulates in the psum spads
//   OP_WREAD   psum spad i of PE k -> W.B[c + k*N + i], psum cleared
//   OP_PGU     U.w[a + j], dU.w[b + j] (dH), S.B[c + j] -> PGU j;
//              run T steps;               dU.w[d + j] <- dU_t of PGU j
//
// The host side (DRAM and the processor that rearranges data between layers:
// im2col layout of receptive fields, transposed filters for OP_BWD, applying
// W -= lr*dW) reaches the buffers through host_* while the accelerator is
// idle; host reads return data one cycle after host_re.
//
// Timing: a buffer read costs one cycle of latency in the streaming loads,
// every PE run takes n_steps*(N+1)+1 cycles, a PGU pass T+1 cycles, and each
// write-back one cycle per PE/PGU. done pulses once when a command ends.
// stats counts accumulations done and elided, spikes fired, and dS
// computations done and elided by sparsity.
//
// Buffer sizes, PE/PGU counts, the dataflow, the three stages and the
// output layer that integrates without leak or spikes follow the
// paper. The command set, buffer layouts, word width and host port are this
// design's own: the paper describes no global controller.
module sata_top
  import sata_pkg::*;
#(
  parameter int unsigned NUM_PE      = 128,
  parameter int unsigned NUM_PGU     = 128,
  parameter int unsigned T           = T_DEF,
  parameter int unsigned DEPTH       = SPAD_DEPTH_DEF,
  parameter int unsigned W_WORDS     = 18432,  // 144 KB
  parameter int unsigned U_WORDS     = 32768,  // 256 KB
  parameter int unsigned DU_WORDS    = 32768,  // 256 KB
  parameter int unsigned S_WORDS     = 4096,   // 32 KB
  parameter int unsigned ACC_W       = ACC_W_DEF,
  parameter int unsigned FRAC        = FRAC_DEF,
  parameter int unsigned ALPHA_SHIFT = ALPHA_SHIFT_DEF,
  parameter int unsigned BETA_SHIFT  = BETA_SHIFT_DEF,
  parameter int          UTH         = UTH_DEF,
  parameter int          HALF_BETA   = HALF_BETA_DEF,
  localparam int unsigned WW         = 8 * T,
  localparam int unsigned NB         = T,
  localparam int unsigned LW         = $clog2(T),
  localparam int unsigned AW         = $clog2(DEPTH),
  localparam int unsigned TW         = $clog2(T),
  localparam int unsigned PSW        = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int unsigned GSW        = (NUM_PGU > 1) ? $clog2(NUM_PGU) : 1,
  localparam int unsigned HAW        = 20,
  localparam int unsigned MAXW       = (U_WORDS > DU_WORDS ? U_WORDS : DU_WORDS) > (W_WORDS > S_WORDS ? W_WORDS : S_WORDS)
                                     ? (U_WORDS > DU_WORDS ? U_WORDS : DU_WORDS) : (W_WORDS > S_WORDS ? W_WORDS : S_WORDS),
  localparam int unsigned HA         = $clog2(MAXW)
) (
  input  logic            clk,
  input  logic            rst_n,
  // commands
  input  logic            cmd_valid,
  output logic            cmd_ready,
  input  sata_cmd_t       cmd,
  output logic            busy,
  output logic            done,
  // host access to the global buffers (0 = W, 1 = U, 2 = dU, 3 = S)
  input  logic            host_we,
  input  logic [1:0]      host_wbuf,
  input  logic [HA-1:0]   host_waddr,
  input  logic [WW-1:0]   host_wdata,
  input  logic [NB-1:0]   host_wbe,
  input  logic            host_re,
  input  logic [1:0]      host_rbuf,
  input  logic [HA-1:0]   host_raddr,
  output logic [WW-1:0]   host_rdata,
  // activity counters
  output sata_stats_t     stats
);
  localparam int unsigned WA = $clog2(W_WORDS);
  localparam int unsigned UA = $clog2(U_WORDS);
  localparam int unsigned DA = $clog2(DU_WORDS);
  localparam int unsigned SA = $clog2(S_WORDS);

  typedef enum logic [3:0] {
    S_IDLE, S_LW, S_LIN, S_LDU, S_RUN, S_WAIT, S_WOUT, S_WREAD,
    S_PLOAD, S_PRUN, S_PWAIT, S_PWR, S_DONE
  } state_e;

  state_e    state;
  sata_cmd_t c;            // command being executed
  logic [TW:0] tcur;       // BWD timestep

  // ---------------- streaming counters ----------------
  logic [HAW-1:0] cnt, total, abase;
  logic [7:0]     ik;
  logic [AW-1:0]  ii;
  logic           issuing;
  logic           v_q;
  logic [7:0]     k_q;
  logic [AW-1:0]  i_q;
  logic [LW-1:0]  lane_q;
  logic [HAW-1:0] raddr_b;

  assign issuing = (cnt != total);
  assign raddr_b = abase + cnt;

  // ---------------- buffers ----------------
  logic          w_re, u_re, du_re, s_re;
  logic [WA-1:0] w_raddr;  logic [UA-1:0] u_raddr;
  logic [DA-1:0] du_raddr; logic [SA-1:0] s_raddr;
  logic [WW-1:0] w_rdata, u_rdata, du_rdata, s_rdata;
  logic          w_we, u_we, du_we, s_we;
  logic [WA-1:0] w_waddr;  logic [UA-1:0] u_waddr;
  logic [DA-1:0] du_waddr; logic [SA-1:0] s_waddr;
  logic [WW-1:0] w_wdata, u_wdata, du_wdata, s_wdata;
  logic [NB-1:0] w_wbe, u_wbe, du_wbe, s_wbe;

  glb #(.DEPTH(W_WORDS),  .WORD_W(WW)) u_w_buf  (.clk, .re(w_re),  .raddr(w_raddr),  .rdata(w_rdata),
    .we(w_we),  .waddr(w_waddr),  .wdata(w_wdata),  .wbe(w_wbe));
  glb #(.DEPTH(U_WORDS),  .WORD_W(WW)) u_u_buf  (.clk, .re(u_re),  .raddr(u_raddr),  .rdata(u_rdata),
    .we(u_we),  .waddr(u_waddr),  .wdata(u_wdata),  .wbe(u_wbe));
  glb #(.DEPTH(DU_WORDS), .WORD_W(WW)) u_du_buf (.clk, .re(du_re), .raddr(du_raddr), .rdata(du_rdata),
    .we(du_we), .waddr(du_waddr), .wdata(du_wdata), .wbe(du_wbe));
  glb #(.DEPTH(S_WORDS),  .WORD_W(WW)) u_s_buf  (.clk, .re(s_re),  .raddr(s_raddr),  .rdata(s_rdata),
    .we(s_we),  .waddr(s_waddr),  .wdata(s_wdata),  .wbe(s_wbe));

  // ---------------- PE and PGU arrays ----------------
  stage_e          mode;
  logic            pe_in_we, pe_w_we, pe_du_we, pe_start, pe_ps_re, pe_ps_clr;
  logic [AW-1:0]   pe_in_addr;
  logic [7:0]      pe_in_wdata;
  logic [PSW-1:0]  pe_sel;
  logic [7:0]      pe_ps_rdata;
  logic            pe_busy, pe_done;
  logic [WW-1:0]   pe_out_word;
  logic [T-1:0]    pe_out_spikes;
  logic [$clog2(NUM_PE+1)-1:0]  cnt_mac, cnt_gated, cnt_spike;
  logic [GSW-1:0]  pg_sel;
  logic            pg_load, pg_start, pg_busy, pg_done;
  logic [WW-1:0]   pg_du_word;
  logic [$clog2(NUM_PGU+1)-1:0] cnt_ds, cnt_skip;
  logic [7:0]      byte_q;   // byte selected from the word read last cycle

  pe_array #(
    .NUM_PE(NUM_PE), .DEPTH(DEPTH), .T(T), .ACC_W(ACC_W), .FRAC(FRAC),
    .ALPHA_SHIFT(ALPHA_SHIFT), .UTH(UTH)
  ) u_pe_array (
    .clk, .rst_n, .mode,
    .in_we(pe_in_we), .in_addr(pe_in_addr), .in_wdata(pe_in_wdata),
    .pe_sel, .w_we(pe_w_we), .w_addr(i_q), .w_wdata(byte_q),
    .du_we(pe_du_we), .du_wdata(du_rdata),
    .start(pe_start), .n_entries(c.n_entries[AW-1:0]),
    .t_first((c.op == OP_BWD) ? tcur[TW-1:0] : '0),
    .n_steps((c.op == OP_BWD) ? (TW+1)'(1) : (TW+1)'(T)),
    .ps_re(pe_ps_re), .ps_addr(ii), .ps_clr(pe_ps_clr), .ps_rdata(pe_ps_rdata),
    .busy(pe_busy), .done(pe_done), .out_word(pe_out_word), .out_spikes(pe_out_spikes),
    .cnt_mac, .cnt_gated, .cnt_spike
  );

  pgu_array #(
    .NUM_PGU(NUM_PGU), .T(T), .FRAC(FRAC), .ALPHA_SHIFT(ALPHA_SHIFT),
    .BETA_SHIFT(BETA_SHIFT), .UTH(UTH), .HALF_BETA(HALF_BETA)
  ) u_pgu_array (
    .clk, .rst_n, .sel(pg_sel), .load(pg_load), .u_word(u_rdata),
    .s_bits(s_rdata[8*lane_q +: T]), .dh_word(du_rdata), .start(pg_start),
    .busy(pg_busy), .done(pg_done), .du_word(pg_du_word), .cnt_ds, .cnt_skip
  );

  // ---------------- control ----------------
  logic idle;
  assign idle      = (state == S_IDLE);
  assign cmd_ready = idle;
  assign busy      = !idle;

  always_comb begin
    unique case (c.op)
      OP_FWD:           mode = STAGE_FWD;
      OP_FWD_OUT:       mode = STAGE_OUT;
      OP_BWD:           mode = STAGE_BWD;
      default:          mode = STAGE_WUP;
    endcase
  end

  // byte of the word read in the previous cycle
  always_comb begin
    logic [WW-1:0] src;
    unique case (state)
      S_LW:    src = w_rdata;
      S_LIN:   src = (c.op == OP_BWD) ? du_rdata : s_rdata;
      default: src = s_rdata;
    endcase
    byte_q = src[8*lane_q +: 8];
  end

  assign pe_in_we    = (state == S_LIN) && v_q;
  assign pe_in_addr  = i_q;
  assign pe_in_wdata = byte_q;
  assign pe_w_we     = (state == S_LW) && v_q;
  assign pe_du_we    = (state == S_LDU) && v_q;
  assign pe_sel      = PSW'((state == S_WOUT || state == S_WREAD) ? ik : k_q);
  assign pe_start    = (state == S_RUN);
  assign pe_ps_re    = (state == S_WREAD) && issuing;
  assign pe_ps_clr   = (state == S_WREAD) && issuing;
  assign pg_sel      = GSW'((state == S_PWR) ? ik : k_q);
  assign pg_load     = (state == S_PLOAD) && v_q;
  assign pg_start    = (state == S_PRUN);

  // buffer ports: host while idle, otherwise the sequencer
  always_comb begin
    logic [HAW-1:0] a_s, a_d;
    w_re = 1'b0; u_re = 1'b0; du_re = 1'b0; s_re = 1'b0;
    w_raddr = '0; u_raddr = '0; du_raddr = '0; s_raddr = '0;
    w_we = 1'b0; u_we = 1'b0; du_we = 1'b0; s_we = 1'b0;
    w_waddr = '0; u_waddr = '0; du_waddr = '0; s_waddr = '0;
    w_wdata = '0; u_wdata = '0; du_wdata = '0; s_wdata = '0;
    w_wbe = '0; u_wbe = '0; du_wbe = '0; s_wbe = '0;
    a_s = '0; a_d = '0;
    unique case (state)
      S_IDLE: begin
        unique case (host_rbuf)
          2'd0: begin w_re  = host_re; w_raddr  = WA'(host_raddr); end
          2'd1: begin u_re  = host_re; u_raddr  = UA'(host_raddr); end
          2'd2: begin du_re = host_re; du_raddr = DA'(host_raddr); end
          default: begin s_re = host_re; s_raddr = SA'(host_raddr); end
        endcase
        unique case (host_wbuf)
          2'd0: begin w_we  = host_we; w_waddr  = WA'(host_waddr); w_wdata  = host_wdata; w_wbe  = host_wbe; end
          2'd1: begin u_we  = host_we; u_waddr  = UA'(host_waddr); u_wdata  = host_wdata; u_wbe  = host_wbe; end
          2'd2: begin du_we = host_we; du_waddr = DA'(host_waddr); du_wdata = host_wdata; du_wbe = host_wbe; end
          default: begin s_we = host_we; s_waddr = SA'(host_waddr); s_wdata = host_wdata; s_wbe = host_wbe; end
        endcase
      end
      S_LW: begin
        w_re = issuing; w_raddr = WA'(raddr_b >> LW);
      end
      S_LIN: begin
        if (c.op == OP_BWD) begin du_re = issuing; du_raddr = DA'(raddr_b >> LW); end
        else begin s_re = issuing; s_raddr = SA'(raddr_b >> LW); end
      end
      S_LDU: begin
        du_re = issuing; du_raddr = DA'(raddr_b);
      end
      S_WOUT: begin
        if (c.op == OP_FWD || c.op == OP_FWD_OUT) begin
          a_s     = c.c_base + HAW'(ik);
          u_we    = issuing; u_waddr = UA'(c.b_base + HAW'(ik)); u_wdata = pe_out_word; u_wbe = '1;
          s_we    = issuing; s_waddr = SA'(a_s >> LW);
          s_wdata = {NB{8'(pe_out_spikes)}}; s_wbe = NB'(1) << a_s[LW-1:0];
        end else begin
          du_we = issuing; du_waddr = DA'(c.b_base + HAW'(ik)); du_wdata = pe_out_word; du_wbe = '1;
        end
      end
      S_WREAD: begin
        a_d     = c.c_base + cnt;
        w_we    = issuing; w_waddr = WA'(a_d >> LW);
        w_wdata = {NB{pe_ps_rdata}}; w_wbe = NB'(1) << a_d[LW-1:0];
      end
      S_PLOAD: begin
        a_s = c.c_base + cnt;
        u_re  = issuing; u_raddr  = UA'(c.a_base + cnt);
        du_re = issuing; du_raddr = DA'(c.b_base + cnt);
        s_re  = issuing; s_raddr  = SA'(a_s >> LW);
      end
      S_PWR: begin
        du_we = issuing; du_waddr = DA'(c.d_base + HAW'(ik)); du_wdata = pg_du_word; du_wbe = '1;
      end
      default: ;
    endcase
  end

  // host read data: remember which buffer was read
  logic [1:0] rbuf_q;
  always_ff @(posedge clk) if (host_re && idle) rbuf_q <= host_rbuf;
  always_comb begin
    unique case (rbuf_q)
      2'd0:    host_rdata = w_rdata;
      2'd1:    host_rdata = u_rdata;
      2'd2:    host_rdata = du_rdata;
      default: host_rdata = s_rdata;
    endcase
  end

  // ---------------- sequencer ----------------
  logic [HAW-1:0] n_ext, k_ext;
  assign n_ext = HAW'(c.n_entries);
  assign k_ext = HAW'(c.n_units);

  // start a new stream of `len` items read from byte/word address `base`
  task automatic begin_stream(input logic [HAW-1:0] base, input logic [HAW-1:0] len);
    abase <= base;
    total <= len;
    cnt   <= '0;
    ik    <= '0;
    ii    <= '0;
    v_q   <= 1'b0;
  endtask

  logic stream_end;
  assign stream_end = !issuing && !v_q;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state <= S_IDLE;
      c     <= '0;
      tcur  <= '0;
      cnt   <= '0;
      total <= '0;
      abase <= '0;
      ik    <= '0;
      ii    <= '0;
      v_q   <= 1'b0;
      k_q   <= '0;
      i_q   <= '0;
      lane_q <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      // issue side of a stream: one item per cycle, (ik, ii) = (outer, inner)
      if (state inside {S_LW, S_LIN, S_LDU, S_PLOAD, S_WREAD, S_WOUT, S_PWR}) begin
        v_q    <= issuing && (state inside {S_LW, S_LIN, S_LDU, S_PLOAD});
        k_q    <= ik;
        i_q    <= ii;
        lane_q <= raddr_b[LW-1:0];
        if (state == S_PLOAD) lane_q <= LW'(c.c_base + cnt);
        if (issuing) begin
          cnt <= cnt + 1'b1;
          if (state inside {S_LW, S_WREAD}) begin
            if (ii == c.n_entries[AW-1:0] - 1'b1) begin ii <= '0; ik <= ik + 1'b1; end
            else ii <= ii + 1'b1;
          end else if (state == S_LIN) begin
            ii <= ii + 1'b1;
          end else begin
            ik <= ik + 1'b1;
          end
        end
      end

      unique case (state)
        S_IDLE: if (cmd_valid) begin
          c    <= cmd;
          tcur <= '0;
          unique case (cmd.op)
            OP_LOAD_W: begin state <= S_LW;    begin_stream(cmd.a_base, HAW'(cmd.n_units) * HAW'(cmd.n_entries)); end
            OP_FWD,
            OP_FWD_OUT,
            OP_WUP:    begin state <= S_LIN;   begin_stream(cmd.a_base, HAW'(cmd.n_entries)); end
            OP_BWD:    begin state <= S_LIN;   begin_stream(cmd.a_base, HAW'(cmd.n_entries)); end
            OP_WREAD:  begin state <= S_WREAD; begin_stream('0, HAW'(cmd.n_units) * HAW'(cmd.n_entries)); end
            OP_PGU:    begin state <= S_PLOAD; begin_stream('0, HAW'(cmd.n_units)); end
            default:   state <= S_DONE;
          endcase
        end
        S_LW, S_WREAD: if (stream_end) state <= S_DONE;
        S_LIN: if (stream_end) begin
          if (c.op == OP_WUP) begin state <= S_LDU; begin_stream(c.b_base, k_ext); end
          else state <= S_RUN;
        end
        S_LDU: if (stream_end) state <= S_RUN;
        S_RUN:  state <= S_WAIT;
        S_WAIT: if (pe_done) begin
          if (c.op == OP_WUP) state <= S_DONE;
          else if (c.op == OP_BWD && tcur != (TW+1)'(T - 1)) begin
            tcur  <= tcur + 1'b1;
            state <= S_LIN;
            begin_stream(c.a_base + (HAW'(tcur) + 1'b1) * n_ext, n_ext);
          end else begin
            state <= S_WOUT;
            begin_stream('0, k_ext);
          end
        end
        S_WOUT: if (!issuing) state <= S_DONE;
        S_PLOAD: if (stream_end) state <= S_PRUN;
        S_PRUN:  state <= S_PWAIT;
        S_PWAIT: if (pg_done) begin state <= S_PWR; begin_stream('0, k_ext); end
        S_PWR:   if (!issuing) state <= S_DONE;
        S_DONE: begin state <= S_IDLE; done <= 1'b1; end
        default: state <= S_IDLE;
      endcase
    end
  end

  // ---------------- activity counters ----------------
  always_ff @(posedge clk) begin
    if (!rst_n) stats <= '0;
    else begin
      stats.mac       <= stats.mac       + 32'(cnt_mac);
      stats.mac_gated <= stats.mac_gated + 32'(cnt_gated);
      stats.spikes    <= stats.spikes    + 32'(cnt_spike);
      stats.ds        <= stats.ds        + 32'(cnt_ds);
      stats.ds_skip   <= stats.ds_skip   + 32'(cnt_skip);
    end
  end

  // ---------------- rules of the interfaces ----------------
  a_units_pe: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready && cmd.op != OP_PGU) |-> (cmd.n_units <= 8'(NUM_PE) || NUM_PE > 255));
  a_units_pgu: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready && cmd.op == OP_PGU) |-> (cmd.n_units <= 8'(NUM_PGU) || NUM_PGU > 255));
  a_idle_arrays: assert property (@(posedge clk) disable iff (!rst_n)
    idle |-> !(pe_busy || pg_busy));
  a_entries: assert property (@(posedge clk) disable iff (!rst_n)
    (cmd_valid && cmd_ready) |-> (cmd.n_entries <= 11'(DEPTH) && cmd.n_entries != 0));
endmodule
