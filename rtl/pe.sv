// pe: processing element of the SATA array.
//
// A PE keeps the filters of one output channel stationary in its filter spad
// and computes one output neuron for all timesteps before moving on. The same
// datapath serves the three convolution stages of BPTT training, selected by
// `mode`:
//
//   FWD  Each input-spad entry holds the T spikes of one input position (bit t
//        = spike at timestep t). For timestep t the PE adds W[i] for every
//        entry whose spike bit is 1 (AND path); a 0 spike gates both the
//        filter-spad read and the accumulation. At the end of the timestep
//        the LIF unit turns the sum into U_t and S_t.
//   BWD  Each input-spad entry holds one 8-bit dU of the next layer for the
//        timestep being processed, and the filter spad holds the transposed
//        weights. The PE multiply-accumulates in[i]*W[i] (the multiplier is
//        used only in this stage); an entry whose zero-buffer bit is 0 gates
//        the filter read and the MAC. The sum, rescaled to Q3.4, is dH_t.
//   WUP  Input entries hold spikes as in FWD; the second operand is this PE's
//        own dU_t (loaded through du_we). For every entry whose spike bit is
//        1 the psum spad entry i accumulates dU_t, so after all timesteps and
//        output positions psum[i] = sum over t of dU_t * S_t[i] = dW[i].
//   OUT  Forward stage of the network's output layer: as FWD, but the LIF
//        unit only integrates (no leak, no spike, no reset).
//
// Interface: spads are written while the PE is idle (in_*, w_*, du_*); a
// start pulse with n_entries, t_first and n_steps runs the PE for
// n_steps*(n_entries+1) cycles and done pulses once at the end. out_word byte
// t holds U_t (FWD) or dH_t (BWD) and out_spikes bit t holds S_t. The psum
// spad is read out through ps_re/ps_addr and cleared with ps_clr.
// st_mac / st_gated / st_spike flag, per cycle, an accumulation done, an
// accumulation elided by sparsity, and a spike fired.
//
// The PE structure (three 128x9x8b spads, AND path plus multiplier into a
// mux and an adder, the shift-and-subtract leak, the threshold compare with
// reset-to-0 mux, zero-buffer gating) follows the paper. The paper draws
// the adder's feedback through the psum spad in every stage; here FWD and
// BWD keep the running sum of one neuron in an ACC_W-bit register, so a
// 1152-term sum cannot overflow 8 bits before the LIF step, and only WUP
// accumulates in the psum spad, one entry per weight. How WUP routes dU,
// the Q3.4 scaling, the saturation and one entry per cycle are this
// design's choices.
module pe
  import sata_pkg::*;
#(
  parameter int unsigned DEPTH       = SPAD_DEPTH_DEF,
  parameter int unsigned T           = T_DEF,
  parameter int unsigned ACC_W       = ACC_W_DEF,
  parameter int unsigned FRAC        = FRAC_DEF,
  parameter int unsigned ALPHA_SHIFT = ALPHA_SHIFT_DEF,
  parameter int          UTH         = UTH_DEF,
  localparam int unsigned AW         = $clog2(DEPTH),
  localparam int unsigned TW         = $clog2(T)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  stage_e          mode,
  // input spad (broadcast to all PEs)
  input  logic            in_we,
  input  logic [AW-1:0]   in_addr,
  input  logic [7:0]      in_wdata,
  // filter spad
  input  logic            w_we,
  input  logic [AW-1:0]   w_addr,
  input  logic [7:0]      w_wdata,
  // dU of this PE's output neuron, all timesteps (WUP)
  input  logic            du_we,
  input  logic [8*T-1:0]  du_wdata,
  // run request
  input  logic            start,
  input  logic [AW-1:0]   n_entries,
  input  logic [TW-1:0]   t_first,
  input  logic [TW:0]     n_steps,
  // psum spad readout
  input  logic            ps_re,
  input  logic [AW-1:0]   ps_addr,
  input  logic            ps_clr,
  output logic [7:0]      ps_rdata,
  // status and results
  output logic            busy,
  output logic            done,
  output logic [8*T-1:0]  out_word,
  output logic [T-1:0]    out_spikes,
  output logic            st_mac,
  output logic            st_gated,
  output logic            st_spike
);
  logic [AW-1:0] idx;
  logic [TW-1:0] t;
  logic          mac_phase, step_end;

  pe_ctrl #(.DEPTH(DEPTH), .T(T)) u_ctrl (
    .clk, .rst_n, .start, .n_entries, .t_first, .n_steps,
    .busy, .idx, .t, .mac_phase, .step_end, .done
  );

  // ---------------- scratch pads and zero buffer ----------------
  logic [7:0] in_data, w_data, ps_data;
  logic       zmask;
  logic       w_re, ps_we;
  logic [AW-1:0] ps_waddr, ps_raddr;
  logic [7:0]    ps_wdata;

  spad #(.DEPTH(DEPTH), .DATA_W(8)) u_in_spad (
    .clk, .we(in_we), .waddr(in_addr), .wdata(in_wdata),
    .re(mac_phase), .raddr(idx), .rdata(in_data)
  );
  spad #(.DEPTH(DEPTH), .DATA_W(8)) u_w_spad (
    .clk, .we(w_we), .waddr(w_addr), .wdata(w_wdata),
    .re(w_re), .raddr(idx), .rdata(w_data)
  );
  spad #(.DEPTH(DEPTH), .DATA_W(8)) u_ps_spad (
    .clk, .we(ps_we), .waddr(ps_waddr), .wdata(ps_wdata),
    .re(1'b1), .raddr(ps_raddr), .rdata(ps_data)
  );
  zero_buffer #(.DEPTH(DEPTH), .DATA_W(8)) u_zbuf (
    .clk, .we(in_we), .waddr(in_addr), .wdata(in_wdata),
    .raddr(idx), .mask(zmask)
  );

  // ---------------- sparsity gating ----------------
  logic spike_bit, gate_open, active;
  logic signed [7:0] du_t;
  logic [8*T-1:0]    du_reg;

  logic fwd;   // a forward stage (hidden or output layer)
  assign fwd       = (mode == STAGE_FWD) || (mode == STAGE_OUT);
  assign spike_bit = in_data[t];
  assign gate_open = (mode == STAGE_BWD) ? zmask : spike_bit;
  assign active    = mac_phase && gate_open;
  assign w_re      = active && (mode != STAGE_WUP);
  assign du_t      = du_reg[8*t +: 8];

  // ---------------- arithmetic ----------------
  logic signed [7:0]  and_b, and_out;
  logic signed [15:0] product;
  logic signed [ACC_W-1:0] operand, acc;

  always_comb begin
    and_b   = (mode == STAGE_WUP) ? du_t : $signed(w_data);
    and_out = spike_bit ? and_b : 8'sd0;
    // the multiplier sees zero operands outside the backward stage
    product = (mode == STAGE_BWD && active) ? $signed(in_data) * $signed(w_data) : 16'sd0;
    operand = (mode == STAGE_BWD) ? ACC_W'(product) : ACC_W'(and_out);
  end

  // psum spad: WUP read-modify-write at idx, otherwise readout / clear port
  always_comb begin
    ps_raddr = (mode == STAGE_WUP && mac_phase) ? idx : ps_addr;
    ps_we    = 1'b0;
    ps_waddr = ps_addr;
    ps_wdata = '0;
    if (mode == STAGE_WUP && active) begin
      ps_we    = 1'b1;
      ps_waddr = idx;
      ps_wdata = sat8(32'($signed(ps_data)) + 32'(du_t));
    end else if (ps_clr && !busy) begin
      ps_we    = 1'b1;
      ps_waddr = ps_addr;
      ps_wdata = '0;
    end
  end
  assign ps_rdata = ps_re ? ps_data : '0;

  // ---------------- LIF ----------------
  logic signed [7:0] u_carry, lif_u, lif_u_next;
  logic              lif_s;

  lif_unit #(.ACC_W(ACC_W), .ALPHA_SHIFT(ALPHA_SHIFT), .UTH(UTH)) u_lif (
    .psum(acc), .u_carry, .integrate_only(mode == STAGE_OUT),
    .u_t(lif_u), .s_t(lif_s), .u_next(lif_u_next)
  );

  logic signed [ACC_W-1:0] acc_scaled;
  assign acc_scaled = acc >>> FRAC;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc        <= '0;
      u_carry    <= '0;
      du_reg     <= '0;
      out_word   <= '0;
      out_spikes <= '0;
    end else begin
      if (du_we && !busy) du_reg <= du_wdata;
      if (start && !busy) begin
        acc <= '0;
        if (fwd) u_carry <= '0;
      end else if (active && mode != STAGE_WUP) begin
        acc <= acc + operand;
      end else if (step_end) begin
        acc <= '0;
        if (fwd) begin
          out_word[8*t +: 8] <= lif_u;
          out_spikes[t]      <= lif_s;
          u_carry            <= lif_u_next;
        end else if (mode == STAGE_BWD) begin
          out_word[8*t +: 8] <= sat8(32'(acc_scaled));
        end
      end
    end
  end

  assign st_mac   = active;
  assign st_gated = mac_phase && !gate_open;
  assign st_spike = step_end && fwd && lif_s;

  // spads and the dU register may only be written while the PE is idle
  a_no_write_busy: assert property (@(posedge clk) disable iff (!rst_n)
    busy |-> !(w_we || in_we || du_we));
endmodule
