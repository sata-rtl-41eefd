// pgu: potential gradient unit. Computes, for one neuron, the gradient of the
// membrane potential for every timestep, walking backwards in time:
//
//   a_t   = alpha * dU_{t+1}                        (dU_T = 0)
//   dS_t  = -a_t * U_t + dH_t                       only if mask_t = 1
//   dU_t  = (S_t ? 0 : a_t) + (mask_t ? dS_t / beta : 0)
//
// which is  dU_t = alpha*dU_{t+1}*(1-S_t) + dS_t*f'(U_t)  with the surrogate
// derivative f'(U) = 1/beta inside the window |U-Uth| < beta/2 and 0 outside.
// When mask_t = 0 (nabla-f sparsity) the U read, the multiplier and the adder
// of dS are gated and only the leak term remains.
//
// Interface: `load` (while idle) captures one neuron: U_t of all timesteps
// (u_word, byte t), its spikes (s_bits, bit t) and the gradient arriving
// from the next layer (dh_word, byte t). On load the U values go into a
// T-entry scratch pad and the mask generator writes one bit per timestep
// into the PGU's zero buffer. A start pulse then runs T cycles (t = T-1..0);
// du_word byte t holds dU_t once done pulses. st_ds / st_skip flag a dS
// computed or skipped in the current cycle.
//
// The datapath (alpha shift, negation, multiplier, adder with dH, beta
// shift, the S-controlled multiplexer with 0, mask generator and zero
// buffer) follows the paper. Q3.4 arithmetic, shift amounts (alpha ~ 0.9375,
// 1/beta ~ 0.5) and the 8-bit saturation of dS and dU are this design's.
module pgu
  import sata_pkg::*;
#(
  parameter int unsigned T           = T_DEF,
  parameter int unsigned FRAC        = FRAC_DEF,
  parameter int unsigned ALPHA_SHIFT = ALPHA_SHIFT_DEF,
  parameter int unsigned BETA_SHIFT  = BETA_SHIFT_DEF,
  parameter int          UTH         = UTH_DEF,
  parameter int          HALF_BETA   = HALF_BETA_DEF,
  localparam int unsigned TW         = $clog2(T)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           load,
  input  logic [8*T-1:0] u_word,
  input  logic [T-1:0]   s_bits,
  input  logic [8*T-1:0] dh_word,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [8*T-1:0] du_word,
  output logic           st_ds,
  output logic           st_skip
);
  logic [TW-1:0] t;
  logic          first, valid;

  pgu_ctrl #(.T(T)) u_ctrl (.clk, .rst_n, .start(start && !busy), .busy, .t, .first, .valid, .done);

  // U scratch pad, zero buffer (mask per timestep), spikes and dH
  logic [7:0]     u_spad [T];
  logic [T-1:0]   zbuf, s_reg, mask_new;
  logic [8*T-1:0] dh_reg;

  for (genvar i = 0; i < T; i++) begin : g_mask
    pgu_mask_gen #(.UTH(UTH), .HALF_BETA(HALF_BETA)) u_mg (
      .u(u_word[8*i +: 8]), .mask(mask_new[i])
    );
  end

  // datapath
  logic signed [7:0]  dnext, dnext_reg, a, u_t, dh_t, ds, du_t;
  logic signed [15:0] prod;
  logic signed [31:0] ds_full, keep, ds_term;
  logic               m;

  always_comb begin
    m       = zbuf[t];
    dnext   = first ? 8'sd0 : dnext_reg;
    a       = dnext - (dnext >>> ALPHA_SHIFT);
    u_t     = m ? $signed(u_spad[t]) : 8'sd0;             // gated U read
    dh_t    = m ? $signed(dh_reg[8*t +: 8]) : 8'sd0;      // gated dH read
    prod    = m ? (-16'(a)) * 16'(u_t) : 16'sd0;          // gated multiplier
    ds_full = 32'(prod >>> FRAC) + 32'(dh_t);
    ds      = sat8(ds_full);
    ds_term = m ? (32'(ds) >>> BETA_SHIFT) : 32'sd0;
    keep    = s_reg[t] ? 32'sd0 : 32'(a);
    du_t    = sat8(keep + ds_term);
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      zbuf      <= '0;
      s_reg     <= '0;
      dh_reg    <= '0;
      dnext_reg <= '0;
      du_word   <= '0;
    end else begin
      if (load && !busy) begin
        zbuf   <= mask_new;
        s_reg  <= s_bits;
        dh_reg <= dh_word;
      end
      if (valid) begin
        du_word[8*t +: 8] <= du_t;
        dnext_reg         <= du_t;
      end
    end
  end

  always_ff @(posedge clk) begin
    if (load && !busy)
      for (int i = 0; i < T; i++) u_spad[i] <= u_word[8*i +: 8];
  end

  assign st_ds   = valid && m;
  assign st_skip = valid && !m;

  a_no_load_busy: assert property (@(posedge clk) disable iff (!rst_n) busy |-> !load);
endmodule
