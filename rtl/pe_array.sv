// pe_array: the array of NUM_PE processing elements (128 by default, one per
// output channel of the widest VGG5 layer).
//
// All PEs run in lock step from one start pulse. The input spad write
// (the receptive field being processed) is broadcast to every PE; filter
// writes, dU loads and psum readout address one PE at a time through pe_sel,
// and out_word / out_spikes / ps_rdata return the selected PE's values
// combinationally. done and busy are taken from PE 0 (all PEs share the same
// schedule). cnt_mac / cnt_gated / cnt_spike count, per cycle, how many PEs
// performed an accumulation, had one elided by sparsity, or fired a spike.
// Broadcast of the receptive field follows the paper; the one-PE-at-a-time
// load and readout is this design's choice.
module pe_array
  import sata_pkg::*;
#(
  parameter int unsigned NUM_PE      = 128,
  parameter int unsigned DEPTH       = SPAD_DEPTH_DEF,
  parameter int unsigned T           = T_DEF,
  parameter int unsigned ACC_W       = ACC_W_DEF,
  parameter int unsigned FRAC        = FRAC_DEF,
  parameter int unsigned ALPHA_SHIFT = ALPHA_SHIFT_DEF,
  parameter int          UTH         = UTH_DEF,
  localparam int unsigned AW         = $clog2(DEPTH),
  localparam int unsigned TW         = $clog2(T),
  localparam int unsigned PSW        = (NUM_PE > 1) ? $clog2(NUM_PE) : 1,
  localparam int unsigned CW         = $clog2(NUM_PE + 1)
) (
  input  logic            clk,
  input  logic            rst_n,
  input  stage_e          mode,
  input  logic            in_we,
  input  logic [AW-1:0]   in_addr,
  input  logic [7:0]      in_wdata,
  input  logic [PSW-1:0]  pe_sel,
  input  logic            w_we,
  input  logic [AW-1:0]   w_addr,
  input  logic [7:0]      w_wdata,
  input  logic            du_we,
  input  logic [8*T-1:0]  du_wdata,
  input  logic            start,
  input  logic [AW-1:0]   n_entries,
  input  logic [TW-1:0]   t_first,
  input  logic [TW:0]     n_steps,
  input  logic            ps_re,
  input  logic [AW-1:0]   ps_addr,
  input  logic            ps_clr,
  output logic [7:0]      ps_rdata,
  output logic            busy,
  output logic            done,
  output logic [8*T-1:0]  out_word,
  output logic [T-1:0]    out_spikes,
  output logic [CW-1:0]   cnt_mac,
  output logic [CW-1:0]   cnt_gated,
  output logic [CW-1:0]   cnt_spike
);
  logic [7:0]     ps_rd   [NUM_PE];
  logic [8*T-1:0] o_word  [NUM_PE];
  logic [T-1:0]   o_spk   [NUM_PE];
  logic [NUM_PE-1:0] pe_busy, pe_done, s_mac, s_gated, s_spike;

  for (genvar k = 0; k < NUM_PE; k++) begin : g_pe
    logic sel;
    assign sel = (pe_sel == PSW'(k));
    pe #(
      .DEPTH(DEPTH), .T(T), .ACC_W(ACC_W), .FRAC(FRAC),
      .ALPHA_SHIFT(ALPHA_SHIFT), .UTH(UTH)
    ) u_pe (
      .clk, .rst_n, .mode,
      .in_we, .in_addr, .in_wdata,
      .w_we(w_we && sel), .w_addr, .w_wdata,
      .du_we(du_we && sel), .du_wdata,
      .start, .n_entries, .t_first, .n_steps,
      .ps_re(ps_re && sel), .ps_addr, .ps_clr(ps_clr && sel), .ps_rdata(ps_rd[k]),
      .busy(pe_busy[k]), .done(pe_done[k]),
      .out_word(o_word[k]), .out_spikes(o_spk[k]),
      .st_mac(s_mac[k]), .st_gated(s_gated[k]), .st_spike(s_spike[k])
    );
  end

  assign busy       = pe_busy[0];
  assign done       = pe_done[0];
  assign ps_rdata   = ps_rd[pe_sel];
  assign out_word   = o_word[pe_sel];
  assign out_spikes = o_spk[pe_sel];

  always_comb begin
    cnt_mac   = '0;
    cnt_gated = '0;
    cnt_spike = '0;
    for (int k = 0; k < NUM_PE; k++) begin
      cnt_mac   = cnt_mac   + CW'(s_mac[k]);
      cnt_gated = cnt_gated + CW'(s_gated[k]);
      cnt_spike = cnt_spike + CW'(s_spike[k]);
    end
  end

  // every PE follows the same schedule
  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    ((pe_busy == '0) || (pe_busy == '1)) && ((pe_done == '0) || (pe_done == '1)));
endmodule
