// pgu_array: NUM_PGU potential gradient units (128 by default).
//
// Neurons are loaded into the PGUs one per cycle (load with sel), all PGUs
// then run together from one start pulse (T cycles), and the results are read
// back one per cycle through sel/du_word. busy and done come from PGU 0; a
// PGU that was not loaded computes on whatever it held and its result is
// simply not read. cnt_ds / cnt_skip count, per cycle, how many PGUs
// computed or skipped dS. The count of 128 follows the paper; the serial
// load/readout is this design's choice.
module pgu_array
  import sata_pkg::*;
#(
  parameter int unsigned NUM_PGU     = 128,
  parameter int unsigned T           = T_DEF,
  parameter int unsigned FRAC        = FRAC_DEF,
  parameter int unsigned ALPHA_SHIFT = ALPHA_SHIFT_DEF,
  parameter int unsigned BETA_SHIFT  = BETA_SHIFT_DEF,
  parameter int          UTH         = UTH_DEF,
  parameter int          HALF_BETA   = HALF_BETA_DEF,
  localparam int unsigned SW         = (NUM_PGU > 1) ? $clog2(NUM_PGU) : 1,
  localparam int unsigned CW         = $clog2(NUM_PGU + 1)
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic [SW-1:0]  sel,
  input  logic           load,
  input  logic [8*T-1:0] u_word,
  input  logic [T-1:0]   s_bits,
  input  logic [8*T-1:0] dh_word,
  input  logic           start,
  output logic           busy,
  output logic           done,
  output logic [8*T-1:0] du_word,
  output logic [CW-1:0]  cnt_ds,
  output logic [CW-1:0]  cnt_skip
);
  logic [8*T-1:0]     du [NUM_PGU];
  logic [NUM_PGU-1:0] g_busy, g_done, s_ds, s_skip;

  for (genvar j = 0; j < NUM_PGU; j++) begin : g_pgu
    pgu #(
      .T(T), .FRAC(FRAC), .ALPHA_SHIFT(ALPHA_SHIFT), .BETA_SHIFT(BETA_SHIFT),
      .UTH(UTH), .HALF_BETA(HALF_BETA)
    ) u_pgu (
      .clk, .rst_n, .load(load && sel == SW'(j)), .u_word, .s_bits, .dh_word,
      .start, .busy(g_busy[j]), .done(g_done[j]), .du_word(du[j]),
      .st_ds(s_ds[j]), .st_skip(s_skip[j])
    );
  end

  assign busy    = g_busy[0];
  assign done    = g_done[0];
  assign du_word = du[sel];

  always_comb begin
    cnt_ds   = '0;
    cnt_skip = '0;
    for (int j = 0; j < NUM_PGU; j++) begin
      cnt_ds   = cnt_ds   + CW'(s_ds[j]);
      cnt_skip = cnt_skip + CW'(s_skip[j]);
    end
  end

  a_lockstep: assert property (@(posedge clk) disable iff (!rst_n)
    ((g_busy == '0) || (g_busy == '1)) && ((g_done == '0) || (g_done == '1)));
endmodule
