// pe_ctrl: the control of one PE.
//
// After a start pulse it walks the spad index idx = 0 .. n_entries-1, one entry
// per cycle (mac_phase = 1), then spends one cycle with step_end = 1 in which
// the PE finishes the timestep (LIF update or write of the result). This is
// repeated for n_steps timesteps beginning at t_first. done pulses one cycle
// after the last step_end, so a run takes n_steps * (n_entries + 1) cycles of
// busy plus the done cycle. The paper only names this block; the schedule is
// this design's choice.
module pe_ctrl #(
  parameter int unsigned DEPTH = 1152,
  parameter int unsigned T     = 8,
  localparam int unsigned AW   = $clog2(DEPTH),
  localparam int unsigned TW   = $clog2(T)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  input  logic [AW-1:0] n_entries,
  input  logic [TW-1:0] t_first,
  input  logic [TW:0]   n_steps,
  output logic          busy,
  output logic [AW-1:0] idx,
  output logic [TW-1:0] t,
  output logic          mac_phase,
  output logic          step_end,
  output logic          done
);
  typedef enum logic [1:0] {S_IDLE, S_MAC, S_END} state_e;
  state_e      state;
  logic [TW:0] steps_left;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      idx        <= '0;
      t          <= '0;
      steps_left <= '0;
      done       <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: if (start && n_steps != 0 && n_entries != 0) begin
          state      <= S_MAC;
          idx        <= '0;
          t          <= t_first;
          steps_left <= n_steps;
        end else if (start) begin
          done <= 1'b1;
        end
        S_MAC: begin
          if (idx == n_entries - 1'b1) state <= S_END;
          else idx <= idx + 1'b1;
        end
        S_END: begin
          idx <= '0;
          if (steps_left == 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end else begin
            state <= S_MAC;
            t     <= t + 1'b1;
          end
          steps_left <= steps_left - 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign busy      = (state != S_IDLE);
  assign mac_phase = (state == S_MAC);
  assign step_end  = (state == S_END);
endmodule
