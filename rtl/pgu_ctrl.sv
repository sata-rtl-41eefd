// pgu_ctrl: the control of one potential gradient unit.
//
// After a start pulse it steps t = T-1, T-2, .. 0, one timestep per cycle
// (valid = 1, first = 1 on t = T-1), because dU_t depends on dU_{t+1}. done
// pulses in the cycle after t = 0, so a neuron takes T cycles plus the done
// cycle. The paper only names this block; the schedule follows its
// statement that one PGU produces one timestep of dU of one neuron at a time.
module pgu_ctrl #(
  parameter int unsigned T  = 8,
  localparam int unsigned TW = $clog2(T)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic [TW-1:0] t,
  output logic          first,
  output logic          valid,
  output logic          done
);
  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy <= 1'b0;
      t    <= '0;
      done <= 1'b0;
    end else begin
      done <= 1'b0;
      if (!busy) begin
        if (start) begin
          busy <= 1'b1;
          t    <= TW'(T - 1);
        end
      end else if (t == '0) begin
        busy <= 1'b0;
        done <= 1'b1;
      end else begin
        t <= t - 1'b1;
      end
    end
  end

  assign valid = busy;
  assign first = busy && (t == TW'(T - 1));
endmodule
