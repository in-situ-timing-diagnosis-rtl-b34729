// meas_enable_gen -- measurement-enable generator of the delay and control network (DCN).
//
// Defines the boundaries of each observation window. After a phase update the sampling clock
// and control signals are given a fixed settling interval; then meas_en is raised for exactly
// `window` clock cycles, during which every active DME accumulates its sample counts, and
// lowered again. `done` pulses for one cycle when the window closes.
//
// Interface: go (strobe, ignored while busy), halt (returns to idle at once), settle (cycles,
// 0 allowed), window (cycles, 0 treated as 1). Timing: the settling state lasts settle+1
// cycles after the edge that samples go, then meas_en stays high window cycles; done is high in the cycle after the last meas_en cycle.
`timescale 1ps/1ps
module meas_enable_gen #(
  parameter int unsigned SETTLE_W = 8,
  parameter int unsigned WIN_W    = 16
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                go,
  input  logic                halt,
  input  logic [SETTLE_W-1:0] settle,
  input  logic [WIN_W-1:0]    window,
  output logic                meas_en,
  output logic                settling,
  output logic                done
);

  typedef enum logic [1:0] {S_IDLE, S_SETTLE, S_MEAS} state_e;
  state_e          state;
  logic [WIN_W-1:0] cnt;

  assign meas_en  = (state == S_MEAS);
  assign settling = (state == S_SETTLE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state <= S_IDLE;
      cnt   <= '0;
      done  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (halt) begin
        state <= S_IDLE;
      end else begin
        case (state)
          S_IDLE: if (go) begin
            state <= S_SETTLE;
            cnt   <= WIN_W'(settle);
          end
          S_SETTLE: begin
            if (cnt == '0) begin
              state <= S_MEAS;
              cnt   <= (window == '0) ? WIN_W'(0) : window - 1'b1;
            end else begin
              cnt <= cnt - 1'b1;
            end
          end
          S_MEAS: begin
            if (cnt == '0) begin
              state <= S_IDLE;
              done  <= 1'b1;
            end else begin
              cnt <= cnt - 1'b1;
            end
          end
          default: state <= S_IDLE;
        endcase
      end
    end
  end

endmodule
