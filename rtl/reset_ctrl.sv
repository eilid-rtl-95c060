// reset_ctrl -- turns a rule violation into a device reset.
//
// Whenever any bit of `viol` is set while the controller is in RUN, it
// registers the violated rules in `cause`, moves to KILL and drives
// `reset_req` high from the next clock edge for RST_CYCLES cycles, then
// returns to RUN. Violations seen during KILL are ignored (the core is being
// reset and its outputs are meaningless). `clear` is high during KILL so the
// other monitor stages forget their history. `cause` keeps the last
// violation until the next one or until rst_n. Resetting the MCU on any
// violation is the published behaviour; the hold time and the cause register
// are this implementation's choices.
module reset_ctrl
  import eilid_pkg::*;
#(
  parameter int unsigned RST_CYCLES = 8
) (
  input  logic  clk,
  input  logic  rst_n,
  input  viol_t viol,
  output logic  reset_req,
  output logic  clear,
  output viol_t cause,
  output logic  kill_pulse   // one cycle, first cycle of each KILL
);
  typedef enum logic {RUN, KILL} state_t;

  localparam int unsigned CW = (RST_CYCLES > 1) ? $clog2(RST_CYCLES) : 1;

  state_t         state;
  logic [CW-1:0]  cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= RUN;
      cnt        <= '0;
      cause      <= '0;
      kill_pulse <= 1'b0;
    end else begin
      kill_pulse <= 1'b0;
      unique case (state)
        RUN: if (|viol) begin
          state      <= KILL;
          cnt        <= CW'(RST_CYCLES - 1);
          cause      <= viol;
          kill_pulse <= 1'b1;
        end
        KILL: if (cnt == '0) state <= RUN;
              else           cnt   <= cnt - 1'b1;
      endcase
    end
  end

  assign reset_req = (state == KILL);
  assign clear     = (state == KILL);

  initial assert (RST_CYCLES >= 1) else $error("RST_CYCLES must be at least 1");
endmodule
