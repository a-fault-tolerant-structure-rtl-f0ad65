// bist_ctrl: BIST control unit of the BIST core. A rising "BIST_Enable" from
// the hardware control unit starts a test: one clear pulse resets the TPG and
// TRA, the unit then waits until the TRA has compared all N*OUT_WORDS
// responses of the N requested test patterns and raises "Done", with the
// TRA's fault flag on "Result" (1 = fault found). Done and Result hold until
// BIST_Enable falls, which returns the unit to idle. N = 0 finishes at once
// with no fault.
//
// States: IDLE -> CLEAR (1 cycle) -> RUN -> DONE -> IDLE.
// The architecture names this unit, BIST_Enable, Done and Result; the state
// sequence is this design's choice.
module bist_ctrl #(
  parameter int unsigned OUT_WORDS = 1
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        enable,
  input  logic [15:0] num_patterns,
  input  logic [23:0] compared,
  input  logic        tra_fault,
  output logic        clear,
  output logic        running,
  output logic        done,
  output logic        result
);

  typedef enum logic [1:0] {C_IDLE, C_CLEAR, C_RUN, C_DONE} cstate_e;
  cstate_e state;
  logic [23:0] target;

  assign clear   = (state == C_CLEAR);
  assign running = (state == C_RUN);
  assign done    = (state == C_DONE);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state  <= C_IDLE;
      target <= '0;
      result <= 1'b0;
    end else begin
      unique case (state)
        C_IDLE: if (enable) begin
          state  <= C_CLEAR;
          target <= 24'(num_patterns) * 24'(OUT_WORDS);
          result <= 1'b0;
        end
        C_CLEAR: state <= C_RUN;
        C_RUN: begin
          if (!enable) state <= C_IDLE;
          else if (compared == target) begin
            state  <= C_DONE;
            result <= tra_fault;
          end
        end
        C_DONE: if (!enable) state <= C_IDLE;
        default: state <= C_IDLE;
      endcase
    end
  end

endmodule
