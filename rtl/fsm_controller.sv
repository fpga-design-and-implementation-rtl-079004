// fsm_controller: sequences the four Goldschmidt iterations.
//
// States: idle, iterK_1 (coefficient step) and iterK_2 (multiply step) for K = 1..4,
// and dataout; then back to idle. The enable word en[3:0] drives the datapath:
//   en[0] input sign converter armed, en[1] coefficient step, en[2] multipliers load,
//   en[3] output converter loads.
// Codes per state: idle 0001 (0000 on the edge that leaves idle on start), iter1_1
// 0011, iterK_2 0100, iter2_1..iter4_1 0010, dataout 1000. These states and codes are
// the published state diagram.
//
// Timing (this design's choice, matching the published on-board waveform): en is a
// register. The code of a state is written to en on the clock edge at which the FSM
// leaves that state, so en lags the state by one cycle. With a start pulse in cycle 0
// en reads 0000, 0011, 0100, 0010, 0100, 0010, 0100, 0010, 0100, 1000 in cycles 1..10
// and 0001 again from cycle 11. start is ignored outside idle. rst (synchronous,
// active-high) returns to idle with en = 0001. An assertion checks that en only
// carries the six legal codes.
module fsm_controller (
  input  logic       clk,
  input  logic       rst,
  input  logic       start,
  output logic [3:0] en
);
  import gs_pkg::*;

  state_t state;

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE;
      en    <= EN_WAIT;
    end else begin
      unique case (state)
        S_IDLE: begin
          if (start) begin
            state <= S_ITER1_1;
            en    <= EN_START;
          end else begin
            en    <= EN_WAIT;
          end
        end
        S_ITER1_1: begin state <= S_ITER1_2; en <= EN_ADD1; end
        S_ITER1_2: begin state <= S_ITER2_1; en <= EN_MUL;  end
        S_ITER2_1: begin state <= S_ITER2_2; en <= EN_ADD;  end
        S_ITER2_2: begin state <= S_ITER3_1; en <= EN_MUL;  end
        S_ITER3_1: begin state <= S_ITER3_2; en <= EN_ADD;  end
        S_ITER3_2: begin state <= S_ITER4_1; en <= EN_MUL;  end
        S_ITER4_1: begin state <= S_ITER4_2; en <= EN_ADD;  end
        S_ITER4_2: begin state <= S_DATAOUT; en <= EN_MUL;  end
        S_DATAOUT: begin state <= S_IDLE;    en <= EN_OUT;  end
        default:   begin state <= S_IDLE;    en <= EN_WAIT; end
      endcase
    end
  end

  // en only ever carries one of the six codes of the state diagram
  a_en_legal: assert property (@(posedge clk) disable iff (rst)
    (en == EN_WAIT || en == EN_START || en == EN_ADD1 ||
     en == EN_ADD  || en == EN_MUL   || en == EN_OUT))
    else $error("fsm_controller: illegal enable code %b", en);

endmodule
