// sn_decoder: runs one SMURF evaluation and converts its bitstream to binary.
//
// A stochastic number is read back by counting the ones of its bitstream with
// a binary counter; the value is ones / L for a bitstream of length L. This
// block sequences one evaluation:
//   INIT : the cycle after start; fsm_init returned the FSMs to S_0 on the
//          start edge, the FSMs now make their first transition.
//   RUN  : L cycles; each output bit y_b, taken after a state transition, is
//          added to the count.
//   DONE : one cycle with done = 1; ones holds the count until the next start.
// Counting only after a transition follows the source ("after each state
// transition, the updated codeword s controls the MUX"); the sequencing itself
// is this design's. Latency: done is high in the cycle after the
// (L+2)-th rising edge counted from the edge that samples start. stream_len = 0
// is treated as 1. A start while busy is ignored.
module sn_decoder #(
  parameter int unsigned LEN_W = 16
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             start,
  input  logic [LEN_W-1:0] stream_len,
  input  logic             yb,
  output logic             fsm_init,
  output logic             busy,
  output logic             done,
  output logic [LEN_W-1:0] ones
);

  typedef enum logic [1:0] {S_IDLE, S_INIT, S_RUN, S_DONE} phase_e;

  phase_e           phase_q;
  logic [LEN_W-1:0] remain_q;
  logic [LEN_W-1:0] ones_q;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      phase_q  <= S_IDLE;
      remain_q <= '0;
      ones_q   <= '0;
    end else begin
      unique case (phase_q)
        S_IDLE, S_DONE: begin
          phase_q <= S_IDLE;
          if (start) begin
            phase_q  <= S_INIT;
            remain_q <= (stream_len == '0) ? LEN_W'(1) : stream_len;
            ones_q   <= '0;
          end
        end
        S_INIT: phase_q <= S_RUN;
        S_RUN: begin
          ones_q   <= ones_q + LEN_W'(yb);
          remain_q <= remain_q - 1'b1;
          if (remain_q == LEN_W'(1)) phase_q <= S_DONE;
        end
        default: phase_q <= S_IDLE;
      endcase
    end
  end

  assign fsm_init = start && (phase_q == S_IDLE || phase_q == S_DONE);
  assign busy     = (phase_q == S_INIT) || (phase_q == S_RUN);
  assign done     = (phase_q == S_DONE);
  assign ones     = ones_q;

  // The count can never exceed the number of bits counted.
  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n)
                                  phase_q == S_RUN |-> remain_q != '0);

endmodule
