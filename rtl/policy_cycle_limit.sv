// policy_cycle_limit -- cycle-count FSM of a clock-cycle policy ("if a slave
// runs for more than n cycles, discard its result", Policy #4).
//
// Two states. IDLE waits for start_i (the slave accepted a request while the
// policy's mode condition holds, en_i). COUNT counts the cycles of the
// operation: cnt is 1 in the first cycle after the request was accepted and
// grows by one per cycle. When cnt exceeds LIMIT the FSM raises its flag
// register and goes back to IDLE, as in the policy's generated code
// ("if (count > n) flag <= 1; state <= IDLE"); done_i (the slave's response
// handshake) ends the operation and clears the flag.
//
// flag_o = flag register OR (COUNT and cnt > LIMIT), so the response of an
// operation is discarded exactly when it is handed over more than LIMIT cycles
// after its request was accepted (a response in cycle LIMIT+1 is discarded,
// one in cycle LIMIT passes). Using the same-cycle term is this design's
// choice; the paper gives only the registered flag. The counter saturates
// at LIMIT+1. LIMIT = 1000 is the paper's n.
module policy_cycle_limit #(
  parameter int unsigned LIMIT = 1000
) (
  input  logic clk,
  input  logic rst_n,
  input  logic en_i,     // timing condition of the policy (mode) holds
  input  logic start_i,  // request accepted by the slave
  input  logic done_i,   // response handed over by the slave
  output logic flag_o
);

  localparam int unsigned CW = $clog2(LIMIT + 2) + 1;

  typedef enum logic {S_IDLE = 1'b0, S_COUNT = 1'b1} state_t;

  state_t        state_q;
  logic [CW-1:0] cnt_q;
  logic          flag_q;
  logic          over;

  assign over   = (state_q == S_COUNT) && (cnt_q > CW'(LIMIT));
  assign flag_o = flag_q || over;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= S_IDLE;
      cnt_q   <= '0;
      flag_q  <= 1'b0;
    end else begin
      unique case (state_q)
        S_IDLE: begin
          if (start_i && en_i && !done_i) begin
            state_q <= S_COUNT;
            cnt_q   <= CW'(1);
          end
        end
        S_COUNT: begin
          if (done_i) begin
            state_q <= S_IDLE;
          end else if (over) begin
            flag_q  <= 1'b1;
            state_q <= S_IDLE;
          end else begin
            cnt_q   <= cnt_q + CW'(1);
          end
        end
        default: state_q <= S_IDLE;
      endcase
      if (done_i) flag_q <= 1'b0;
    end
  end

endmodule
