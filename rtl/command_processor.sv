// command_processor -- executes commands received by the FADE-10G core.
//
// Takes one command (code, command sequence number CSN, 32-bit argument) at a
// time from the descriptor manager and returns one 12-byte response (code,
// CSN, 64-bit return value). Exactly-once execution: the CSN of the last
// serviced command is stored with its response; a command carrying the same
// CSN again (the host resent it because a frame was lost) is not executed,
// the stored response is returned instead. A new CSN is stored and the
// command executed:
//   START / STOP : already executed by the packet receiver; only confirmed
//                  here, return value 0;
//   other codes  : handed to user logic on the user_* request/acknowledge
//                  interface (user_req held until user_ack; user_ret sampled
//                  with user_ack).
// The CSN rule follows the protocol description. This block runs in the
// system clock domain here, one of the placements the protocol allows; the
// user interface handshake and the START/STOP return value are this design's
// choices. Handshakes: cmd accepted on cmd_valid && cmd_ready, response
// delivered on resp_valid && resp_ready.
module command_processor
  import fade_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  logic        cmd_valid,
  output logic        cmd_ready,
  input  cmd_t        cmd,
  output logic        resp_valid,
  input  logic        resp_ready,
  output resp_t       resp,
  output logic        user_req,
  output logic [15:0] user_code,
  output logic [31:0] user_arg,
  input  logic        user_ack,
  input  logic [63:0] user_ret,
  output logic [15:0] n_executed,   // commands executed (not counting duplicates)
  output logic [15:0] n_duplicates  // commands answered from the stored response
);
  typedef enum logic [1:0] {S_IDLE, S_USER, S_RESP} state_e;
  state_e state;

  logic        have_last;
  logic [15:0] last_csn;
  resp_t       last_resp;

  assign cmd_ready  = (state == S_IDLE);
  assign resp_valid = (state == S_RESP);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; have_last <= 1'b0; last_csn <= '0; last_resp <= '0; resp <= '0;
      user_req <= 1'b0; user_code <= '0; user_arg <= '0; n_executed <= '0; n_duplicates <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (cmd_valid) begin
          if (have_last && cmd.csn == last_csn) begin
            resp <= last_resp;
            n_duplicates <= n_duplicates + 16'd1;
            state <= S_RESP;
          end else begin
            have_last  <= 1'b1;
            last_csn   <= cmd.csn;
            n_executed <= n_executed + 16'd1;
            if (cmd.code == CODE_START || cmd.code == CODE_STOP) begin
              resp      <= '{code: cmd.code, csn: cmd.csn, ret: 64'd0};
              last_resp <= '{code: cmd.code, csn: cmd.csn, ret: 64'd0};
              state     <= S_RESP;
            end else begin
              user_req  <= 1'b1;
              user_code <= cmd.code;
              user_arg  <= cmd.arg;
              resp      <= '{code: cmd.code, csn: cmd.csn, ret: 64'd0};
              state     <= S_USER;
            end
          end
        end
        S_USER: if (user_ack) begin
          user_req      <= 1'b0;
          resp.ret      <= user_ret;
          last_resp     <= '{code: resp.code, csn: resp.csn, ret: user_ret};
          state         <= S_RESP;
        end
        S_RESP: if (resp_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_resp_stable: assert property (@(posedge clk) disable iff (rst)
                                  resp_valid && !resp_ready |=> resp_valid && $stable(resp));
endmodule
