// cmd_status_sync -- the Command & Status Synchronizer of the FADE-10G core.
//
// Moves one transmit request (fade_pkg::tx_req_t: which packet or command
// response to send, with its sequence number, delay and response fields) from
// the system clock domain (sclk) to the transmitter clock domain (tclk), and
// the completion status back. The block is only named in the core structure;
// its construction is this design's choice: a bundled-data two-phase
// toggle handshake. The request record is held stable in a register while a
// toggle crosses through two flops; the receiving side captures it on the
// toggle edge, presents it with t_valid (one-cycle pulse) and, when the
// sender reports t_done, toggles an acknowledge back, which gives s_done
// (one-cycle pulse) and clears s_busy.
// Latency: about 3 tclk cycles forward and 3 sclk cycles back.
module cmd_status_sync
  import fade_pkg::*;
(
  input  logic    sclk,
  input  logic    srst,
  input  logic    s_valid,   // accepted when !s_busy
  input  tx_req_t s_data,
  output logic    s_busy,
  output logic    s_done,
  input  logic    tclk,
  input  logic    trst,
  output logic    t_valid,
  output tx_req_t t_data,
  input  logic    t_done
);
  logic    req_tgl, ack_tgl;
  logic    req_t1, req_t2, req_t3;
  logic    ack_s1, ack_s2, ack_s3;
  tx_req_t hold;

  // system side
  always_ff @(posedge sclk) begin
    if (srst) begin
      req_tgl <= 1'b0; s_busy <= 1'b0; hold <= '0;
      ack_s1 <= 1'b0; ack_s2 <= 1'b0; ack_s3 <= 1'b0; s_done <= 1'b0;
    end else begin
      ack_s1 <= ack_tgl; ack_s2 <= ack_s1; ack_s3 <= ack_s2;
      s_done <= 1'b0;
      if (s_valid && !s_busy) begin
        hold    <= s_data;
        req_tgl <= ~req_tgl;
        s_busy  <= 1'b1;
      end else if (ack_s2 != ack_s3) begin
        s_busy <= 1'b0;
        s_done <= 1'b1;
      end
    end
  end

  // transmitter side
  always_ff @(posedge tclk) begin
    if (trst) begin
      req_t1 <= 1'b0; req_t2 <= 1'b0; req_t3 <= 1'b0;
      ack_tgl <= 1'b0; t_valid <= 1'b0; t_data <= '0;
    end else begin
      req_t1 <= req_tgl; req_t2 <= req_t1; req_t3 <= req_t2;
      t_valid <= 1'b0;
      if (req_t2 != req_t3) begin
        t_valid <= 1'b1;
        t_data  <= hold;     // stable: changed only before the toggle
      end
      if (t_done) ack_tgl <= ~ack_tgl;
    end
  end
endmodule
