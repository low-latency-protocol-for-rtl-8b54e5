// cdc_handshake -- carries one record at a time from one clock domain to
// another with a valid/ready handshake on each side.
//
// Used twice in the core. It carries commands from the descriptor manager
// (system clock) to the command processor, and responses back. That lets the
// command processor run in its own clock domain, or in the system one. The
// protocol allows both; how the crossing is built is this design's choice.
// How it works: a bundled-data, two-phase toggle handshake. The source side
// accepts a record when s_valid and s_ready are both high. It holds the
// record in a register and flips req_tgl. The destination sees the flip
// through two flops, copies the held record and raises d_valid until
// d_ready. It then flips ack_tgl, which frees the source side two
// destination-to-source flops later. Only one record is in flight, which is
// all a command stream with one outstanding command needs.
// Timing: about 3 dclk cycles from acceptance to d_valid; s_ready returns
// about 3 sclk cycles after the record is taken. When both clocks are the
// same net the crossing still works, with that latency.
// Both resets must be asserted together (the reset controller does so).
module cdc_handshake #(
  parameter type T = logic [7:0]
) (
  input  logic sclk,
  input  logic srst,
  input  logic s_valid,
  output logic s_ready,
  input  T     s_data,
  input  logic dclk,
  input  logic drst,
  output logic d_valid,
  input  logic d_ready,
  output T     d_data
);
  logic req_tgl, ack_tgl, busy;
  logic req_d1, req_d2, req_d3;
  logic ack_s1, ack_s2, ack_s3;
  T     hold;

  // source side
  assign s_ready = !busy;
  always_ff @(posedge sclk) begin
    if (srst) begin
      req_tgl <= 1'b0; busy <= 1'b0; hold <= '0;
      ack_s1 <= 1'b0; ack_s2 <= 1'b0; ack_s3 <= 1'b0;
    end else begin
      ack_s1 <= ack_tgl; ack_s2 <= ack_s1; ack_s3 <= ack_s2;
      if (s_valid && !busy) begin
        hold    <= s_data;
        req_tgl <= ~req_tgl;
        busy    <= 1'b1;
      end else if (ack_s2 != ack_s3) begin
        busy <= 1'b0;
      end
    end
  end

  // destination side
  always_ff @(posedge dclk) begin
    if (drst) begin
      req_d1 <= 1'b0; req_d2 <= 1'b0; req_d3 <= 1'b0;
      ack_tgl <= 1'b0; d_valid <= 1'b0; d_data <= '0;
    end else begin
      req_d1 <= req_tgl; req_d2 <= req_d1; req_d3 <= req_d2;
      if (req_d2 != req_d3) begin
        d_valid <= 1'b1;
        d_data  <= hold;     // stable: changed only before the toggle
      end else if (d_valid && d_ready) begin
        d_valid <= 1'b0;
        ack_tgl <= ~ack_tgl;
      end
    end
  end

  // an offered record stays offered until it is taken
  a_hold: assert property (@(posedge dclk) disable iff (drst)
                           d_valid && !d_ready |=> d_valid && $stable(d_data));
endmodule
