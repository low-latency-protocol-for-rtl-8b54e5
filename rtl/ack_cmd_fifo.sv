// ack_cmd_fifo -- the Acknowledgment and Commands FIFO of the FADE-10G core.
//
// Carries fade_pkg::fifo_entry_t records (ACK, NACK and command frames that
// the packet receiver accepted) from the receiver clock domain (wclk) to the
// system clock domain (rclk), where the descriptor manager reads them.
// The protocol only names this FIFO and its role; its construction is this
// design's choice: a classic dual-clock FIFO with Gray-coded pointers passed
// through two-flop synchronisers, 2**DEPTH_LOG entries.
// Interface: write when wr && !full; dout shows the oldest entry while
// !empty, rd pops it. full/empty are conservative (they may lag a few cycles
// behind the other side's update). Each side has its own active-high reset.
module ack_cmd_fifo
  import fade_pkg::*;
#(
  parameter int unsigned DEPTH_LOG = 4
) (
  input  logic        wclk,
  input  logic        wrst,
  input  logic        wr,
  input  fifo_entry_t din,
  output logic        full,
  input  logic        rclk,
  input  logic        rrst,
  input  logic        rd,
  output fifo_entry_t dout,
  output logic        empty
);
  localparam int unsigned PW = DEPTH_LOG + 1;

  fifo_entry_t mem [2**DEPTH_LOG];

  logic [PW-1:0] wbin, wgray, rbin, rgray;
  logic [PW-1:0] rgray_w1, rgray_w2;   // read pointer seen in wclk domain
  logic [PW-1:0] wgray_r1, wgray_r2;   // write pointer seen in rclk domain

  function automatic logic [PW-1:0] bin2gray(input logic [PW-1:0] b);
    return b ^ (b >> 1);
  endfunction

  // ---------------- write side ----------------
  logic [PW-1:0] wbin_nx;
  assign wbin_nx = wbin + PW'(1);
  assign full = (wgray == {~rgray_w2[PW-1:PW-2], rgray_w2[PW-3:0]});

  always_ff @(posedge wclk) begin
    if (wr && !full) mem[wbin[DEPTH_LOG-1:0]] <= din;
  end

  always_ff @(posedge wclk) begin
    if (wrst) begin
      wbin <= '0; wgray <= '0; rgray_w1 <= '0; rgray_w2 <= '0;
    end else begin
      rgray_w1 <= rgray; rgray_w2 <= rgray_w1;
      if (wr && !full) begin
        wbin  <= wbin_nx;
        wgray <= bin2gray(wbin_nx);
      end
    end
  end

  // ---------------- read side ----------------
  logic [PW-1:0] rbin_nx;
  assign rbin_nx = rbin + PW'(1);
  assign empty = (rgray == wgray_r2);
  assign dout  = mem[rbin[DEPTH_LOG-1:0]];

  always_ff @(posedge rclk) begin
    if (rrst) begin
      rbin <= '0; rgray <= '0; wgray_r1 <= '0; wgray_r2 <= '0;
    end else begin
      wgray_r1 <= wgray; wgray_r2 <= wgray_r1;
      if (rd && !empty) begin
        rbin  <= rbin_nx;
        rgray <= bin2gray(rbin_nx);
      end
    end
  end

  // a pop of an empty FIFO is a protocol violation of the reader
  a_no_underflow: assert property (@(posedge rclk) disable iff (rrst) !(rd && empty));
endmodule
