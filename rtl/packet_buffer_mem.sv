// packet_buffer_mem -- the packet buffers memory of the FADE-10G core.
//
// Holds 2**PKT_LOG packet slots of 2**WORDS_LOG 64-bit words (1024 words =
// 8192 bytes per packet, as the protocol fixes). The slot number is the low
// PKT_LOG bits of the packet number, so the address is {slot, word}.
// The write port is in the system clock domain (descriptor manager, data
// source); the read port is in the transmitter clock domain (packet sender).
// Reads are synchronous: rdata shows the word addressed in the previous rclk
// cycle. The one-cycle registered read, which maps to block RAM, is this
// design's choice.
module packet_buffer_mem #(
  parameter int unsigned PKT_LOG   = 4,
  parameter int unsigned WORDS_LOG = 10,
  localparam int unsigned AW = PKT_LOG + WORDS_LOG
) (
  input  logic          wclk,
  input  logic          we,
  input  logic [AW-1:0] waddr,
  input  logic [63:0]   wdata,
  input  logic          rclk,
  input  logic [AW-1:0] raddr,
  output logic [63:0]   rdata
);
  logic [63:0] mem [2**AW];

  always_ff @(posedge wclk)
    if (we) mem[waddr] <= wdata;

  always_ff @(posedge rclk)
    rdata <= mem[raddr];
endmodule
