// fade_pkg -- types, constants and helper functions shared by the FADE-10G core.
//
// Frame layout constants (EtherType 0xFADE, protocol version 0x0100, data frame
// types 0xA5A5/0xA5A6, ACK 0x0003, NACK 0x0004, filler byte 0xA5) follow the
// protocol definition. The START/STOP/RESET command codes, the type word of the
// command-response frame and the widths of internal records are this design's
// own choices, because the protocol definition leaves them open.
//
// The wrap-around comparisons implement "N1 > N2 if (N1-N2) mod 2^k <= 2^(k-1)",
// with N1 == N2 excluded so that the relation is strict.
package fade_pkg;

  localparam logic [15:0] ETHERTYPE    = 16'hFADE;
  localparam logic [15:0] PROTO_VER    = 16'h0100;
  localparam logic [15:0] TYPE_DATA    = 16'hA5A5;
  localparam logic [15:0] TYPE_LAST    = 16'hA5A6;
  localparam logic [15:0] TYPE_RESP    = 16'h0000;  // "Filler" word of a response frame
  localparam logic [15:0] CODE_START   = 16'h0001;
  localparam logic [15:0] CODE_STOP    = 16'h0002;
  localparam logic [15:0] CODE_ACK     = 16'h0003;
  localparam logic [15:0] CODE_NACK    = 16'h0004;
  localparam logic [15:0] CODE_RESET   = 16'h0005;
  localparam logic [7:0]  FILL_BYTE    = 8'hA5;

  // XGMII control characters
  localparam logic [7:0]  XG_IDLE  = 8'h07;
  localparam logic [7:0]  XG_START = 8'hFB;
  localparam logic [7:0]  XG_TERM  = 8'hFD;
  localparam logic [63:0] XG_PREAMBLE  = 64'hD5555555555555FB; // lane 0 = START
  localparam logic [63:0] XG_IDLE_WORD = 64'h0707070707070707;

  // CRC-32 register value after a frame and its own FCS have been shifted in
  localparam logic [31:0] CRC_RESIDUE = 32'hDEBB20E3;

  // Entry of the Ack & Cmd FIFO (written by the receiver)
  typedef enum logic [1:0] {ENT_ACK = 2'd0, ENT_NACK = 2'd1, ENT_CMD = 2'd2} ent_kind_e;
  typedef struct packed {
    ent_kind_e    kind;
    logic [15:0]  code;      // command code (ACK/NACK/START/STOP/user)
    logic [15:0]  seq;       // frame sequence number or command sequence number
    logic [31:0]  val;       // packet number (ACK/NACK) or command argument
    logic [31:0]  delay;     // transmission delay field of an ACK
    logic [47:0]  src_mac;   // MAC address of the sender of the frame
  } fifo_entry_t;

  typedef struct packed {
    logic [15:0] code;
    logic [15:0] csn;
    logic [31:0] arg;
  } cmd_t;

  typedef struct packed {
    logic [15:0] code;
    logic [15:0] csn;
    logic [63:0] ret;
  } resp_t;

  typedef enum logic [1:0] {TX_DATA = 2'd0, TX_LAST = 2'd1, TX_RESP = 2'd2} tx_kind_e;
  typedef struct packed {
    tx_kind_e     kind;
    logic [15:0]  slot;      // packet slot in the buffer memory
    logic [31:0]  pkt;       // packet number in the data stream
    logic [15:0]  seq;       // frame sequence number
    logic [31:0]  delay;     // current transmission delay (for debugging)
    resp_t        resp;      // command response field
    logic [47:0]  dst_mac;   // destination (host) MAC address
  } tx_req_t;

  // Reflected CRC-32 (polynomial 0x04C11DB7) over the first nbytes lanes of a word
  function automatic logic [31:0] crc32_upd(input logic [31:0] crc, input logic [63:0] d,
                                            input logic [3:0] nbytes);
    logic [31:0] c;
    c = crc;
    for (int b = 0; b < 8; b++) begin
      if (4'(b) < nbytes) begin
        c = c ^ {24'd0, d[8*b +: 8]};
        for (int i = 0; i < 8; i++)
          c = c[0] ? ((c >> 1) ^ 32'hEDB88320) : (c >> 1);
      end
    end
    return c;
  endfunction

  function automatic logic gt32(input logic [31:0] a, input logic [31:0] b);
    logic [31:0] d;
    d = a - b;
    return (d != 32'd0) && (d <= 32'h8000_0000);
  endfunction

  function automatic logic gt16(input logic [15:0] a, input logic [15:0] b);
    logic [15:0] d;
    d = a - b;
    return (d != 16'd0) && (d <= 16'h8000);
  endfunction

  function automatic logic [15:0] bswap16(input logic [15:0] v);
    return {v[7:0], v[15:8]};
  endfunction
  function automatic logic [31:0] bswap32(input logic [31:0] v);
    return {v[7:0], v[15:8], v[23:16], v[31:24]};
  endfunction
  function automatic logic [47:0] bswap48(input logic [47:0] v);
    return {v[7:0], v[15:8], v[23:16], v[31:24], v[39:32], v[47:40]};
  endfunction
  function automatic logic [63:0] bswap64(input logic [63:0] v);
    return {v[7:0], v[15:8], v[23:16], v[31:24], v[39:32], v[47:40], v[55:48], v[63:56]};
  endfunction

endpackage
