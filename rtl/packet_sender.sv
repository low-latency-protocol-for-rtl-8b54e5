// packet_sender -- transmit state machine of the FADE-10G core (replaces a MAC).
//
// On req_valid it latches one fade_pkg::tx_req_t and sends one Ethernet frame
// on a 64-bit XGMII interface (lane 0 = bits 7:0 = first byte):
//   TX_DATA / TX_LAST : header, type 0xA5A5 / 0xA5A6, frame sequence number,
//                       packet number, transmission delay, 12-byte command
//                       response, then the 1024 words of packet slot req.slot
//                       read from the packet buffer memory. For a last packet
//                       the descriptor manager has already stored the number
//                       of valid words in word 1023 of the slot.
//   TX_RESP           : header, filler word, 12-byte command response, padded
//                       with 0xA5 to the 60-byte minimum.
// The FCS (CRC-32) is computed on the fly and appended; then a terminate
// character, and IFG_WORDS idle words before done pulses for one cycle.
// Frame contents follow the protocol's frame tables. Network (big-endian)
// byte order of the header fields, destination MAC before source MAC (the
// standard Ethernet order), little-endian order of the 64-bit data words,
// the start character in lane 0 and the idle gap are this design's choices.
// Timing: a data frame occupies 1 + 5 + 1024 + 1 words, then the gap;
// a response frame 1 + 8 + 1 words. The memory read has one cycle of latency.
module packet_sender
  import fade_pkg::*;
#(
  parameter int unsigned PKT_LOG   = 4,
  parameter int unsigned WORDS_LOG = 10,
  parameter logic [47:0] MY_MAC    = 48'h02_00_00_00_00_01,
  parameter int unsigned IFG_WORDS = 2,
  localparam int unsigned AW = PKT_LOG + WORDS_LOG
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          req_valid,
  input  tx_req_t       req,
  output logic          done,
  output logic [AW-1:0] mem_raddr,
  input  logic [63:0]   mem_rdata,
  output logic [63:0]   xgmii_txd,
  output logic [7:0]    xgmii_txc
);
  typedef enum logic [2:0] {S_IDLE, S_PRE, S_HDR, S_DATA, S_FCS, S_RESP_END, S_TERM, S_IFG} state_e;
  state_e state;

  tx_req_t                r;
  logic [2:0]             w;        // header word index
  logic [WORDS_LOG-1:0]   idx;      // data word index
  logic [31:0]            crc;
  logic [3:0]             gap;
  logic [511:0]           hdr;      // byte i of the frame in hdr[8*i +: 8]

  // Header bytes, first byte of the frame in the most significant position.
  logic [319:0] data_stream;
  logic [239:0] resp_stream;
  always_comb begin
    data_stream = {r.dst_mac, MY_MAC, ETHERTYPE, PROTO_VER,
                   (r.kind == TX_LAST) ? TYPE_LAST : TYPE_DATA,
                   r.seq, r.pkt, r.delay, r.resp.code, r.resp.csn, r.resp.ret};
    resp_stream = {r.dst_mac, MY_MAC, ETHERTYPE, PROTO_VER, TYPE_RESP,
                   r.resp.code, r.resp.csn, r.resp.ret};
    hdr = {64{FILL_BYTE}};
    if (r.kind == TX_RESP) begin
      for (int i = 0; i < 30; i++) hdr[8*i +: 8] = resp_stream[8*(29-i) +: 8];
    end else begin
      for (int i = 0; i < 40; i++) hdr[8*i +: 8] = data_stream[8*(39-i) +: 8];
    end
  end

  logic [63:0] word_c;
  logic [7:0]  ctrl_c;
  logic [31:0] crc_c;
  logic [31:0] fcs_resp;
  assign fcs_resp = ~crc32_upd(crc, hdr[64*7 +: 64], 4'd4);

  always_comb begin
    word_c = XG_IDLE_WORD;
    ctrl_c = 8'hFF;
    crc_c  = crc;
    unique case (state)
      S_PRE:      begin word_c = XG_PREAMBLE; ctrl_c = 8'h01; crc_c = 32'hFFFF_FFFF; end
      S_HDR:      begin word_c = hdr[64*w +: 64]; ctrl_c = 8'h00; crc_c = crc32_upd(crc, word_c, 4'd8); end
      S_DATA:     begin word_c = mem_rdata; ctrl_c = 8'h00; crc_c = crc32_upd(crc, word_c, 4'd8); end
      S_FCS:      begin word_c = {{3{XG_IDLE}}, XG_TERM, ~crc}; ctrl_c = 8'hF0; end
      S_RESP_END: begin word_c = {fcs_resp, hdr[64*7 +: 32]}; ctrl_c = 8'h00; end
      S_TERM:     begin word_c = {{7{XG_IDLE}}, XG_TERM}; ctrl_c = 8'hFF; end
      default:    ;
    endcase
  end

  // read address: one word ahead of the word being sent
  always_comb begin
    if (state == S_DATA) mem_raddr = {r.slot[PKT_LOG-1:0], idx + WORDS_LOG'(1)};
    else                 mem_raddr = {r.slot[PKT_LOG-1:0], {WORDS_LOG{1'b0}}};
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; r <= '0; w <= '0; idx <= '0; crc <= '1; gap <= '0;
      done <= 1'b0; xgmii_txd <= XG_IDLE_WORD; xgmii_txc <= 8'hFF;
    end else begin
      xgmii_txd <= word_c;
      xgmii_txc <= ctrl_c;
      crc       <= crc_c;
      done      <= 1'b0;
      unique case (state)
        S_IDLE:  if (req_valid) begin r <= req; state <= S_PRE; end
        S_PRE:   begin w <= '0; state <= S_HDR; end
        S_HDR: begin
          w <= w + 3'd1;
          if (r.kind == TX_RESP) begin
            if (w == 3'd6) state <= S_RESP_END;
          end else if (w == 3'd4) begin
            idx <= '0; state <= S_DATA;
          end
        end
        S_DATA: begin
          idx <= idx + WORDS_LOG'(1);
          if (idx == {WORDS_LOG{1'b1}}) state <= S_FCS;
        end
        S_RESP_END: state <= S_TERM;
        S_FCS, S_TERM: begin gap <= '0; state <= S_IFG; end
        S_IFG: begin
          gap <= gap + 4'd1;
          if (gap >= 4'(IFG_WORDS - 1)) begin done <= 1'b1; state <= S_IDLE; end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_req_when_idle: assert property (@(posedge clk) disable iff (rst) req_valid |-> state == S_IDLE);
endmodule
