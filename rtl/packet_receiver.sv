// packet_receiver -- receive state machine of the FADE-10G core (replaces a MAC).
//
// Watches a 64-bit XGMII receive interface. A frame starts with the start
// character in lane 0 (rxc = 8'h01, rxd[7:0] = 0xFB) and ends at the first
// terminate character (0xFD) in any lane. The CRC-32 runs over every byte
// between them, FCS included, and the frame is good when the register ends at
// the CRC-32 residue. The first 32 bytes are kept, which cover the header
// and the whole payload of ACK/NACK and command frames.
// A good frame for this core (destination MY_MAC, EtherType 0xFADE, version
// 0x0100) is handled by its first payload word:
//   ACK (0x0003) / NACK (0x0004) -> FIFO entry with frame sequence number,
//                                    packet number and transmission delay;
//   START / STOP                 -> run is set / cleared here, and the command
//                                    is still written to the FIFO so that it
//                                    gets confirmed;
//   RESET                        -> one-cycle rst_cmd pulse, nothing queued;
//   any other code               -> FIFO entry for the command processor.
// The source MAC goes with every entry. Executing START/STOP/RESET here and
// queueing the rest follows the protocol description; the command codes, the
// lane-0-only start alignment and dropping entries when the FIFO is full are
// this design's choices. Latency: the FIFO write happens in the cycle after
// the word holding the terminate character.
module packet_receiver
  import fade_pkg::*;
#(
  parameter logic [47:0] MY_MAC = 48'h02_00_00_00_00_01
) (
  input  logic        clk,
  input  logic        rst,
  input  logic [63:0] xgmii_rxd,
  input  logic [7:0]  xgmii_rxc,
  output logic        fifo_wr,
  output fifo_entry_t fifo_din,
  input  logic        fifo_full,
  output logic        run,
  output logic        rst_cmd,
  output logic [15:0] bad_frames    // frames dropped for a wrong FCS or malformed end
);
  typedef enum logic [0:0] {S_IDLE, S_FRAME} state_e;
  state_e state;

  logic [255:0] frm;       // first 32 bytes of the frame, byte i in frm[8*i +: 8]
  logic [2:0]   wcnt;      // words received (saturates at 4)
  logic [31:0]  crc;

  // ---- terminate search in the current word ----
  logic       term_found, ctrl_err;
  logic [3:0] nbytes;      // data bytes before the terminate character
  always_comb begin
    term_found = 1'b0;
    ctrl_err   = 1'b0;
    nbytes     = 4'd8;
    for (int l = 7; l >= 0; l--) begin
      if (xgmii_rxc[l]) begin
        nbytes = 4'(l);
        term_found = (xgmii_rxd[8*l +: 8] == XG_TERM);
      end
    end
    // any control character before the terminate is an error
    if (xgmii_rxc != 8'h00 && !term_found) ctrl_err = 1'b1;
  end

  logic [31:0] crc_c;
  assign crc_c = crc32_upd(crc, xgmii_rxd, nbytes);

  // ---- field extraction from the stored header ----
  function automatic logic [7:0] fb(input logic [255:0] f, input int i);
    return f[8*i +: 8];
  endfunction
  logic [47:0] f_dst, f_src;
  logic [15:0] f_type, f_ver, f_code, f_seq;
  logic [31:0] f_val, f_delay;
  logic [255:0] frm_c;     // header including the current word
  always_comb begin
    frm_c = frm;
    if (wcnt < 3'd4) frm_c[64*wcnt[1:0] +: 64] = xgmii_rxd;
    f_dst   = {fb(frm_c,0), fb(frm_c,1), fb(frm_c,2), fb(frm_c,3), fb(frm_c,4), fb(frm_c,5)};
    f_src   = {fb(frm_c,6), fb(frm_c,7), fb(frm_c,8), fb(frm_c,9), fb(frm_c,10), fb(frm_c,11)};
    f_type  = {fb(frm_c,12), fb(frm_c,13)};
    f_ver   = {fb(frm_c,14), fb(frm_c,15)};
    f_code  = {fb(frm_c,16), fb(frm_c,17)};
    f_seq   = {fb(frm_c,18), fb(frm_c,19)};
    f_val   = {fb(frm_c,20), fb(frm_c,21), fb(frm_c,22), fb(frm_c,23)};
    f_delay = {fb(frm_c,24), fb(frm_c,25), fb(frm_c,26), fb(frm_c,27)};
  end

  logic frame_ok;
  assign frame_ok = (crc_c == CRC_RESIDUE) && (wcnt >= 3'd3) &&
                    (f_dst == MY_MAC) && (f_type == ETHERTYPE) && (f_ver == PROTO_VER);

  always_ff @(posedge clk) begin
    if (rst) begin
      state <= S_IDLE; frm <= '0; wcnt <= '0; crc <= '1;
      fifo_wr <= 1'b0; fifo_din <= '0; run <= 1'b0; rst_cmd <= 1'b0; bad_frames <= '0;
    end else begin
      fifo_wr <= 1'b0;
      rst_cmd <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (xgmii_rxc == 8'h01 && xgmii_rxd[7:0] == XG_START) begin
            state <= S_FRAME; wcnt <= '0; crc <= '1; frm <= '0;
          end
        end
        S_FRAME: begin
          frm <= frm_c;
          crc <= crc_c;
          if (wcnt < 3'd4) wcnt <= wcnt + 3'd1;
          if (ctrl_err) begin
            bad_frames <= bad_frames + 16'd1;
            state <= S_IDLE;
          end else if (term_found) begin
            state <= S_IDLE;
            if (crc_c != CRC_RESIDUE) bad_frames <= bad_frames + 16'd1;
            if (frame_ok) begin
              fifo_din.code    <= f_code;
              fifo_din.seq     <= f_seq;
              fifo_din.val     <= f_val;
              fifo_din.delay   <= f_delay;
              fifo_din.src_mac <= f_src;
              unique case (f_code)
                CODE_ACK:   begin fifo_din.kind <= ENT_ACK;  fifo_wr <= !fifo_full; end
                CODE_NACK:  begin fifo_din.kind <= ENT_NACK; fifo_wr <= !fifo_full; end
                CODE_RESET: rst_cmd <= 1'b1;
                default: begin
                  fifo_din.kind <= ENT_CMD;
                  fifo_wr <= !fifo_full;
                  if (f_code == CODE_START) run <= 1'b1;
                  if (f_code == CODE_STOP)  run <= 1'b0;
                end
              endcase
            end
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
