// descriptor_manager -- packet bookkeeping and transmit scheduling of the FADE-10G core.
//
// The packet buffer holds M = 2**PKT_LOG packets of 2**WORDS_LOG 64-bit words;
// the low PKT_LOG bits of a packet's number in the data stream are its slot.
// Each slot has a descriptor: flags V (valid, filled), S (sent), C (confirmed),
// F (flushed: last, partly filled packet), the 32-bit packet number and the
// 16-bit frame sequence number it was last sent with. This design adds one
// flag, R, marking a packet for immediate (early) retransmission.
//
// Data source: while dta_ready, each dta_we writes dta into the slot under the
// head pointer. The 1024th word sets V. The head then moves on unless the next
// slot is the one under the tail pointer (buffer full: dta_ready stays low
// until the tail moves). On the falling edge of run (STOP) the packet under
// the head is flushed: the number of valid words (0..1023) is written into its
// last word and it is marked V and F, to be sent as a "last data packet".
//
// Ack & Cmd FIFO: one entry per cycle while the FIFO is not empty.
//   ACK(seq, pkt): sets C of the slot if it still holds packet pkt; an ACK for
//     a packet beyond the last one transmitted raises proto_error (sticky);
//     early retransmission: every sent, unconfirmed packet whose last frame
//     sequence number is older than seq gets R.
//   NACK(pkt): sets R of the slot if it still holds packet pkt.
//   command: passed to the command processor (one-entry buffer; a command
//     arriving while it is full is dropped, the host resends it). START also
//     records the sender's MAC address as the destination of outgoing frames.
// Tail: a confirmed slot under the tail is freed (flags cleared) and the tail
// advances, one slot per cycle, never past the head.
// Transmission: when the sender is idle and the inter-frame delay has expired,
// the oldest packet with R is chosen, otherwise the next packet with V and not
// C found by a pointer browsing the buffer round robin. It is sent with the
// next frame sequence number (incremented after every data frame), which is
// stored in its descriptor. A pending command response is attached to it; if
// no packet is waiting, the response goes out in a response-only frame.
// Congestion: every 2**WIN_LOG data frames the number of retransmissions in
// the window is compared with RETR_HIGH (delay += DELAY_STEP, up to DELAY_MAX)
// and RETR_LOW (delay -= DELAY_STEP, down to 0); tx_delay is counted in clk
// cycles after each frame.
// The descriptor flags, pointers, ACK/NACK handling, sequence-number rule,
// response piggy-backing and the existence of a parametrised delay
// adaptation follow the protocol description. The R flag, the NACK action,
// the window/threshold/step values, the scheduling priority and the
// one-entry command buffer are this design's choices. The transmission
// delay field carried by ACK and NACK entries is not used: the computer only
// echoes it, and the core keeps its own delay.
module descriptor_manager
  import fade_pkg::*;
#(
  parameter int unsigned PKT_LOG    = 4,
  parameter int unsigned WORDS_LOG  = 10,
  parameter int unsigned WIN_LOG    = 6,
  parameter int unsigned RETR_HIGH  = 8,
  parameter int unsigned RETR_LOW   = 1,
  parameter int unsigned DELAY_STEP = 16,
  parameter int unsigned DELAY_MAX  = 4096,
  localparam int unsigned M  = 2**PKT_LOG,
  localparam int unsigned AW = PKT_LOG + WORDS_LOG
) (
  input  logic          clk,
  input  logic          rst,
  // data source
  input  logic [63:0]   dta,
  input  logic          dta_we,
  output logic          dta_ready,
  // START/STOP state from the receiver (asynchronous, synchronised here)
  input  logic          run_async,
  // Ack & Cmd FIFO read side
  output logic          fifo_rd,
  input  logic          fifo_empty,
  input  fifo_entry_t   fifo_dout,
  // command processor
  output logic          cmd_valid,
  input  logic          cmd_ready,
  output cmd_t          cmd,
  input  logic          resp_valid,
  output logic          resp_ready,
  input  resp_t         resp,
  // transmit requests (to the command & status synchronizer)
  output logic          tx_valid,
  output tx_req_t       tx_req,
  input  logic          tx_busy,
  input  logic          tx_done,
  // packet buffer memory write port
  output logic          mem_we,
  output logic [AW-1:0] mem_waddr,
  output logic [63:0]   mem_wdata,
  // status
  output logic          proto_error,
  output logic [31:0]   tx_delay,
  output logic [31:0]   n_frames,      // data frames sent
  output logic [31:0]   n_retrans,     // of which retransmissions
  output logic [31:0]   n_early,       // of which early (R) retransmissions
  output logic [31:0]   n_resp_frames, // response-only frames sent
  output logic [31:0]   n_full         // cycles with the buffer full
);
  localparam logic [WORDS_LOG-1:0] LAST_WORD = {WORDS_LOG{1'b1}};

  // ---------------- descriptors ----------------
  logic [M-1:0]  d_v, d_s, d_c, d_f, d_r;
  logic [31:0]   d_pkt [M];
  logic [15:0]   d_seq [M];

  logic [31:0]          head_pkt;   // number of the packet being filled
  logic [PKT_LOG-1:0]   head, tail, scan;
  logic [WORDS_LOG-1:0] wcnt;
  logic [15:0]          seq_ctr;
  logic [31:0]          last_sent_pkt;
  logic                 sent_any;
  logic [47:0]          peer_mac;
  logic                 run_s1, run_s2, run_d, flush_req;
  logic                 resp_pending;
  resp_t                resp_hold;
  logic [31:0]          gap_cnt;
  logic                 waiting;    // request issued, tx_done not seen yet
  logic [WIN_LOG-1:0]   win_cnt;
  logic [WIN_LOG:0]     retr_cnt;

  assign head = head_pkt[PKT_LOG-1:0];

  // ---------------- data source side ----------------
  logic fill, flush_now, head_adv, tail_free;
  logic [PKT_LOG-1:0] head_nx;
  assign head_nx   = head + PKT_LOG'(1);
  assign dta_ready = run_s2 && !flush_req && !d_v[head];
  assign fill      = dta_we && dta_ready;
  assign flush_now = flush_req && !d_v[head];
  assign head_adv  = d_v[head] && (head_nx != tail);
  assign tail_free = d_c[tail] && (tail != head);

  always_comb begin
    mem_we    = fill || flush_now;
    mem_waddr = flush_now ? {head, LAST_WORD} : {head, wcnt};
    mem_wdata = flush_now ? 64'(wcnt) : dta;
  end

  // ---------------- FIFO entry decoding ----------------
  fifo_entry_t          e;
  logic [PKT_LOG-1:0]   e_slot;
  logic                 e_match;
  assign e       = fifo_dout;
  assign fifo_rd = !fifo_empty;
  assign e_slot  = e.val[PKT_LOG-1:0];
  assign e_match = d_v[e_slot] && (d_pkt[e_slot] == e.val);

  logic cmd_buf_full;
  assign cmd_valid  = cmd_buf_full;
  assign resp_ready = !resp_pending;

  // ---------------- transmit choice ----------------
  function automatic logic [PKT_LOG:0] first_from(input logic [M-1:0] mask,
                                                  input logic [PKT_LOG-1:0] start);
    logic [PKT_LOG:0] res;
    logic [PKT_LOG-1:0] i;
    res = '0;
    for (int k = M - 1; k >= 0; k--) begin
      i = start + PKT_LOG'(k);
      if (mask[i]) res = {1'b1, i};
    end
    return res;
  endfunction

  logic [PKT_LOG:0]   pick_r, pick_n;
  logic               can_send, send_data, send_resp, is_retx;
  logic [PKT_LOG-1:0] sel;
  assign pick_r    = first_from(d_v & ~d_c & d_r, tail);
  assign pick_n    = first_from(d_v & ~d_c, scan);
  assign can_send  = !waiting && !tx_busy && (gap_cnt == 32'd0);
  assign sel       = pick_r[PKT_LOG] ? pick_r[PKT_LOG-1:0] : pick_n[PKT_LOG-1:0];
  assign send_data = can_send && (pick_r[PKT_LOG] || pick_n[PKT_LOG]);
  assign send_resp = can_send && !send_data && resp_pending;
  assign is_retx   = d_s[sel];

  always_comb begin
    tx_valid        = send_data || send_resp;
    tx_req          = '0;
    tx_req.kind     = send_data ? (d_f[sel] ? TX_LAST : TX_DATA) : TX_RESP;
    tx_req.slot     = 16'(sel);
    tx_req.pkt      = d_pkt[sel];
    tx_req.seq      = seq_ctr;
    tx_req.delay    = tx_delay;
    tx_req.resp     = resp_pending ? resp_hold : '0;
    tx_req.dst_mac  = peer_mac;
  end

  // ---------------- sequential part ----------------
  always_ff @(posedge clk) begin
    if (rst) begin
      d_v <= '0; d_s <= '0; d_c <= '0; d_f <= '0; d_r <= '0;
      for (int i = 0; i < M; i++) begin d_pkt[i] <= 32'(i); d_seq[i] <= '0; end
      head_pkt <= '0; tail <= '0; scan <= '0; wcnt <= '0; seq_ctr <= '0;
      last_sent_pkt <= '0; sent_any <= 1'b0; peer_mac <= '1;
      run_s1 <= 1'b0; run_s2 <= 1'b0; run_d <= 1'b0; flush_req <= 1'b0;
      resp_pending <= 1'b0; resp_hold <= '0; cmd_buf_full <= 1'b0; cmd <= '0;
      gap_cnt <= '0; waiting <= 1'b0; win_cnt <= '0; retr_cnt <= '0;
      proto_error <= 1'b0; tx_delay <= '0;
      n_frames <= '0; n_retrans <= '0; n_early <= '0; n_resp_frames <= '0; n_full <= '0;
    end else begin
      // run synchroniser and STOP detection
      run_s1 <= run_async; run_s2 <= run_s1; run_d <= run_s2;
      if (run_d && !run_s2) flush_req <= 1'b1;

      // filling and flushing the packet under the head pointer
      if (fill) begin
        wcnt <= wcnt + WORDS_LOG'(1);
        if (wcnt == LAST_WORD) begin
          d_v[head] <= 1'b1; d_f[head] <= 1'b0; d_s[head] <= 1'b0;
          d_c[head] <= 1'b0; d_r[head] <= 1'b0; d_pkt[head] <= head_pkt;
        end
      end else if (flush_now) begin
        d_v[head] <= 1'b1; d_f[head] <= 1'b1; d_s[head] <= 1'b0;
        d_c[head] <= 1'b0; d_r[head] <= 1'b0; d_pkt[head] <= head_pkt;
        wcnt <= '0;
        flush_req <= 1'b0;
      end
      if (head_adv) head_pkt <= head_pkt + 32'd1;
      if (d_v[head] && !head_adv) n_full <= n_full + 32'd1;

      // Ack & Cmd FIFO
      if (!fifo_empty) begin
        unique case (e.kind)
          ENT_ACK: begin
            if (e_match) d_c[e_slot] <= 1'b1;
            if (!sent_any || gt32(e.val, last_sent_pkt)) proto_error <= 1'b1;
            for (int i = 0; i < M; i++)
              if (d_v[i] && d_s[i] && !d_c[i] && gt16(e.seq, d_seq[i]) &&
                  !(e_match && PKT_LOG'(i) == e_slot))
                d_r[i] <= 1'b1;
          end
          ENT_NACK: if (e_match && !d_c[e_slot]) d_r[e_slot] <= 1'b1;
          default: begin
            if (e.code == CODE_START) peer_mac <= e.src_mac;
            if (!cmd_buf_full) begin
              cmd_buf_full <= 1'b1;
              cmd <= '{code: e.code, csn: e.seq, arg: e.val};
            end
          end
        endcase
      end
      if (cmd_buf_full && cmd_ready) cmd_buf_full <= 1'b0;

      // command responses
      if (resp_valid && resp_ready) begin resp_pending <= 1'b1; resp_hold <= resp; end

      // transmission
      if (gap_cnt != 32'd0) gap_cnt <= gap_cnt - 32'd1;
      if (tx_done) begin waiting <= 1'b0; gap_cnt <= tx_delay; end
      if (tx_valid) begin
        waiting <= 1'b1;
        if (resp_pending) resp_pending <= 1'b0;
      end
      if (send_resp) n_resp_frames <= n_resp_frames + 32'd1;
      if (send_data) begin
        d_s[sel]   <= 1'b1;
        d_r[sel]   <= 1'b0;
        d_seq[sel] <= seq_ctr;
        seq_ctr    <= seq_ctr + 16'd1;
        if (!pick_r[PKT_LOG]) scan <= sel + PKT_LOG'(1);
        if (!sent_any || gt32(d_pkt[sel], last_sent_pkt)) last_sent_pkt <= d_pkt[sel];
        sent_any   <= 1'b1;
        n_frames   <= n_frames + 32'd1;
        if (is_retx) n_retrans <= n_retrans + 32'd1;
        if (pick_r[PKT_LOG]) n_early <= n_early + 32'd1;
        // delay adaptation over a window of 2**WIN_LOG data frames
        win_cnt <= win_cnt + WIN_LOG'(1);
        if (win_cnt == {WIN_LOG{1'b1}}) begin
          retr_cnt <= '0;
          if (32'(retr_cnt) + 32'(is_retx) >= 32'(RETR_HIGH))
            tx_delay <= (tx_delay + 32'(DELAY_STEP) > 32'(DELAY_MAX)) ? 32'(DELAY_MAX)
                                                                      : tx_delay + 32'(DELAY_STEP);
          else if (32'(retr_cnt) + 32'(is_retx) <= 32'(RETR_LOW))
            tx_delay <= (tx_delay > 32'(DELAY_STEP)) ? tx_delay - 32'(DELAY_STEP) : 32'd0;
        end else if (is_retx) begin
          retr_cnt <= retr_cnt + (WIN_LOG+1)'(1);
        end
      end

      // freeing confirmed packets at the tail (last: its clear wins)
      if (tail_free) begin
        d_v[tail] <= 1'b0; d_s[tail] <= 1'b0; d_c[tail] <= 1'b0;
        d_f[tail] <= 1'b0; d_r[tail] <= 1'b0;
        tail <= tail + PKT_LOG'(1);
      end
    end
  end

  a_no_send_while_busy: assert property (@(posedge clk) disable iff (rst) tx_valid |-> !tx_busy);
endmodule
