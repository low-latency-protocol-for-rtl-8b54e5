// tb_fade10g_core -- end-to-end test of the FADE-10G core at its default size
// (16 packet slots of 1024 words), with four unrelated clocks (the command processor on its own user clock).
//
// The testbench plays the computer: it reassembles the frames the core sends
// on XGMII, checks their FCS with an independent CRC, stores each data packet
// by its packet number, checks every data word against the counter pattern the
// data source wrote (word n of the stream holds n), acknowledges each data
// frame with its frame sequence number, and sends commands. Loss is injected
// on purpose: first transmissions of some packets and some ACKs are dropped,
// a NACK is sent once, and for packets 40..69 every third data frame is
// dropped, so that the delay adaptation must raise the inter-frame delay and
// later lower it again. A corrupted ACK is sent once. After NPKT packets the
// host sends STOP; the last packet must carry the remaining words and their
// count. Then an ACK for a packet never sent must raise the protocol error,
// and a RESET frame must reset the core.
// Each mechanism (buffer full, retransmission, early retransmission, NACK,
// response-only frame, response in a data frame, duplicate command, delay up
// and down, last packet, bad FCS, protocol error, reset) is counted and must
// occur at least once.
module tb_fade10g_core;
  import fade_pkg::*;
  import fade_tb_pkg::*;
  localparam logic [47:0] MAC  = 48'h02_00_00_00_00_01;   // default of the core
  localparam logic [47:0] HOST = 48'h00_1b_21_aa_bb_cc;
  localparam int NPKT = 200;

  logic sys_clk = 0, rx_clk = 0, tx_clk = 0, user_clk = 0, rst = 1;
  logic [63:0] dta = '0;
  logic dta_we = 0, dta_ready;
  logic [63:0] xgmii_rxd = 64'h0707070707070707, xgmii_txd;
  logic [7:0]  xgmii_rxc = 8'hFF, xgmii_txc;
  logic user_req, user_ack = 0;
  logic [15:0] user_code;
  logic [31:0] user_arg;
  logic [63:0] user_ret = '0;
  logic running, proto_error;
  logic [31:0] tx_delay, n_frames, n_retrans, n_early, n_resp_frames, n_full;
  logic [15:0] n_cmd_executed, n_cmd_duplicates, bad_frames;

  fade10g_core dut (.*);
  fade_xgmii_mon mon (.clk(tx_clk), .txd(xgmii_txd), .txc(xgmii_txc));

  always #3.0 sys_clk = ~sys_clk;   // data source faster than the link
  always #4.1 user_clk = ~user_clk; // command processor in its own clock domain
  always #3.2 tx_clk  = ~tx_clk;    // 156.25 MHz XGMII
  always #3.1 rx_clk  = ~rx_clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  // mechanism counters
  int m_full, m_retx, m_early, m_nack, m_resp_only, m_resp_data, m_dup, m_up, m_down,
      m_last, m_badfcs, m_proto, m_reset;

  initial begin
    #20_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------- data source ----------------
  bit src_en = 0;
  logic [63:0] word_ctr = '0;
  always @(negedge sys_clk) begin
    dta_we = src_en && dta_ready;
    dta    = word_ctr;
    if (dta_we) word_ctr++;
  end

  // ---------------- user command logic ----------------
  int user_calls = 0;
  function automatic logic [63:0] user_fn(input logic [15:0] c, input logic [31:0] a);
    return {a ^ 32'h5A5A_0000, 16'hC0DE, c};
  endfunction
  initial forever begin
    @(posedge user_clk);
    if (!rst && user_req && !user_ack) begin
      repeat ($urandom_range(2, 30)) @(posedge user_clk);
      user_calls++;
      user_ack <= 1; user_ret <= user_fn(user_code, user_arg);
      @(posedge user_clk); user_ack <= 0;
    end
  end

  // ---------------- host transmit side ----------------
  logic [71:0] rxq[$];
  task automatic host_send(input byteq_t fr);
    to_xgmii(fr, rxq);
  endtask
  always @(negedge rx_clk) begin
    if (rxq.size() != 0) {xgmii_rxc, xgmii_rxd} = rxq.pop_front();
    else begin xgmii_rxc = 8'hFF; xgmii_rxd = 64'h0707070707070707; end
  end
  task automatic send_cmd(input logic [15:0] code, input logic [15:0] csn, input logic [31:0] arg);
    host_send(host_frame(MAC, HOST, code, csn, arg, 32'd0));
  endtask

  // ---------------- host receive side ----------------
  bit          got[int];          // packets received
  int          data_frames = 0, bad_fcs_rx = 0, data_errors = 0;
  int          last_pkt = -1, last_count = -1;
  logic [15:0] want_csn = '0;
  resp_t       resp_got[logic [15:0]];
  bit          drop_done[int];
  bit          nack_sent = 0, nack_seen_again = 0;
  int          max_pkt = -1;
  int          lossy_ctr = 0;

  function automatic bit drop_data(input int pkt);
    if ((pkt == 2 || pkt == 7 || pkt == 13 || pkt == 30) && !drop_done.exists(pkt)) begin
      drop_done[pkt] = 1; return 1;
    end
    if (pkt >= 40 && pkt < 70) begin
      lossy_ctr++;
      if (lossy_ctr % 3 == 0) return 1;
    end
    return 0;
  endfunction

  task automatic take_resp(input byteq_t f, input int pos, input bit in_data);
    resp_t r;
    r.code = 16'(get_be(f, pos, 2)); r.csn = 16'(get_be(f, pos + 2, 2)); r.ret = get_be(f, pos + 4, 8);
    if (r.code != 16'd0) begin
      if (!resp_got.exists(r.csn)) begin
        resp_got[r.csn] = r;
        if (in_data) m_resp_data++; else m_resp_only++;
      end
    end else if (!in_data) chk(0, "response frame without response");
  endtask

  always @(posedge tx_clk) begin
    while (mon.frames.size() != 0) begin
      byteq_t f;
      int pkt, seq, typ;
      f = mon.frames.pop_front();
      void'(mon.frame_words.pop_front());
      if (!fcs_ok(f)) begin bad_fcs_rx++; continue; end
      if (get_be(f, 12, 2) != 64'hFADE || get_be(f, 14, 2) != 64'h0100 ||
          get_be(f, 0, 6) != 64'(HOST) || get_be(f, 6, 6) != 64'(MAC)) begin
        chk(0, "frame header"); continue;
      end
      typ = int'(get_be(f, 16, 2));
      if (typ == 16'h0000) begin take_resp(f, 18, 0); continue; end
      if (typ != 16'hA5A5 && typ != 16'hA5A6) begin chk(0, "frame type"); continue; end
      data_frames++;
      pkt = int'(get_be(f, 20, 4)); seq = int'(get_be(f, 18, 2));
      chk(f.size() == 8236, "data frame length");
      if (drop_data(pkt)) continue;
      take_resp(f, 28, 1);
      if (pkt == 25 && nack_sent) nack_seen_again = 1;
      // store and check data
      if (!got.exists(pkt)) begin
        int n;
        n = 1024;
        if (typ == 16'hA5A6) begin
          n = int'(get_le(f, 40 + 8*1023));
          last_pkt = pkt; last_count = n; m_last++;
        end
        for (int i = 0; i < n; i++)
          if (get_le(f, 40 + 8*i) != 64'(pkt) * 1024 + 64'(i)) begin data_errors++; break; end
        got[pkt] = 1;
        if (pkt > max_pkt) max_pkt = pkt;
      end
      // acknowledge (with deliberate faults)
      if (pkt == 25 && !nack_sent) begin
        nack_sent = 1;
        host_send(host_frame(MAC, HOST, CODE_NACK, 16'(seq), 32'(pkt), 32'd0));
      end else if ((pkt == 4 || pkt == 20) && !drop_done.exists(1000 + pkt)) begin
        drop_done[1000 + pkt] = 1;           // ACK lost
      end else begin
        host_send(host_frame(MAC, HOST, CODE_ACK, 16'(seq), 32'(pkt), 32'd0));
      end
    end
  end

  // delay adaptation watch
  logic [31:0] prev_delay = '0;
  always @(posedge sys_clk) if (!rst) begin
    if (tx_delay > prev_delay) m_up++;
    if (tx_delay < prev_delay) m_down++;
    prev_delay <= tx_delay;
  end

  // wait for the response; like the host driver, resend the command after a
  // timeout (a lost command or response frame), up to 8 times
  task automatic wait_resp(input logic [15:0] code, input logic [15:0] csn, input logic [31:0] arg,
                           output resp_t r);
    int t = 0, tries = 0;
    while (!resp_got.exists(csn) && tries < 8) begin
      #100; t++;
      if (t == 500) begin t = 0; tries++; send_cmd(code, csn, arg); end
    end
    if (resp_got.exists(csn)) r = resp_got[csn]; else r = '0;
    chk(resp_got.exists(csn), $sformatf("response to command %0d", csn));
  endtask

  initial begin
    resp_t r;
    logic [15:0] bad0;
    byteq_t fr;
    repeat (10) @(negedge sys_clk);
    rst = 0;
    repeat (40) @(negedge sys_clk);
    mon.errors = 0; mon.frames.delete(); mon.frame_words.delete();
    chk(!dta_ready, "no data before START");
    // START; nothing to send yet -> response-only frame
    send_cmd(CODE_START, 16'd1, 32'd0);
    wait_resp(CODE_START, 16'd1, 32'd0, r);
    chk(r.code == CODE_START && r.ret == 64'd0, "START confirmed");
    chk(running, "running after START");
    src_en = 1;
    // a corrupted ACK frame
    bad0 = bad_frames;
    fr = host_frame(MAC, HOST, CODE_ACK, 16'd0, 32'd0, 32'd0);
    fr[22] ^= 8'h01;
    host_send(fr);
    // user commands during the transfer, some resent (same CSN)
    for (int k = 0; k < 12; k++) begin
      logic [15:0] csn, code;
      logic [31:0] arg;
      csn = 16'(2 + k); code = 16'h0100 + 16'(k); arg = $urandom;
      #($urandom_range(20_000, 60_000));
      send_cmd(code, csn, arg);
      if (k % 4 == 1) begin
        #2_000;
        send_cmd(code, csn, arg);       // resent before the response came
      end
      wait_resp(code, csn, arg, r);
      chk(r.code == code && r.ret == user_fn(code, arg), $sformatf("user command %0d result", csn));
      if (k % 4 == 2) begin
        // the response is lost: the host resends, the core must not execute again
        resp_got.delete(csn);
        send_cmd(code, csn, 32'hFFFF_FFFF);
        wait_resp(code, csn, 32'hFFFF_FFFF, r);
        chk(r.code == code && r.ret == user_fn(code, arg), "resent command answered from stored response");
      end
    end
    // wait for NPKT packets
    while (max_pkt < NPKT) #1000;
    m_full = (n_full != 0); m_retx = (n_retrans != 0); m_early = (n_early != 0);
    // STOP
    src_en = 1;
    send_cmd(CODE_STOP, 16'd50, 32'd0);
    wait_resp(CODE_STOP, 16'd50, 32'd0, r);
    chk(r.code == CODE_STOP, "STOP confirmed");
    while (last_pkt < 0) #1000;
    #20_000;
    chk(!dta_ready, "no data accepted after STOP");
    chk(64'(last_pkt) * 1024 + 64'(last_count) == word_ctr,
        $sformatf("stream length: last packet %0d with %0d words, source wrote %0d", last_pkt, last_count, word_ctr));
    for (int p = 0; p <= last_pkt; p++) if (!got.exists(p)) begin chk(0, $sformatf("packet %0d missing", p)); break; end
    chk(data_errors == 0, $sformatf("%0d packets with wrong data", data_errors));
    chk(bad_fcs_rx == 0, "all frames from the core have a good FCS");
    chk(mon.errors == 0, "XGMII framing from the core");
    chk(user_calls == 12, $sformatf("user logic ran %0d times for 12 commands", user_calls));
    m_dup   = n_cmd_duplicates;
    m_nack  = nack_seen_again;
    m_badfcs = (bad_frames != bad0);
    chk(!proto_error, "no protocol error in normal operation");
    $display("frames %0d retransmissions %0d early %0d response-only %0d delay now %0d",
             data_frames, n_retrans, n_early, n_resp_frames, tx_delay);
    // protocol error
    host_send(host_frame(MAC, HOST, CODE_ACK, 16'd0, 32'(last_pkt + 1000), 32'd0));
    #5_000;
    m_proto = proto_error;
    // RESET
    host_send(host_frame(MAC, HOST, CODE_RESET, 16'd60, 32'd0, 32'd0));
    #5_000;
    m_reset = (!running && n_frames == 0 && !proto_error);

    $display("mechanisms: full=%0d retx=%0d early=%0d nack=%0d resp_only=%0d resp_in_data=%0d dup_cmd=%0d delay_up=%0d delay_down=%0d last=%0d bad_fcs=%0d proto_err=%0d reset=%0d",
             m_full, m_retx, m_early, m_nack, m_resp_only, m_resp_data, m_dup, m_up, m_down,
             m_last, m_badfcs, m_proto, m_reset);
    chk(m_full > 0, "buffer full happened");
    chk(m_retx > 0, "retransmission happened");
    chk(m_early > 0, "early retransmission happened");
    chk(m_nack > 0, "NACK retransmission happened");
    chk(m_resp_only > 0, "response-only frame happened");
    chk(m_resp_data > 0, "response in data frame happened");
    chk(m_dup > 0, "duplicate command happened");
    chk(m_up > 0, "delay increase happened");
    chk(m_down > 0, "delay decrease happened");
    chk(m_last > 0, "last packet happened");
    chk(m_badfcs > 0, "bad FCS frame rejected");
    chk(m_proto > 0, "protocol error detected");
    chk(m_reset > 0, "RESET command reset the core");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
