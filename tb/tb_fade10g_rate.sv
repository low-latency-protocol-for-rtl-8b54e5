// tb_fade10g_rate -- throughput and command-rate workload for the FADE-10G core
// at its default size.
//
// Loss-free link, host acknowledging every data frame at once, data source
// faster than the link (sys_clk 166.7 MHz), XGMII at 156.25 MHz (64 bits per
// cycle = 10 Gbps line rate), command processor on the system clock. While the stream runs, the host keeps exactly one
// user command outstanding: each response triggers the next command.
// Over 40 data frames the testbench measures the payload rate on the wire and
// the number of commands completed per second, and checks them against the
// 10 Gbps figures the protocol is known to reach (9.815 Gbps of payload,
// about 40000 commands per second). It also checks that no frame needed
// retransmission and that the transmission delay stayed at 0.
module tb_fade10g_rate;
  import fade_pkg::*;
  import fade_tb_pkg::*;
  localparam logic [47:0] MAC  = 48'h02_00_00_00_00_01;
  localparam logic [47:0] HOST = 48'h00_1b_21_aa_bb_cc;
  localparam real TX_PERIOD_NS = 6.4;

  logic sys_clk = 0, rx_clk = 0, tx_clk = 0, rst = 1;
  logic user_clk;
  assign user_clk = sys_clk;   // command processor in the system clock domain
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

  always #3.0 sys_clk = ~sys_clk;
  always #3.2 tx_clk  = ~tx_clk;
  always #3.1 rx_clk  = ~rx_clk;

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    #5_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // data source: counter pattern, always writing when ready
  logic [63:0] word_ctr = '0;
  bit src_en = 0;
  always @(negedge sys_clk) begin
    dta_we = src_en && dta_ready;
    dta    = word_ctr;
    if (dta_we) word_ctr++;
  end

  // user logic: answers in the next cycle
  always @(posedge sys_clk) begin
    user_ack <= 1'b0;
    if (!rst && user_req && !user_ack) begin
      user_ack <= 1'b1;
      user_ret <= {user_arg, 16'h0, user_code};
    end
  end

  // host transmit side
  logic [71:0] rxq[$];
  always @(negedge rx_clk) begin
    if (rxq.size() != 0) {xgmii_rxc, xgmii_rxd} = rxq.pop_front();
    else begin xgmii_rxc = 8'hFF; xgmii_rxd = 64'h0707070707070707; end
  end

  // host receive side
  int    tx_cycle = 0;
  always @(posedge tx_clk) tx_cycle++;
  int    frames = 0, data_errors = 0, cmds_done = 0, bad_resp = 0;
  int    t_start = -1, t_end = -1, cmds_at_start = 0, cmds_at_end = 0;
  bit    measuring_done = 0;
  logic [15:0] next_csn = 16'd2;
  logic [31:0] cur_arg = '0;

  task automatic send_next_cmd();
    cur_arg = $urandom;
    to_xgmii(host_frame(MAC, HOST, 16'h0200, next_csn, cur_arg, 32'd0), rxq);
  endtask

  task automatic take_resp(input byteq_t f, input int pos);
    logic [15:0] code, csn;
    logic [63:0] ret;
    code = 16'(get_be(f, pos, 2)); csn = 16'(get_be(f, pos + 2, 2)); ret = get_be(f, pos + 4, 8);
    if (code == 16'h0200 && csn == next_csn) begin
      if (ret != {cur_arg, 16'h0, 16'h0200}) bad_resp++;
      cmds_done++;
      next_csn++;
      if (src_en) send_next_cmd();
    end
  endtask

  always @(posedge tx_clk) begin
    while (mon.frames.size() != 0) begin
      byteq_t f;
      int pkt, typ;
      f = mon.frames.pop_front();
      void'(mon.frame_words.pop_front());
      if (!fcs_ok(f)) begin data_errors++; continue; end
      typ = int'(get_be(f, 16, 2));
      if (typ == 16'h0000) begin take_resp(f, 18); continue; end
      pkt = int'(get_be(f, 20, 4));
      for (int i = 0; i < 1024; i += 97)
        if (get_le(f, 40 + 8*i) != 64'(pkt) * 1024 + 64'(i)) begin data_errors++; break; end
      take_resp(f, 28);
      to_xgmii(host_frame(MAC, HOST, CODE_ACK, 16'(get_be(f, 18, 2)), 32'(pkt), 32'd0), rxq);
      frames++;
      if (frames == 10) begin t_start = tx_cycle; cmds_at_start = cmds_done; end
      if (frames == 50) begin t_end = tx_cycle; cmds_at_end = cmds_done; measuring_done = 1; end
    end
  end

  initial begin
    real secs, gbps, cmd_rate;
    repeat (10) @(negedge sys_clk);
    rst = 0;
    repeat (40) @(negedge sys_clk);
    to_xgmii(host_frame(MAC, HOST, CODE_START, 16'd1, 32'd0, 32'd0), rxq);
    while (!running) @(negedge sys_clk);
    src_en = 1;
    send_next_cmd();
    while (!measuring_done) @(negedge sys_clk);
    secs     = real'(t_end - t_start) * TX_PERIOD_NS * 1.0e-9;
    gbps     = 40.0 * 8192.0 * 8.0 / secs / 1.0e9;
    cmd_rate = real'(cmds_at_end - cmds_at_start) / secs;
    $display("payload rate %0.3f Gbps over 40 frames, %0d tx cycles; %0.0f commands/s",
             gbps, t_end - t_start, cmd_rate);
    chk(gbps >= 9.815, "payload rate at least 9.815 Gbps");
    chk(gbps <= 10.0, "payload rate below the line rate");
    chk(cmd_rate >= 40000.0, "at least 40000 commands per second while streaming");
    chk(bad_resp == 0, "command results");
    chk(data_errors == 0, "data and FCS");
    chk(n_retrans == 0, "no retransmission on a loss-free link");
    chk(tx_delay == 0, "no added delay on a loss-free link");
    chk(n_frames >= 50, "core counted the frames it sent");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
