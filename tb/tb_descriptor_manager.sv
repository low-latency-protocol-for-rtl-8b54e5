// tb_descriptor_manager -- self-checking test of the descriptor manager.
// Runs at 4 packet slots of 8 words. The testbench plays the FIFO, the
// command processor, the packet buffer and the sender (it finishes each
// transmission when the script says so), and checks, in order:
//  - data only accepted after START; the filled packet sent with seq 0;
//  - buffer full: dta_ready falls after 4 packets, rises when the tail moves;
//  - transmission order and frame sequence numbers;
//  - early retransmission (packet 1 lost, ACK of packet 2 with a newer
//    sequence number puts packet 1 first, with a new sequence number);
//  - NACK causes a retransmission; ACK frees slots at the tail;
//  - a command response goes out alone when nothing waits, and rides in a
//    data frame when one does; commands are passed on, START's MAC is used;
//  - an ACK beyond the last packet sent raises proto_error;
//  - STOP flushes a partial packet as a last packet with its word count;
//  - the transmission delay follows an independent model of the window
//    rule, and the gap after each frame is at least that delay.
module tb_descriptor_manager;
  import fade_pkg::*;
  localparam int PL = 2, WL = 3, AW = PL + WL;
  localparam logic [47:0] HOST = 48'h00_1b_21_aa_bb_cc;
  localparam int WIN = 4, RH = 2, RL = 0, STEP = 5, DMAX = 12;
  logic clk = 0, rst = 1;
  logic [63:0] dta = '0;
  logic dta_we = 0, dta_ready, run_async = 0;
  logic fifo_rd, fifo_empty = 1;
  fifo_entry_t fifo_dout = '0;
  logic cmd_valid, cmd_ready = 1, resp_valid = 0, resp_ready;
  cmd_t cmd;
  resp_t resp = '0;
  logic tx_valid, tx_busy = 0, tx_done = 0;
  tx_req_t tx_req;
  logic mem_we;
  logic [AW-1:0] mem_waddr;
  logic [63:0] mem_wdata;
  logic proto_error;
  logic [31:0] tx_delay, n_frames, n_retrans, n_early, n_resp_frames, n_full;
  int checks = 0, failures = 0;

  descriptor_manager #(.PKT_LOG(PL), .WORDS_LOG(WL), .WIN_LOG(2), .RETR_HIGH(RH),
                       .RETR_LOW(RL), .DELAY_STEP(STEP), .DELAY_MAX(DMAX)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  // ---- FIFO model ----
  fifo_entry_t q[$];
  // the FIFO outputs follow the queue, updated after every change of it
  always @(posedge clk) begin
    if (!rst && fifo_rd && q.size() != 0) void'(q.pop_front());
    #1 fifo_empty = (q.size() == 0);
    fifo_dout = (q.size() != 0) ? q[0] : '0;
  end
  task automatic ack(input logic [31:0] pkt, input logic [15:0] seq, input bit nack = 0);
    fifo_entry_t e = '0;
    e.kind = nack ? ENT_NACK : ENT_ACK; e.code = nack ? CODE_NACK : CODE_ACK;
    e.seq = seq; e.val = pkt; e.src_mac = HOST;
    @(negedge clk); q.push_back(e);
    while (q.size() != 0) @(negedge clk);
    repeat (3) @(negedge clk);   // tail freeing
  endtask

  // ---- memory model ----
  logic [63:0] mem [2**AW];
  always @(posedge clk) if (mem_we) mem[mem_waddr] <= mem_wdata;

  // ---- command processor model ----
  cmd_t cmds[$];
  always @(posedge clk) if (!rst && cmd_valid && cmd_ready) cmds.push_back(cmd);

  // ---- sender model ----
  tx_req_t reqs[$];
  int      last_done_cycle = 0, cycle = 0, min_gap_ok = 1;
  logic [31:0] sent_pkts[$];
  int model_win = 0, model_retr = 0, model_delay = 0;
  always @(posedge clk) begin
    cycle++;
    if (!rst && tx_valid) begin
      if (cycle - last_done_cycle < int'(tx_delay)) min_gap_ok = 0;
      reqs.push_back(tx_req);
      tx_busy <= 1;
      if (tx_req.kind != TX_RESP) begin
        bit retx = 0;
        foreach (sent_pkts[i]) if (sent_pkts[i] == tx_req.pkt) retx = 1;
        if (!retx) sent_pkts.push_back(tx_req.pkt);
        model_retr += retx; model_win++;
        if (model_win == WIN) begin
          if (model_retr >= RH) model_delay = (model_delay + STEP > DMAX) ? DMAX : model_delay + STEP;
          else if (model_retr <= RL) model_delay = (model_delay > STEP) ? model_delay - STEP : 0;
          model_win = 0; model_retr = 0;
        end
      end
    end
  end
  task automatic complete();
    @(negedge clk); tx_done = 1; tx_busy = 0;
    @(negedge clk); tx_done = 0; last_done_cycle = cycle;
  endtask
  task automatic next_req(output tx_req_t r);
    int t = 0;
    while (reqs.size() == 0 && t < 200) begin @(negedge clk); t++; end
    if (reqs.size() == 0) begin chk(0, "no transmit request"); r = '0; end
    else r = reqs.pop_front();
  endtask
  task automatic expect_data(input logic [31:0] pkt, input logic [15:0] seq, input tx_kind_e k = TX_DATA);
    tx_req_t r;
    next_req(r);
    chk(r.kind == k && r.pkt == pkt && r.seq == seq && r.slot == 16'(pkt % 4),
        $sformatf("expected packet %0d seq %0d, got kind %0d packet %0d seq %0d", pkt, seq, r.kind, r.pkt, r.seq));
  endtask

  // ---- data source ----
  task automatic fill(input int pkt, input int nwords = 8);
    for (int i = 0; i < nwords; i++) begin
      @(negedge clk);
      while (!dta_ready) @(negedge clk);
      dta_we = 1; dta = {32'(pkt), 32'(i)};
      @(negedge clk); dta_we = 0;
    end
  endtask
  function automatic bit slot_ok(input int pkt);
    for (int i = 0; i < 8; i++) if (mem[{PL'(pkt), WL'(i)}] != {32'(pkt), 32'(i)}) return 0;
    return 1;
  endfunction

  initial begin
    tx_req_t r;
    fifo_entry_t e;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (5) @(negedge clk);
    chk(!dta_ready, "no data accepted before START");
    // START (as a command, with the host MAC) and run
    e = '0; e.kind = ENT_CMD; e.code = CODE_START; e.seq = 16'd1; e.src_mac = HOST;
    q.push_back(e);
    run_async = 1;
    repeat (5) @(negedge clk);
    chk(cmds.size() == 1 && cmds[0].code == CODE_START && cmds[0].csn == 16'd1, "START passed on");
    chk(dta_ready, "ready after START");

    fill(0);
    expect_data(0, 0);
    chk(reqs.size() == 0, "single request while busy");
    chk(slot_ok(0), "packet 0 in memory");
    fill(1); fill(2); fill(3);
    repeat (3) @(negedge clk);
    chk(!dta_ready, "buffer full: not ready");
    chk(n_full != 0, "full cycles counted");
    complete(); expect_data(1, 1);
    complete(); expect_data(2, 2);
    complete(); expect_data(3, 3);
    chk(slot_ok(1) && slot_ok(2) && slot_ok(3), "packets 1..3 in memory");
    // packet 1 lost; ACKs of 0 and 2 arrive while packet 3 is on the wire
    ack(0, 0);
    chk(dta_ready, "ready again after tail moved");
    chk(dut.d_r == 4'b0000, "ACK of the oldest packet marks nothing for early retransmission");
    ack(2, 2);
    chk(dut.d_r == 4'b0010, "only packet 1 (seq 1 < 2) marked; packet 3 (seq 3) is not");
    chk(!proto_error, "no protocol error");
    complete();
    expect_data(1, 4);                       // early retransmission, new seq
    chk(n_early == 1 && n_retrans == 1, $sformatf("early %0d retrans %0d", n_early, n_retrans));
    ack(1, 4); ack(3, 3);
    fill(4);
    complete();
    expect_data(4, 5);
    ack(4, 5, 1);                            // NACK
    complete();
    expect_data(4, 6);
    chk(n_retrans == 2, "NACK retransmission counted");
    ack(4, 6);
    complete();
    repeat (20) @(negedge clk);
    chk(reqs.size() == 0, "nothing to send when all confirmed");
    // response alone
    @(negedge clk); resp_valid = 1; resp = '{code: 16'h0077, csn: 16'd5, ret: 64'hAB};
    while (!resp_ready) @(negedge clk);
    @(negedge clk); resp_valid = 0;
    next_req(r);
    chk(r.kind == TX_RESP && r.resp.csn == 16'd5 && r.resp.ret == 64'hAB && r.dst_mac == HOST,
        "response-only frame");
    chk(n_resp_frames == 1, "response frame counted");
    complete();
    // response in a data frame
    fill(5);
    expect_data(5, 7);
    @(negedge clk); resp_valid = 1; resp = '{code: 16'h0078, csn: 16'd6, ret: 64'hCD};
    while (!resp_ready) @(negedge clk);
    @(negedge clk); resp_valid = 0;
    complete();
    next_req(r);
    chk(r.kind == TX_DATA && r.pkt == 32'd5 && r.resp.csn == 16'd6 && r.resp.ret == 64'hCD,
        "response carried by data frame");
    ack(5, 8);
    complete();
    // STOP with a partly filled packet
    fill(6, 3);
    run_async = 0;
    expect_data(6, 9, TX_LAST);
    chk(mem[{PL'(6), WL'(7)}] == 64'd3, "word count stored in last word");
    ack(6, 9);
    complete();
    repeat (10) @(negedge clk);
    chk(!dta_ready, "not ready after STOP");
    // window rule
    chk(int'(tx_delay) == model_delay, $sformatf("delay %0d expected %0d", tx_delay, model_delay));
    chk(model_delay != 0 || n_frames < 8, "delay was raised at least once");
    chk(min_gap_ok == 1, "gap after frames respects the delay");
    // protocol error
    ack(100, 10);
    chk(proto_error, "ACK beyond last packet sent gives a protocol error");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
