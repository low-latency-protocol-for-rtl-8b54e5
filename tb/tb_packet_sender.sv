// tb_packet_sender -- self-checking test of the transmit state machine.
// A testbench memory (one-cycle read latency, like the packet buffer) holds
// random data. Data, last-data and response-only requests are sent; the XGMII
// monitor reassembles the frames, whose FCS is checked with the independent
// host-side CRC, and every header field, every data word, the padding, the
// frame lengths (8236 and 64 bytes) and the word counts on the wire
// (1031 and 10 words from start to terminate) are compared with expectations.
module tb_packet_sender;
  import fade_pkg::*;
  import fade_tb_pkg::*;
  localparam logic [47:0] MAC  = 48'h02_00_00_00_00_01;
  localparam logic [47:0] HOST = 48'h00_1b_21_aa_bb_cc;
  localparam int AW = 14;
  logic clk = 0, rst = 1, req_valid = 0, done;
  tx_req_t req = '0;
  logic [AW-1:0] mem_raddr;
  logic [63:0] mem_rdata, xgmii_txd;
  logic [7:0] xgmii_txc;
  logic [63:0] mem [2**AW];
  int checks = 0, failures = 0;

  packet_sender #(.MY_MAC(MAC)) dut (.*);
  fade_xgmii_mon mon (.clk, .txd(xgmii_txd), .txc(xgmii_txc));
  always #5 clk = ~clk;
  always @(posedge clk) mem_rdata <= mem[mem_raddr];

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic send(input tx_req_t r, output int cycles);
    @(negedge clk); req_valid = 1; req = r;
    @(negedge clk); req_valid = 0;
    cycles = 1;
    while (!done && cycles < 5000) begin @(negedge clk); cycles++; end
    repeat (2) @(negedge clk);
  endtask

  task automatic check_data_frame(input tx_req_t r);
    byteq_t f;
    chk(mon.frames.size() == 1, "one data frame");
    if (mon.frames.size() != 1) return;
    f = mon.frames.pop_front();
    chk(mon.frame_words.pop_front() == 1031, "data frame is 1031 words on the wire");
    chk(f.size() == 8236, $sformatf("data frame length %0d", f.size()));
    chk(fcs_ok(f), "data frame FCS");
    chk(get_be(f, 0, 6) == 64'(HOST) && get_be(f, 6, 6) == 64'(MAC), "MAC addresses");
    chk(get_be(f, 12, 2) == 64'hFADE && get_be(f, 14, 2) == 64'h0100, "EtherType and version");
    chk(get_be(f, 16, 2) == ((r.kind == TX_LAST) ? 64'hA5A6 : 64'hA5A5), "frame type");
    chk(get_be(f, 18, 2) == 64'(r.seq) && get_be(f, 20, 4) == 64'(r.pkt) &&
        get_be(f, 24, 4) == 64'(r.delay), "seq, packet number, delay");
    chk(get_be(f, 28, 2) == 64'(r.resp.code) && get_be(f, 30, 2) == 64'(r.resp.csn) &&
        get_be(f, 32, 8) == r.resp.ret, "command response");
    for (int i = 0; i < 1024; i++)
      if (get_le(f, 40 + 8*i) != mem[{r.slot[3:0], 10'(i)}]) begin
        chk(0, $sformatf("data word %0d", i)); break;
      end
    checks++;
  endtask

  initial begin
    tx_req_t r;
    byteq_t f;
    int cyc;
    foreach (mem[i]) mem[i] = {$urandom, $urandom};
    repeat (3) @(negedge clk);
    rst = 0;
    @(negedge clk);
    mon.errors = 0; mon.frames.delete(); mon.frame_words.delete();
    for (int k = 0; k < 4; k++) begin
      r = '0;
      r.kind = (k == 3) ? TX_LAST : TX_DATA; r.slot = 16'($urandom_range(0, 15));
      r.pkt = $urandom; r.seq = 16'($urandom); r.delay = $urandom;
      r.resp = {$urandom, $urandom, $urandom}; r.dst_mac = HOST;
      send(r, cyc);
      chk(cyc >= 1031 && cyc <= 1040, $sformatf("data frame took %0d cycles", cyc));
      check_data_frame(r);
    end
    r = '0;
    r.kind = TX_RESP; r.resp = '{code: 16'h0042, csn: 16'd9, ret: 64'h1122334455667788}; r.dst_mac = HOST;
    send(r, cyc);
    chk(cyc <= 16, $sformatf("response frame took %0d cycles", cyc));
    chk(mon.frames.size() == 1, "one response frame");
    if (mon.frames.size() == 1) begin
      f = mon.frames.pop_front();
      chk(mon.frame_words.pop_front() == 10, "response frame is 10 words on the wire");
      chk(f.size() == 64, $sformatf("response frame length %0d", f.size()));
      chk(fcs_ok(f), "response frame FCS");
      chk(get_be(f, 16, 2) == 64'h0000 && get_be(f, 18, 2) == 64'h0042 &&
          get_be(f, 20, 2) == 64'd9 && get_be(f, 22, 8) == 64'h1122334455667788, "response fields");
      for (int i = 30; i < 60; i++) if (f[i] != 8'hA5) begin chk(0, "padding"); break; end
    end
    chk(mon.errors == 0, "XGMII framing");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
