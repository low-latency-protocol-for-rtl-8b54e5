// tb_packet_receiver -- self-checking test of the receive state machine.
// Frames built by the host-side helpers (independent CRC) are played into the
// XGMII receive port: ACK, NACK, START, STOP, RESET, user commands, frames of
// every terminate-lane position, a frame with a corrupted byte, a frame for
// another MAC address and a frame with a foreign EtherType. FIFO writes,
// run, rst_cmd and the bad-frame counter are compared with expectations.
module tb_packet_receiver
  import fade_tb_pkg::*;
;
  import fade_pkg::*;
  localparam logic [47:0] MAC  = 48'h02_00_00_00_00_01;
  localparam logic [47:0] HOST = 48'h00_1b_21_aa_bb_cc;
  logic clk = 0, rst = 1;
  logic [63:0] xgmii_rxd = 64'h0707070707070707;
  logic [7:0]  xgmii_rxc = 8'hFF;
  logic fifo_wr, fifo_full = 0, run, rst_cmd;
  fifo_entry_t fifo_din;
  logic [15:0] bad_frames;
  int checks = 0, failures = 0;
  fifo_entry_t got[$];
  int rst_pulses = 0;

  packet_receiver #(.MY_MAC(MAC)) dut (.*);
  always #5 clk = ~clk;

  initial begin
    #1_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) if (!rst) begin
    if (fifo_wr) got.push_back(fifo_din);
    if (rst_cmd) rst_pulses++;
  end

  task automatic play(input byteq_t fr);
    logic [71:0] w[$];
    to_xgmii(fr, w);
    foreach (w[i]) begin
      @(negedge clk);
      xgmii_rxc = w[i][71:64]; xgmii_rxd = w[i][63:0];
    end
    @(negedge clk); xgmii_rxc = 8'hFF; xgmii_rxd = 64'h0707070707070707;
    repeat (3) @(negedge clk);
  endtask

  task automatic expect_entry(input ent_kind_e k, input logic [15:0] code, input logic [15:0] seq,
                              input logic [31:0] val, input logic [31:0] delay);
    checks++;
    if (got.size() != 1) begin
      failures++; $display("expected one FIFO entry, got %0d", got.size());
    end else if (got[0].kind != k || got[0].code != code || got[0].seq != seq ||
                 got[0].val != val || got[0].src_mac != HOST ||
                 (k != ENT_CMD && got[0].delay != delay)) begin
      failures++; $display("wrong entry code %h seq %h val %h", got[0].code, got[0].seq, got[0].val);
    end
    got.delete();
  endtask

  task automatic expect_none(input string what);
    checks++;
    if (got.size() != 0) begin failures++; $display("%s: unexpected FIFO entry", what); end
    got.delete();
  endtask

  initial begin
    byteq_t fr;
    logic [15:0] bad0;
    repeat (3) @(negedge clk);
    rst = 0;
    repeat (2) @(negedge clk);

    play(host_frame(MAC, HOST, CODE_ACK, 16'd77, 32'h0000_1234, 32'd55));
    expect_entry(ENT_ACK, CODE_ACK, 16'd77, 32'h0000_1234, 32'd55);
    play(host_frame(MAC, HOST, CODE_NACK, 16'hFFFF, 32'h8000_0001, 32'd0));
    expect_entry(ENT_NACK, CODE_NACK, 16'hFFFF, 32'h8000_0001, 32'd0);
    checks++; if (run) begin failures++; $display("run before START"); end
    play(host_frame(MAC, HOST, CODE_START, 16'd1, 32'd0, 32'd0));
    expect_entry(ENT_CMD, CODE_START, 16'd1, 32'd0, 32'd0);
    checks++; if (!run) begin failures++; $display("START did not set run"); end
    play(host_frame(MAC, HOST, 16'h0123, 16'd2, 32'hCAFE_F00D, 32'd0));
    expect_entry(ENT_CMD, 16'h0123, 16'd2, 32'hCAFE_F00D, 32'd0);

    // every terminate lane: frames of 64..71 bytes
    for (int extra = 0; extra < 8; extra++) begin
      fr = '{};
      push_be(fr, 64'(MAC), 6); push_be(fr, 64'(HOST), 6);
      push_be(fr, 64'hFADE, 2); push_be(fr, 64'h0100, 2);
      push_be(fr, 64'(CODE_ACK), 2); push_be(fr, 64'(extra), 2);
      push_be(fr, 64'(100 + extra), 4); push_be(fr, 64'd9, 4);
      while (fr.size() < 60 + extra) fr.push_back(8'h5A);
      play(finish_frame(fr));
      expect_entry(ENT_ACK, CODE_ACK, 16'(extra), 32'(100 + extra), 32'd9);
    end

    // corrupted frame
    bad0 = bad_frames;
    fr = host_frame(MAC, HOST, CODE_ACK, 16'd5, 32'd5, 32'd0);
    fr[20] = fr[20] ^ 8'h10;
    play(fr);
    expect_none("bad FCS");
    checks++; if (bad_frames != bad0 + 16'd1) begin failures++; $display("bad_frames not counted"); end
    // other destination
    play(host_frame(48'h02_00_00_00_00_02, HOST, CODE_ACK, 16'd5, 32'd5, 32'd0));
    expect_none("other MAC");
    // other EtherType
    fr = '{};
    push_be(fr, 64'(MAC), 6); push_be(fr, 64'(HOST), 6);
    push_be(fr, 64'h0800, 2); push_be(fr, 64'h0100, 2); push_be(fr, 64'(CODE_ACK), 2);
    play(finish_frame(fr));
    expect_none("other EtherType");
    // FIFO full: entry dropped
    fifo_full = 1;
    play(host_frame(MAC, HOST, CODE_ACK, 16'd6, 32'd6, 32'd0));
    expect_none("FIFO full");
    fifo_full = 0;

    play(host_frame(MAC, HOST, CODE_STOP, 16'd3, 32'd0, 32'd0));
    expect_entry(ENT_CMD, CODE_STOP, 16'd3, 32'd0, 32'd0);
    checks++; if (run) begin failures++; $display("STOP did not clear run"); end
    play(host_frame(MAC, HOST, CODE_RESET, 16'd4, 32'd0, 32'd0));
    expect_none("RESET");
    checks++; if (rst_pulses != 1) begin failures++; $display("rst_cmd pulses %0d", rst_pulses); end

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
