// tb_ack_cmd_fifo -- self-checking test of the dual-clock Ack & Cmd FIFO.
// A writer on one clock pushes 400 random entries with random gaps, a reader
// on an unrelated clock pops with random gaps; order and contents are
// compared with a scoreboard queue. Also checks that full is raised when the
// reader stops (2**DEPTH_LOG entries accepted) and that empty is seen when
// drained.
module tb_ack_cmd_fifo;
  import fade_pkg::*;
  logic wclk = 0, rclk = 0, wrst = 1, rrst = 1, wr = 0, rd = 0;
  fifo_entry_t din = '0, dout;
  logic full, empty;
  int checks = 0, failures = 0;
  fifo_entry_t sb[$];
  bit hold_reader = 0;
  int received = 0;
  bit writer_done = 0;

  ack_cmd_fifo dut (.*);

  always #5 wclk = ~wclk;
  always #7.3 rclk = ~rclk;

  initial begin
    #3_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  function automatic fifo_entry_t rnd();
    fifo_entry_t e;
    e.kind = ent_kind_e'($urandom_range(0, 2));
    e.code = 16'($urandom); e.seq = 16'($urandom); e.val = $urandom;
    e.delay = $urandom; e.src_mac = {16'($urandom), $urandom};
    return e;
  endfunction

  // writer
  initial begin
    int accepted;
    repeat (4) @(posedge wclk);
    wrst = 0;
    // fill with the reader held off: exactly 16 entries must be accepted
    hold_reader = 1;
    accepted = 0;
    for (int i = 0; i < 40; i++) begin
      @(negedge wclk);
      wr = 1; din = rnd();
      if (!full) begin sb.push_back(din); accepted++; end
    end
    @(negedge wclk); wr = 0;
    checks++;
    if (accepted != 16 || !full) begin failures++; $display("accepted %0d full %0b", accepted, full); end
    hold_reader = 0;
    for (int i = 0; i < 400; i++) begin
      @(negedge wclk);
      wr = ($urandom_range(0, 2) != 0); din = rnd();
      if (wr && !full) sb.push_back(din);
    end
    @(negedge wclk); wr = 0;
    writer_done = 1;
  end

  // reader
  initial begin
    repeat (3) @(posedge rclk);
    rrst = 0;
    forever begin
      @(negedge rclk);
      rd = 0;
      if (!hold_reader && !empty && $urandom_range(0, 3) != 0) begin
        checks++;
        if (sb.size() == 0 || dout !== sb[0]) begin
          failures++; $display("order/content mismatch at entry %0d", received);
        end
        if (sb.size() != 0) void'(sb.pop_front());
        received++;
        rd = 1;
      end
      if (writer_done && sb.size() == 0) break;
    end
    @(negedge rclk); rd = 0;
    repeat (6) @(negedge rclk);
    checks++;
    if (!empty) begin failures++; $display("not empty after draining"); end
    checks++;
    if (received < 200) begin failures++; $display("only %0d entries received", received); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
