// tb_cmd_status_sync -- self-checking test of the command & status synchronizer.
// Sends 100 random transmit requests from the system clock to the unrelated
// transmitter clock. Each must arrive once, intact, as a one-cycle t_valid;
// the transmitter side answers t_done after a random time, which must come
// back as exactly one s_done per request while s_busy blocks new requests.
module tb_cmd_status_sync;
  import fade_pkg::*;
  logic sclk = 0, tclk = 0, srst = 1, trst = 1, s_valid = 0, t_done = 0;
  tx_req_t s_data = '0, t_data;
  logic s_busy, s_done, t_valid;
  int checks = 0, failures = 0;
  tx_req_t sent[$];
  int n_valid = 0, n_done = 0;

  cmd_status_sync dut (.*);

  always #5 sclk = ~sclk;
  always #3.1 tclk = ~tclk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // transmitter side model
  always @(posedge tclk) begin
    if (!trst && t_valid) begin
      n_valid++;
      checks++;
      if (sent.size() == 0 || t_data !== sent[0]) begin failures++; $display("wrong request data"); end
      if (sent.size() != 0) void'(sent.pop_front());
      fork begin
        repeat ($urandom_range(1, 20)) @(posedge tclk);
        t_done <= 1; @(posedge tclk); t_done <= 0;
      end join_none
    end
  end
  always @(posedge sclk) if (!srst && s_done) n_done++;

  initial begin
    tx_req_t r;
    repeat (4) @(posedge sclk);
    srst = 0; trst = 0;
    for (int i = 0; i < 100; i++) begin
      r = '0;
      r.kind = tx_kind_e'($urandom_range(0, 2)); r.slot = 16'($urandom); r.pkt = $urandom;
      r.seq = 16'($urandom); r.delay = $urandom; r.resp = {$urandom, $urandom, $urandom};
      r.dst_mac = {16'($urandom), $urandom};
      @(negedge sclk);
      while (s_busy) @(negedge sclk);
      s_valid = 1; s_data = r; sent.push_back(r);
      @(negedge sclk); s_valid = 0; s_data = '0;
      checks++;
      if (!s_busy) begin failures++; $display("busy not raised"); end
      // a second request while busy must be ignored
      s_valid = 1; s_data = '1;
      @(negedge sclk); s_valid = 0;
      while (s_busy) @(negedge sclk);
      @(posedge sclk); #1;
      checks++;
      if (n_done != i + 1) begin failures++; $display("done count %0d after %0d requests", n_done, i + 1); end
    end
    repeat (20) @(negedge sclk);
    checks++;
    if (n_valid != 100) begin failures++; $display("t_valid count %0d", n_valid); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
