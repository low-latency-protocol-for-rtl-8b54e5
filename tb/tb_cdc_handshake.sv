// tb_cdc_handshake -- self-checking test of the clock-domain crossing that
// carries commands and responses between the system and user clocks.
//
// Runs three cases: destination slower than the source, destination faster,
// and both sides on one clock net. In each case the source offers records
// with random gaps and the destination takes them with random stalls. A
// queue scoreboard checks that every record arrives once, in order and
// unchanged. The testbench also checks the round-trip timing (d_valid within
// 4 destination cycles of acceptance) and that s_ready stays low while a
// record is in flight.
module tb_cdc_handshake;
  typedef struct packed { logic [15:0] code; logic [15:0] csn; logic [31:0] arg; } rec_t;

  logic sclk = 0, dclk = 0, rst = 1;
  logic s_valid = 0, s_ready, d_valid, d_ready = 0;
  rec_t s_data = '0, d_data;
  real  s_half = 3.0, d_half = 4.1;
  bit   same_clk = 0;
  logic dclk_mux;

  always #(s_half) sclk = ~sclk;
  always #(d_half) dclk = ~dclk;
  assign dclk_mux = same_clk ? sclk : dclk;

  cdc_handshake #(.T(rec_t)) dut (
    .sclk, .srst(rst), .s_valid, .s_ready, .s_data,
    .dclk(dclk_mux), .drst(rst), .d_valid, .d_ready, .d_data);

  int checks = 0, failures = 0;
  task automatic chk(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %0t: %s", $time, what); end
  endtask

  initial begin
    #2_000_000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  rec_t sent[$];
  int   n_sent, n_recv, lat, lat_max;
  bit   in_flight;

  // source: offer a new record after a random gap, hold it until taken
  always @(posedge sclk) begin
    if (rst) begin
      s_valid <= 0;
    end else begin
      if (s_valid && s_ready) begin
        sent.push_back(s_data);
        n_sent++;
        s_valid <= 0;
      end else if (!s_valid && $urandom_range(0, 3) == 0) begin
        s_valid <= 1;
        s_data  <= rec_t'({$urandom, $urandom});
      end
    end
  end

  // no second record is accepted while one is in flight
  always @(posedge sclk) if (!rst) begin
    if (s_valid && s_ready) begin
      chk(!in_flight, "accepted while a record is in flight");
      in_flight = 1;
    end
  end

  // destination: random ready, compare with the scoreboard
  always @(posedge dclk_mux) begin
    if (rst) begin
      d_ready <= 0; lat = 0;
    end else begin
      if (in_flight && !d_valid) lat++;
      if (d_valid && d_ready) begin
        chk(sent.size() != 0, "record arrived that was never sent");
        if (sent.size() != 0) chk(d_data == sent.pop_front(), "record changed on the way");
        n_recv++;
        in_flight = 0;
        lat = 0;
      end
      if (d_valid && lat != 0) begin
        if (lat > lat_max) lat_max = lat;
        lat = 0;
      end
      d_ready <= ($urandom_range(0, 2) != 0);
    end
  end

  task automatic run_case(input real sh, input real dh, input bit same, input string name);
    s_half = sh; d_half = dh; same_clk = same;
    rst = 1; in_flight = 0; sent.delete(); n_sent = 0; n_recv = 0; lat_max = 0;
    repeat (6) @(posedge sclk);
    repeat (6) @(posedge dclk_mux);
    rst = 0;
    while (n_recv < 300) @(posedge sclk);
    @(posedge sclk) rst = 1;
    chk(n_recv == 300, {name, ": 300 records received"});
    chk(n_sent - n_recv <= 1, {name, ": nothing lost"});
    chk(lat_max <= 4, $sformatf("%s: d_valid %0d destination cycles after acceptance", name, lat_max));
    $display("%s: %0d records, worst latency %0d destination cycles", name, n_recv, lat_max);
  endtask

  initial begin
    run_case(3.0, 4.1, 0, "slower destination");
    run_case(4.1, 3.0, 0, "faster destination");
    run_case(3.0, 3.0, 1, "same clock");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
