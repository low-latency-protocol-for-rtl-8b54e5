// tb_packet_buffer_mem -- self-checking test of the dual-clock packet buffer.
// Writes random words at random addresses (system clock), then reads them
// back on the unrelated read clock and checks data and the one-cycle read
// latency against a reference array kept by the testbench.
module tb_packet_buffer_mem;
  localparam int AW = 14;
  logic wclk = 0, rclk = 0, we = 0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic [63:0] wdata = '0, rdata;
  int checks = 0, failures = 0;
  logic [63:0] ref_mem [logic [AW-1:0]];

  packet_buffer_mem dut (.*);

  always #5 wclk = ~wclk;
  always #3.7 rclk = ~rclk;

  initial begin
    #2_000_000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [AW-1:0] a;
    logic [63:0] d;
    for (int i = 0; i < 300; i++) begin
      @(negedge wclk);
      a = AW'($urandom); d = {$urandom, $urandom};
      we = 1; waddr = a; wdata = d; ref_mem[a] = d;
    end
    @(negedge wclk); we = 0;
    // both ends of the address range
    @(negedge wclk); we = 1; waddr = '0; wdata = 64'h0123_4567_89AB_CDEF; ref_mem['0] = wdata;
    @(negedge wclk); waddr = '1; wdata = 64'hFEDC_BA98_7654_3210; ref_mem['1] = wdata;
    @(negedge wclk); we = 0;
    foreach (ref_mem[k]) begin
      @(negedge rclk); raddr = k;
      @(posedge rclk); #0.1;
      checks++;
      if (rdata !== ref_mem[k]) begin
        failures++;
        $display("mismatch at %0h: %h expected %h", k, rdata, ref_mem[k]);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
