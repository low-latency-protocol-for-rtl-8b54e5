// fade_reset_ctrl -- reset distribution of the FADE-10G core.
//
// The core is reset by its external reset input or by a RESET command frame,
// which resets the whole core (and is therefore never confirmed). rst_cmd is
// a one-cycle pulse from the packet receiver in the receiver clock domain; it
// is stretched here to STRETCH cycles by a counter that only the external
// reset clears, so the pulse survives the reset of the receiver itself. The
// combined request is passed through a two-flop synchroniser into each of
// the four clock domains (receiver, system, transmitter, user command), giving
// synchronous active-high resets. The synchroniser flops power up set, so
// each domain also starts in reset. Those power-up values are declaration
// initialisers on flops, as FPGA flip-flops allow; a lint note about an
// initialised variable that is also assigned is expected there. Stretch length and synchroniser depth are
// this design's choices.
module fade_reset_ctrl #(
  parameter int unsigned STRETCH = 16
) (
  input  logic ext_rst,    // asynchronous, active high
  input  logic rx_clk,
  input  logic sys_clk,
  input  logic tx_clk,
  input  logic user_clk,
  input  logic rst_cmd,    // rx_clk domain pulse
  output logic rst_rx,
  output logic rst_sys,
  output logic rst_tx,
  output logic rst_user
);
  logic [1:0] ext_rx;
  logic [$clog2(STRETCH+1)-1:0] cnt;
  logic req;

  always_ff @(posedge rx_clk) begin
    ext_rx <= {ext_rx[0], ext_rst};
    if (ext_rx[1])    cnt <= '0;
    else if (rst_cmd) cnt <= ($clog2(STRETCH+1))'(STRETCH);
    else if (cnt != 0) cnt <= cnt - 1'b1;
  end
  assign req = ext_rx[1] || (cnt != 0);

  // power-up value: every domain starts in reset (FPGA flip-flop initial value)
  logic [1:0] s_rx = '1, s_sys = '1, s_tx = '1, s_user = '1;
  always_ff @(posedge rx_clk)  s_rx  <= {s_rx[0],  req || ext_rst};
  always_ff @(posedge sys_clk) s_sys <= {s_sys[0], req || ext_rst};
  always_ff @(posedge tx_clk)  s_tx  <= {s_tx[0],  req || ext_rst};
  always_ff @(posedge user_clk) s_user <= {s_user[0], req || ext_rst};
  assign rst_rx  = s_rx[1];
  assign rst_sys = s_sys[1];
  assign rst_tx  = s_tx[1];
  assign rst_user = s_user[1];
endmodule
