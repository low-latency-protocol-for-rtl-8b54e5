// fade10g_core -- FADE-10G FPGA core: reliable, low-latency transport of a
// stream of 64-bit measurement words over raw Ethernet frames (EtherType
// 0xFADE) to a computer, plus reliably delivered control commands.
//
// Structure (one instance per Ethernet link):
//   packet_receiver  (rx_clk)  XGMII receive, FCS check, START/STOP/RESET,
//                              ACK/NACK/commands into the FIFO
//   ack_cmd_fifo     (rx_clk -> sys_clk)
//   descriptor_manager (sys_clk) packet descriptors, head/tail pointers,
//                              retransmission, early retransmission,
//                              response piggy-backing, delay adaptation
//   cdc_handshake x2 (sys_clk <-> user_clk) commands out, responses back
//   command_processor (user_clk) exactly-once command execution, user port
//   packet_buffer_mem (write sys_clk, read tx_clk) 2**PKT_LOG x 1024 words
//   cmd_status_sync  (sys_clk <-> tx_clk) transmit requests and completion
//   packet_sender    (tx_clk)  frame assembly, FCS, XGMII transmit
//   fade_reset_ctrl            external reset and RESET command
// The Ethernet PHY (external chip or FPGA PCS/PMA core) is not part of the
// core; its XGMII receive and transmit buses are ports. The command
// processor runs on user_clk, its own clock domain, as the protocol allows.
// Tie user_clk to sys_clk to keep it in the system domain.
// Data source interface: dta is taken on a sys_clk edge when dta_we and
// dta_ready are both high. User command interface (user_clk): see command_processor.
module fade10g_core
  import fade_pkg::*;
#(
  parameter int unsigned PKT_LOG    = 4,
  parameter int unsigned WORDS_LOG  = 10,
  parameter logic [47:0] MY_MAC     = 48'h02_00_00_00_00_01,
  parameter int unsigned FIFO_LOG   = 4,
  parameter int unsigned WIN_LOG    = 6,
  parameter int unsigned RETR_HIGH  = 8,
  parameter int unsigned RETR_LOW   = 1,
  parameter int unsigned DELAY_STEP = 16,
  parameter int unsigned DELAY_MAX  = 4096
) (
  input  logic        sys_clk,
  input  logic        rx_clk,
  input  logic        tx_clk,
  input  logic        user_clk,
  input  logic        rst,
  // data source
  input  logic [63:0] dta,
  input  logic        dta_we,
  output logic        dta_ready,
  // PHY (XGMII)
  input  logic [63:0] xgmii_rxd,
  input  logic [7:0]  xgmii_rxc,
  output logic [63:0] xgmii_txd,
  output logic [7:0]  xgmii_txc,
  // user command interface (user_clk)
  output logic        user_req,
  output logic [15:0] user_code,
  output logic [31:0] user_arg,
  input  logic        user_ack,
  input  logic [63:0] user_ret,
  // status (sys_clk unless noted)
  output logic        running,        // rx_clk
  output logic        proto_error,
  output logic [31:0] tx_delay,
  output logic [31:0] n_frames,
  output logic [31:0] n_retrans,
  output logic [31:0] n_early,
  output logic [31:0] n_resp_frames,
  output logic [31:0] n_full,
  output logic [15:0] n_cmd_executed,   // user_clk
  output logic [15:0] n_cmd_duplicates, // user_clk
  output logic [15:0] bad_frames     // rx_clk
);
  localparam int unsigned AW = PKT_LOG + WORDS_LOG;

  logic rst_rx, rst_sys, rst_tx, rst_user, rst_cmd;

  fifo_entry_t fifo_din, fifo_dout;
  logic        fifo_wr, fifo_full, fifo_rd, fifo_empty;
  logic        cmd_valid, cmd_ready, resp_valid, resp_ready;
  logic        u_cmd_valid, u_cmd_ready, u_resp_valid, u_resp_ready;
  cmd_t        cmd, u_cmd;
  resp_t       resp, u_resp;
  logic        s_valid, s_busy, s_done, t_valid, t_done;
  tx_req_t     s_req, t_req;
  logic          mem_we;
  logic [AW-1:0] mem_waddr, mem_raddr;
  logic [63:0]   mem_wdata, mem_rdata;

  fade_reset_ctrl u_rst (
    .ext_rst(rst), .rx_clk, .sys_clk, .tx_clk, .user_clk, .rst_cmd,
    .rst_rx, .rst_sys, .rst_tx, .rst_user);

  packet_receiver #(.MY_MAC(MY_MAC)) u_rx (
    .clk(rx_clk), .rst(rst_rx), .xgmii_rxd, .xgmii_rxc,
    .fifo_wr, .fifo_din, .fifo_full, .run(running), .rst_cmd, .bad_frames);

  ack_cmd_fifo #(.DEPTH_LOG(FIFO_LOG)) u_fifo (
    .wclk(rx_clk), .wrst(rst_rx), .wr(fifo_wr), .din(fifo_din), .full(fifo_full),
    .rclk(sys_clk), .rrst(rst_sys), .rd(fifo_rd), .dout(fifo_dout), .empty(fifo_empty));

  descriptor_manager #(
    .PKT_LOG(PKT_LOG), .WORDS_LOG(WORDS_LOG), .WIN_LOG(WIN_LOG), .RETR_HIGH(RETR_HIGH),
    .RETR_LOW(RETR_LOW), .DELAY_STEP(DELAY_STEP), .DELAY_MAX(DELAY_MAX)) u_dm (
    .clk(sys_clk), .rst(rst_sys), .dta, .dta_we, .dta_ready, .run_async(running),
    .fifo_rd, .fifo_empty, .fifo_dout,
    .cmd_valid, .cmd_ready, .cmd, .resp_valid, .resp_ready, .resp,
    .tx_valid(s_valid), .tx_req(s_req), .tx_busy(s_busy), .tx_done(s_done),
    .mem_we, .mem_waddr, .mem_wdata,
    .proto_error, .tx_delay, .n_frames, .n_retrans, .n_early, .n_resp_frames, .n_full);

  cdc_handshake #(.T(cmd_t)) u_cmd_cdc (
    .sclk(sys_clk), .srst(rst_sys), .s_valid(cmd_valid), .s_ready(cmd_ready), .s_data(cmd),
    .dclk(user_clk), .drst(rst_user), .d_valid(u_cmd_valid), .d_ready(u_cmd_ready), .d_data(u_cmd));

  command_processor u_cp (
    .clk(user_clk), .rst(rst_user), .cmd_valid(u_cmd_valid), .cmd_ready(u_cmd_ready), .cmd(u_cmd),
    .resp_valid(u_resp_valid), .resp_ready(u_resp_ready), .resp(u_resp),
    .user_req, .user_code, .user_arg, .user_ack, .user_ret,
    .n_executed(n_cmd_executed), .n_duplicates(n_cmd_duplicates));

  cdc_handshake #(.T(resp_t)) u_resp_cdc (
    .sclk(user_clk), .srst(rst_user), .s_valid(u_resp_valid), .s_ready(u_resp_ready), .s_data(u_resp),
    .dclk(sys_clk), .drst(rst_sys), .d_valid(resp_valid), .d_ready(resp_ready), .d_data(resp));

  packet_buffer_mem #(.PKT_LOG(PKT_LOG), .WORDS_LOG(WORDS_LOG)) u_mem (
    .wclk(sys_clk), .we(mem_we), .waddr(mem_waddr), .wdata(mem_wdata),
    .rclk(tx_clk), .raddr(mem_raddr), .rdata(mem_rdata));

  cmd_status_sync u_sync (
    .sclk(sys_clk), .srst(rst_sys), .s_valid, .s_data(s_req), .s_busy, .s_done,
    .tclk(tx_clk), .trst(rst_tx), .t_valid, .t_data(t_req), .t_done);

  packet_sender #(.PKT_LOG(PKT_LOG), .WORDS_LOG(WORDS_LOG), .MY_MAC(MY_MAC)) u_tx (
    .clk(tx_clk), .rst(rst_tx), .req_valid(t_valid), .req(t_req), .done(t_done),
    .mem_raddr, .mem_rdata, .xgmii_txd, .xgmii_txc);
endmodule
