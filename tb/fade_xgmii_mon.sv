// fade_xgmii_mon -- XGMII transmit monitor used by the FADE-10G testbenches.
//
// Collects the bytes of each frame between a lane-0 start character and the
// terminate character, and hands them out through the frame queue. It also
// counts words that break the framing rules (control characters inside a
// frame other than the terminate, a start outside lane 0).
module fade_xgmii_mon (
  input logic        clk,
  input logic [63:0] txd,
  input logic [7:0]  txc
);
  import fade_tb_pkg::*;
  byteq_t frames[$];
  int     frame_words[$];   // words from start to terminate, per frame
  int     errors = 0;
  byteq_t cur;
  bit     in_frame = 0;
  int     words = 0;

  always @(posedge clk) begin
    if (!in_frame) begin
      if (txc == 8'h01 && txd[7:0] == 8'hFB) begin
        in_frame = 1; cur.delete(); words = 1;
      end else if (txc != 8'hFF) errors++;
    end else begin
      words++;
      for (int l = 0; l < 8; l++) begin
        if (!in_frame) break;
        if (txc[l]) begin
          if (txd[8*l +: 8] != 8'hFD) errors++;
          frames.push_back(cur);
          frame_words.push_back(words);
          in_frame = 0;
        end else cur.push_back(txd[8*l +: 8]);
      end
    end
  end
endmodule
