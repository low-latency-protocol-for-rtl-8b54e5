// fade_tb_pkg -- host-side helpers shared by the FADE-10G testbenches.
//
// Builds frames as the computer would send them (ACK/NACK and command
// frames), turns byte streams into 64-bit XGMII words and checks received
// frames. The CRC-32 here is computed bit by bit in the non-reflected (MSB
// first) form with explicit bit reversal, independently of the core's
// byte-parallel reflected implementation.
package fade_tb_pkg;
  typedef logic [7:0] byteq_t[$];

  function automatic logic [7:0] rev8(input logic [7:0] b);
    logic [7:0] r;
    for (int i = 0; i < 8; i++) r[i] = b[7-i];
    return r;
  endfunction
  function automatic logic [31:0] rev32(input logic [31:0] b);
    logic [31:0] r;
    for (int i = 0; i < 32; i++) r[i] = b[31-i];
    return r;
  endfunction

  // Ethernet FCS of a byte stream, as the 32-bit value whose low byte is sent first
  function automatic logic [31:0] fcs(input byteq_t b);
    logic [31:0] c;
    logic [7:0]  rb;
    c = 32'hFFFF_FFFF;
    foreach (b[k]) begin
      rb = rev8(b[k]);
      for (int i = 7; i >= 0; i--) begin
        if (c[31] ^ rb[i]) c = (c << 1) ^ 32'h04C1_1DB7;
        else               c = c << 1;
      end
    end
    return ~rev32(c);
  endfunction

  function automatic void push_be(ref byteq_t q, input logic [63:0] v, input int nbytes);
    for (int i = nbytes - 1; i >= 0; i--) q.push_back(v[8*i +: 8]);
  endfunction

  // header + payload, padded to 60 bytes with 0xA5, FCS appended
  function automatic byteq_t finish_frame(input byteq_t q);
    logic [31:0] f;
    while (q.size() < 60) q.push_back(8'hA5);
    f = fcs(q);
    for (int i = 0; i < 4; i++) q.push_back(f[8*i +: 8]);
    return q;
  endfunction

  function automatic byteq_t host_frame(input logic [47:0] dst, input logic [47:0] src,
                                        input logic [15:0] code, input logic [15:0] seq,
                                        input logic [31:0] val, input logic [31:0] delay);
    byteq_t q;
    push_be(q, 64'(dst), 6); push_be(q, 64'(src), 6);
    push_be(q, 64'hFADE, 2); push_be(q, 64'h0100, 2);
    push_be(q, 64'(code), 2); push_be(q, 64'(seq), 2);
    push_be(q, 64'(val), 4);  push_be(q, 64'(delay), 4);
    return finish_frame(q);
  endfunction

  // XGMII words {ctrl[7:0], data[63:0]} for a frame: start word, data, terminate, idle
  function automatic void to_xgmii(input byteq_t fr, ref logic [71:0] w[$]);
    logic [63:0] d;
    logic [7:0]  c;
    int n;
    w.push_back({8'h01, 64'hD5555555555555FB});
    n = fr.size();
    for (int base = 0; base <= n; base += 8) begin
      d = 64'h0707070707070707; c = 8'hFF;
      for (int l = 0; l < 8; l++) begin
        if (base + l < n) begin d[8*l +: 8] = fr[base + l]; c[l] = 1'b0; end
        else if (base + l == n) begin d[8*l +: 8] = 8'hFD; c[l] = 1'b1; end
      end
      w.push_back({c, d});
    end
    w.push_back({8'hFF, 64'h0707070707070707});
  endfunction

  function automatic logic [63:0] get_be(input byteq_t q, input int pos, input int nbytes);
    logic [63:0] v;
    v = '0;
    for (int i = 0; i < nbytes; i++) v = (v << 8) | 64'(q[pos + i]);
    return v;
  endfunction

  function automatic logic [63:0] get_le(input byteq_t q, input int pos);
    logic [63:0] v;
    for (int i = 0; i < 8; i++) v[8*i +: 8] = q[pos + i];
    return v;
  endfunction

  // FCS check of a received frame (last four bytes are the FCS)
  function automatic bit fcs_ok(input byteq_t fr);
    byteq_t body;
    logic [31:0] f;
    if (fr.size() < 8) return 0;
    body = fr[0:fr.size()-5];
    f = {fr[fr.size()-1], fr[fr.size()-2], fr[fr.size()-3], fr[fr.size()-4]};
    return fcs(body) == f;
  endfunction
endpackage
