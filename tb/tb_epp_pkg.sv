// tb_epp_pkg: reference models and frame builders shared by the EPP testbenches.
//
// The CRC here is computed MSB-first with the non-reflected polynomial
// 0x04C11DB7 and explicit bit reversal, a different formulation from the
// design's reflected byte step, so the two can check each other. Frames are
// built as queues of bytes from the first destination MAC byte to the last
// FCS byte.
package tb_epp_pkg;

  typedef logic [7:0] bq_t[$];

  function automatic logic [7:0] rev8(input logic [7:0] b);
    logic [7:0] r;
    for (int i = 0; i < 8; i++) r[i] = b[7-i];
    return r;
  endfunction

  function automatic logic [31:0] rev32(input logic [31:0] v);
    logic [31:0] r;
    for (int i = 0; i < 32; i++) r[i] = v[31-i];
    return r;
  endfunction

  // Ethernet FCS value of a byte sequence (value transmitted LSB first).
  function automatic logic [31:0] crc32_ref(input bq_t q);
    logic [31:0] c;
    logic [7:0]  b;
    c = 32'hFFFF_FFFF;
    foreach (q[i]) begin
      b = rev8(q[i]);
      for (int k = 7; k >= 0; k--) begin
        if (c[31] ^ b[k]) c = (c << 1) ^ 32'h04C1_1DB7;
        else              c = c << 1;
      end
    end
    return ~rev32(c);
  endfunction

  function automatic void push16(ref bq_t q, input logic [15:0] v);
    q.push_back(v[15:8]);
    q.push_back(v[7:0]);
  endfunction

  function automatic void push32(ref bq_t q, input logic [31:0] v);
    push16(q, v[31:16]);
    push16(q, v[15:0]);
  endfunction

  function automatic void push48(ref bq_t q, input logic [47:0] v);
    push16(q, v[47:32]);
    push32(q, v[31:0]);
  endfunction

  // Appends the FCS (LSB first) to a header+payload sequence.
  function automatic bq_t add_fcs(input bq_t q, input bit corrupt = 0);
    logic [31:0] f;
    bq_t r;
    r = q;
    f = crc32_ref(q);
    if (corrupt) f = f ^ 32'h0000_0100;
    for (int i = 0; i < 4; i++) r.push_back(f[8*i +: 8]);
    return r;
  endfunction

  // IPv4 header (IHL 5, checksum left zero) followed by a TCP/UDP port pair.
  function automatic bq_t ipv4_pkt(input logic [7:0] proto, input logic [31:0] sip,
                                   input logic [31:0] dip, input logic [15:0] sport,
                                   input logic [15:0] dport, input int pad,
                                   input logic [12:0] frag = '0, input logic [7:0] ttl = 8'd64);
    bq_t q;
    q.push_back(8'h45); q.push_back(8'h00);
    push16(q, 16'(20 + 4 + pad));
    push16(q, 16'h1234);
    push16(q, {3'b000, frag});
    q.push_back(ttl); q.push_back(proto);
    push16(q, 16'h0000);
    push32(q, sip);
    push32(q, dip);
    push16(q, sport);
    push16(q, dport);
    for (int i = 0; i < pad; i++) q.push_back(8'(i * 7 + 3));
    return q;
  endfunction

  // Ethernet II frame with FCS.
  function automatic bq_t eth2_frame(input logic [47:0] da, input logic [47:0] sa,
                                     input logic [15:0] etype, input bq_t payload,
                                     input bit corrupt = 0);
    bq_t q;
    push48(q, da);
    push48(q, sa);
    push16(q, etype);
    foreach (payload[i]) q.push_back(payload[i]);
    while (q.size() < 60) q.push_back(8'h00);
    return add_fcs(q, corrupt);
  endfunction

  // IEEE 802.3 length frame with LLC (snap=0) or LLC/SNAP (snap=1) header.
  function automatic bq_t llc_frame(input logic [47:0] da, input logic [47:0] sa,
                                    input bit snap, input logic [15:0] etype,
                                    input bq_t payload);
    bq_t q, body;
    if (snap) begin
      body.push_back(8'hAA); body.push_back(8'hAA); body.push_back(8'h03);
      body.push_back(8'h00); body.push_back(8'h00); body.push_back(8'h00);
      push16(body, etype);
    end else begin
      body.push_back(8'h42); body.push_back(8'h42); body.push_back(8'h03);
    end
    foreach (payload[i]) body.push_back(payload[i]);
    while (body.size() < 46) body.push_back(8'h00);
    push48(q, da);
    push48(q, sa);
    push16(q, 16'(body.size()));
    foreach (body[i]) q.push_back(body[i]);
    return add_fcs(q);
  endfunction

  // Raw frame of n bytes (pattern), FCS included in the count.
  function automatic bq_t raw_frame(input int n, input int seed);
    bq_t q;
    for (int i = 0; i < n - 4; i++) q.push_back(8'((i * 13 + seed) ^ (i >> 3)));
    return add_fcs(q);
  endfunction

endpackage
