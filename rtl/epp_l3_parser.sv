// epp_l3_parser: layer-3 (IPv4) header parsing and IP address extraction.
//
// Taps the frame bus after the L2 parser has located the layer-3 header. When
// the protocol type is IPv4 (0x0800) it reads, relative to l3_offset:
//   +0 version / header length (IHL), +2..3 total length, +6..7 flags and
//   fragment offset, +8 TTL, +9 protocol, +12..15 source IP, +16..19
//   destination IP.
// ipv4 rises the clock after byte +19 when version is 4 and IHL >= 5.
// l4_valid / l4_offset tell the L4 parser where the TCP or UDP header starts
// (l3_offset + 4*IHL); they are set the clock after byte +9, and only for the
// first fragment (fragment offset 0) of a TCP (6) or UDP (17) packet.
// All outputs are registered; the valid flags drop the clock after the next
// sof, the fields hold until overwritten.
// IP address extraction and "type of protocol" are the paper's; the header
// fields chosen beyond those and the IPv4-only scope are this design's (the
// IPv4 header checksum is not verified, IPv6 is not parsed).
module epp_l3_parser
  import epp_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  fbeat_t           bus,
  input  logic [15:0]      ethertype,
  input  logic [IDX_W-1:0] l3_offset,
  input  logic             l3_valid,
  output logic             ipv4,
  output logic [3:0]       ihl,
  output logic [15:0]      total_len,
  output logic [7:0]       ttl,
  output logic [7:0]       proto,
  output logic [31:0]      src_ip,
  output logic [31:0]      dst_ip,
  output logic [IDX_W-1:0] l4_offset,
  output logic             l4_valid
);

  logic [3:0]       version;
  logic [12:0]      frag_off;
  logic [IDX_W-1:0] rel;
  logic             in_hdr;

  always_comb begin
    rel    = bus.idx - l3_offset;
    in_hdr = bus.valid && !bus.sof && l3_valid && (ethertype == ETYPE_IPV4) &&
             (bus.idx >= l3_offset);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ipv4      <= 1'b0;
      ihl       <= '0;
      total_len <= '0;
      ttl       <= '0;
      proto     <= '0;
      src_ip    <= '0;
      dst_ip    <= '0;
      l4_offset <= '0;
      l4_valid  <= 1'b0;
      version   <= '0;
      frag_off  <= '0;
    end else begin
      if (bus.valid && bus.sof) begin
        ipv4     <= 1'b0;
        l4_valid <= 1'b0;
      end
      if (in_hdr) begin
        unique case (int'(rel))
          0:  {version, ihl} <= bus.data;
          2:  total_len[15:8] <= bus.data;
          3:  total_len[7:0]  <= bus.data;
          6:  frag_off[12:8]  <= bus.data[4:0];
          7:  frag_off[7:0]   <= bus.data;
          8:  ttl <= bus.data;
          9: begin
            proto     <= bus.data;
            l4_offset <= l3_offset + IDX_W'({ihl, 2'b00});
            l4_valid  <= (version == 4'd4) && (ihl >= 4'd5) && (frag_off == '0) &&
                         ((bus.data == PROTO_TCP) || (bus.data == PROTO_UDP));
          end
          12: src_ip[31:24] <= bus.data;
          13: src_ip[23:16] <= bus.data;
          14: src_ip[15:8]  <= bus.data;
          15: src_ip[7:0]   <= bus.data;
          16: dst_ip[31:24] <= bus.data;
          17: dst_ip[23:16] <= bus.data;
          18: dst_ip[15:8]  <= bus.data;
          19: begin
            dst_ip[7:0] <= bus.data;
            ipv4        <= (version == 4'd4) && (ihl >= 4'd5);
          end
          default: ;
        endcase
      end
    end
  end

endmodule
