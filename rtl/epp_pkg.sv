// epp_pkg: types and constants shared by the Ethernet packet processor (EPP).
//
// The EPP blocks talk over one internal frame bus, a registered stream of
// byte beats (fbeat_t). The bus advances once per "byte time": every clock on
// a 1000 Mb/s GMII link, every second clock on a 10/100 Mb/s MII link. The
// byte-time strobe (tick) is carried on the bus during idle as well, so the
// interframe-gap block can count idle byte times.
//
// Frame layout (destination MAC, source MAC, length/type, 46..1500 data bytes,
// 32-bit FCS; 8-byte preamble with SFD; 96-bit gap) follows the paper. The bus
// encoding, the byte index and the descriptor layout are this design's own.
package epp_pkg;

  // Preamble and start-of-frame delimiter bytes as they appear on a
  // byte-wide (LSB-first) receive interface: 1010...1011 on the wire.
  localparam logic [7:0] PREAMBLE_BYTE = 8'h55;
  localparam logic [7:0] SFD_BYTE      = 8'hD5;

  // Byte offsets inside the frame (first destination MAC byte = 0).
  localparam int unsigned DA_OFFSET = 0;
  localparam int unsigned SA_OFFSET = 6;
  localparam int unsigned TL_OFFSET = 12;

  localparam int unsigned IDX_W = 11;   // byte index on the bus, saturates at 2047
  localparam int unsigned LEN_W = 16;   // frame length counter

  // CRC-32 (IEEE 802.3), reflected form.
  localparam logic [31:0] CRC_POLY_REFL = 32'hEDB88320;
  localparam logic [31:0] CRC_INIT      = 32'hFFFF_FFFF;
  localparam logic [31:0] CRC_RESIDUE   = 32'hDEBB_20E3; // register after a good FCS

  // One beat of the internal frame bus.
  typedef struct packed {
    logic             tick;   // one byte time elapsed (also during idle)
    logic             pre;    // carrier rose: a preamble starts in this byte time
    logic             valid;  // data holds a frame byte
    logic             sof;    // first frame byte (destination MAC byte 0)
    logic             eof;    // last frame byte (last FCS byte)
    logic             err;    // PHY flagged a receive error on this byte
    logic [IDX_W-1:0] idx;    // byte position in the frame
    logic [7:0]       data;
  } fbeat_t;

  localparam fbeat_t FBEAT_IDLE = '0;

  typedef enum logic [1:0] {
    ENC_ETH2    = 2'd0,   // Ethernet II: type >= 0x0600
    ENC_LLC     = 2'd1,   // IEEE 802.3 length + 802.2 LLC
    ENC_SNAP    = 2'd2,   // IEEE 802.3 length + LLC AA-AA-03 + SNAP
    ENC_INVALID = 2'd3    // length/type 1501..1535
  } encap_e;

  localparam logic [15:0] ETYPE_IPV4 = 16'h0800;
  localparam logic [7:0]  PROTO_TCP  = 8'd6;
  localparam logic [7:0]  PROTO_UDP  = 8'd17;

  // Per-frame header descriptor handed to the address look-up / host.
  typedef struct packed {
    logic [47:0]      dst_mac;
    logic [47:0]      src_mac;
    encap_e           encap;
    logic [15:0]      type_len;   // raw length/type field
    logic [15:0]      ethertype;  // protocol type (0 for plain LLC)
    logic             ipv4;
    logic [3:0]       ip_ihl;
    logic [15:0]      ip_total_len;
    logic [7:0]       ip_ttl;
    logic [7:0]       ip_proto;
    logic [31:0]      src_ip;
    logic [31:0]      dst_ip;
    logic             l4;         // TCP/UDP ports valid
    logic [15:0]      src_port;
    logic [15:0]      dst_port;
    logic [LEN_W-1:0] frame_len;  // bytes from destination MAC to FCS
    logic             len_ok;
    logic             runt;       // shorter than MIN_FRAME
    logic             oversize;   // longer than MAX_FRAME
    logic             crc_ok;
    logic [31:0]      fcs;        // FCS calculated over the frame
    logic [31:0]      fcs_rx;     // FCS received (first byte in bits 7:0)
    logic [7:0]       pre_len;    // 0x55 bytes before the SFD
    logic             pre_ok;     // pre_len equals the nominal preamble length
    logic [15:0]      ifg_bytes;  // idle byte times before this frame
    logic             ifg_ok;
    logic             rx_err;     // PHY receive error inside the frame
  } desc_t;

  // One byte through the reflected CRC-32 register (LSB first).
  function automatic logic [31:0] crc32_byte(input logic [31:0] crc, input logic [7:0] d);
    logic [31:0] c;
    c = crc;
    for (int i = 0; i < 8; i++) begin
      if (c[0] ^ d[i]) c = (c >> 1) ^ CRC_POLY_REFL;
      else             c = c >> 1;
    end
    return c;
  endfunction

endpackage
