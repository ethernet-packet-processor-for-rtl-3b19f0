// epp_top: Ethernet packet processor (EPP), receive direction.
//
// Sits between a 10/100/1000 Mb/s PHY and the host processor of a switch or
// router. The PHY's receive data enters through epp_rx_if, which makes one
// byte per byte time at every speed. epp_sfd_detect finds preamble and SFD and
// drives the internal frame bus; every other block taps that bus in parallel,
// in three chains:
//   SFD -> IFG -> frame count   gap check, length check, frame statistics
//   MAC extraction              destination and source MAC
//   L2 -> L3 -> L4              encapsulation/type, IPv4 header, TCP/UDP ports
// plus the CRC-32 check. Each block finishes its fields in the clock after the
// frame's last byte; this module then latches them into one header descriptor
// (epp_pkg::desc_t) for the address look-up and raises desc_valid for one
// clock. The frame bytes themselves leave on frame_out (the same bus) for the
// host's packet buffer, so a frame's last byte precedes its descriptor by two
// clocks.
//
// Latency (GMII): a byte sampled from rxd at clock edge n is on frame_out
// after edge n+2 (one register in the PHY interface, one byte held back in the
// SFD block so that the last byte can carry eof); for the last byte of a frame,
// desc_valid follows after edge n+4. In MII mode the hold-back lasts one byte
// time (two clocks). Throughput: one byte per byte time, i.e. line rate at
// every speed; nothing stalls, so no back-pressure exists or is needed.
// The block set and its chains follow the paper's block diagram; the bus, the
// descriptor and the counters are this design's. gmii_mode may only change
// while the line is idle.
module epp_top
  import epp_pkg::*;
#(
  parameter int unsigned PREAMBLE_BYTES = 7,
  parameter int unsigned MIN_PREAMBLE   = 1,
  parameter int unsigned IFG_MIN_BYTES  = 12,
  parameter int unsigned MIN_FRAME      = 64,
  parameter int unsigned MAX_FRAME      = 1518
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        gmii_mode,     // 1: GMII 1000 Mb/s, 0: MII 10/100 Mb/s
  // PHY receive side
  input  logic        rx_dv,
  input  logic        rx_er,
  input  logic [7:0]  rxd,
  // to the host processor
  output fbeat_t      frame_out,
  output logic        desc_valid,
  output desc_t       desc,
  output logic        sfd_found,
  output logic        bad_preamble,
  // statistics
  output logic [31:0] frames,
  output logic [31:0] runts,
  output logic [31:0] oversizes,
  output logic [31:0] ifg_errors,
  output logic [31:0] crc_errors,
  output logic [31:0] preamble_errors
);

  logic       b_tick, b_dv, b_er;
  logic [7:0] b_data;
  fbeat_t     bus;

  logic [7:0]  pre_len;
  logic        pre_ok;
  logic [15:0] ifg_bytes;
  logic        ifg_ok, ifg_short;

  logic             fc_done, len_ok, runt, oversize;
  logic [LEN_W-1:0] frame_len;

  logic [47:0] dst_mac, src_mac;
  logic        dst_valid, src_valid;

  encap_e           encap;
  logic [15:0]      type_len, ethertype;
  logic [IDX_W-1:0] l3_offset, l4_offset;
  logic             l3_valid, l4_valid;

  logic        ipv4;
  logic [3:0]  ihl;
  logic [15:0] total_len;
  logic [7:0]  ttl, proto;
  logic [31:0] src_ip, dst_ip;

  logic [15:0] src_port, dst_port;
  logic        ports_valid;

  logic        crc_done, crc_ok;
  logic [31:0] fcs_calc, fcs_rx;

  logic        err_acc;   // rx_er seen in the current frame
  logic        frame_err; // rx_er seen in the frame that just ended

  epp_rx_if u_rx_if (
    .clk, .rst_n, .gmii_mode, .rx_dv, .rx_er, .rxd,
    .tick(b_tick), .dv(b_dv), .er(b_er), .data(b_data)
  );

  epp_sfd_detect #(.PREAMBLE_BYTES(PREAMBLE_BYTES), .MIN_PREAMBLE(MIN_PREAMBLE)) u_sfd (
    .clk, .rst_n, .tick(b_tick), .dv(b_dv), .er(b_er), .data(b_data),
    .bus, .sfd_found, .pre_len, .pre_ok, .bad_preamble
  );

  epp_ifg_detect #(.IFG_MIN_BYTES(IFG_MIN_BYTES)) u_ifg (
    .clk, .rst_n, .bus, .ifg_bytes, .ifg_ok, .ifg_short
  );

  epp_frame_count #(.MIN_FRAME(MIN_FRAME), .MAX_FRAME(MAX_FRAME)) u_fc (
    .clk, .rst_n, .bus, .ifg_short,
    .done(fc_done), .frame_len, .len_ok, .runt, .oversize,
    .frames, .runts, .oversizes, .ifg_errors
  );

  epp_mac_extract u_mac (
    .clk, .rst_n, .bus, .dst_mac, .src_mac, .dst_valid, .src_valid
  );

  epp_l2_parser u_l2 (
    .clk, .rst_n, .bus, .encap, .type_len, .ethertype, .l3_offset, .l3_valid
  );

  epp_l3_parser u_l3 (
    .clk, .rst_n, .bus, .ethertype, .l3_offset, .l3_valid,
    .ipv4, .ihl, .total_len, .ttl, .proto, .src_ip, .dst_ip, .l4_offset, .l4_valid
  );

  epp_l4_parser u_l4 (
    .clk, .rst_n, .bus, .l4_offset, .l4_valid, .src_port, .dst_port, .ports_valid
  );

  epp_crc_check u_crc (
    .clk, .rst_n, .bus, .done(crc_done), .crc_ok, .fcs_calc, .fcs_rx
  );

  assign frame_out = bus;

  // Descriptor: every block's fields are final in the clock after eof
  // (fc_done and crc_done are high together).
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      err_acc         <= 1'b0;
      frame_err       <= 1'b0;
      desc_valid      <= 1'b0;
      desc            <= '0;
      crc_errors      <= '0;
      preamble_errors <= '0;
    end else begin
      desc_valid <= 1'b0;
      if (bad_preamble) preamble_errors <= preamble_errors + 32'd1;
      if (bus.valid) begin
        err_acc <= (bus.sof ? 1'b0 : err_acc) | bus.err;
        if (bus.eof) frame_err <= (bus.sof ? 1'b0 : err_acc) | bus.err;
      end
      if (fc_done) begin
        desc_valid     <= 1'b1;
        desc.dst_mac   <= dst_valid ? dst_mac : '0;
        desc.src_mac   <= src_valid ? src_mac : '0;
        desc.encap     <= encap;
        desc.type_len  <= type_len;
        desc.ethertype <= ethertype;
        desc.ipv4      <= ipv4;
        desc.ip_ihl       <= ipv4 ? ihl : '0;
        desc.ip_total_len <= ipv4 ? total_len : '0;
        desc.ip_ttl       <= ipv4 ? ttl : '0;
        desc.ip_proto  <= ipv4 ? proto : '0;
        desc.src_ip    <= ipv4 ? src_ip : '0;
        desc.dst_ip    <= ipv4 ? dst_ip : '0;
        desc.l4        <= ports_valid;
        desc.src_port  <= ports_valid ? src_port : '0;
        desc.dst_port  <= ports_valid ? dst_port : '0;
        desc.frame_len <= frame_len;
        desc.len_ok    <= len_ok;
        desc.runt      <= runt;
        desc.oversize  <= oversize;
        desc.crc_ok    <= crc_ok;
        desc.fcs       <= fcs_calc;
        desc.fcs_rx    <= fcs_rx;
        desc.pre_len   <= pre_len;
        desc.pre_ok    <= pre_ok;
        desc.ifg_bytes <= ifg_bytes;
        desc.ifg_ok    <= ifg_ok;
        desc.rx_err    <= frame_err;
        if (!crc_ok) crc_errors <= crc_errors + 32'd1;
      end
    end
  end

  a_done_together: assert property (@(posedge clk) disable iff (!rst_n) fc_done == crc_done);

endmodule
