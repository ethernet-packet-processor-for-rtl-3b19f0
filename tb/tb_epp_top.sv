// tb_epp_top: end-to-end test of the packet processor at its default
// parameters. Frames are driven on the PHY pins, first at 1000 Mb/s (GMII),
// then after a mode switch at 10/100 Mb/s (MII). Every descriptor is compared
// with a reference parse of the same bytes done here in software; the frame
// bus bytes are compared with the frame sent; the statistics counters are
// compared at the end. Each mechanism of the design (SFD detection, short
// preamble, bad preamble, short gap, runt, oversize, CRC error, receive error,
// each encapsulation, IPv4, TCP, UDP, fragments, both PHY modes) is counted and
// must occur at least once. Line rate is checked with 64-byte frames at the
// minimum gap, and the latency from the last byte on rxd to desc_valid is
// checked on every GMII frame. A random mix of 160 frames (kind, length,
// preamble length, gap and receive errors drawn at random) follows, in MII and
// then, after switching back, in GMII mode.
module tb_epp_top;
  import epp_pkg::*;
  import tb_epp_pkg::*;
  localparam int WATCHDOG = 2_000_000;
  // GMII: clock edges from the one that samples the last rxd byte to the one at
  // which the monitor sees desc_valid high (it is set by the edge before).
  localparam int DESC_LATENCY = 5;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  logic        gmii_mode = 1'b1, rx_dv = 1'b0, rx_er = 1'b0;
  logic [7:0]  rxd = '0;
  fbeat_t      frame_out;
  logic        desc_valid, sfd_found, bad_preamble;
  desc_t       desc;
  logic [31:0] frames, runts, oversizes, ifg_errors, crc_errors, preamble_errors;

  epp_top dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask

  initial begin : watchdog
    repeat (WATCHDOG) @(posedge clk);
    failures++;
    $display("FAIL: watchdog expired");
    finish();
  end

  // ---------------- monitors ----------------
  desc_t      descs[$];
  logic [7:0] bytes_out[$];
  int         cyc = 0, last_byte_cyc = 0, lat_checked = 0;
  always @(posedge clk) if (rst_n) begin
    cyc++;
    if (desc_valid) begin
      descs.push_back(desc);
      if (gmii_mode) begin
        check(cyc - last_byte_cyc == DESC_LATENCY,
              $sformatf("descriptor latency %0d clocks", cyc - last_byte_cyc));
        lat_checked++;
      end
    end
    if (frame_out.valid) bytes_out.push_back(frame_out.data);
  end

  // ---------------- mechanism counts ----------------
  typedef enum int {M_GMII, M_MII, M_MODESW, M_SFD, M_SHORTPRE, M_BADPRE, M_IFG, M_RUNT,
                    M_OVER, M_CRC, M_RXER, M_ETH2, M_LLC, M_SNAP, M_INVAL, M_IPV4,
                    M_TCP, M_UDP, M_FRAG, M_LINERATE, M_NUM} mech_e;
  int mech[M_NUM];

  // ---------------- reference parse ----------------
  function automatic desc_t ref_desc(input bq_t q, input int npre, input int gap, input bit err);
    desc_t d;
    int n, l3, l4;
    bq_t body;
    logic [15:0] tl;
    d = '0;
    n = q.size();
    if (n >= 6)  for (int i = 0; i < 6; i++) d.dst_mac[8*(5-i) +: 8] = q[i];
    if (n >= 12) for (int i = 0; i < 6; i++) d.src_mac[8*(5-i) +: 8] = q[6+i];
    tl = {q[12], q[13]};
    d.type_len = tl;
    l3 = -1;
    d.encap = ENC_INVALID;
    if (tl >= 16'h0600) begin
      d.encap = ENC_ETH2; d.ethertype = tl; l3 = 14;
    end else if (tl <= 16'd1500) begin
      if (q[14] == 8'hAA && q[15] == 8'hAA && q[16] == 8'h03) begin
        d.encap = ENC_SNAP; d.ethertype = {q[20], q[21]}; l3 = 22;
      end else begin
        d.encap = ENC_LLC; l3 = 17;
      end
    end
    if (l3 > 0 && d.ethertype == 16'h0800 && n > l3 + 19 && q[l3][7:4] == 4 && q[l3][3:0] >= 5) begin
      d.ipv4 = 1'b1;
      d.ip_ihl = q[l3][3:0];
      d.ip_total_len = {q[l3+2], q[l3+3]};
      d.ip_ttl = q[l3+8];
      d.ip_proto = q[l3+9];
      d.src_ip = {q[l3+12], q[l3+13], q[l3+14], q[l3+15]};
      d.dst_ip = {q[l3+16], q[l3+17], q[l3+18], q[l3+19]};
      l4 = l3 + 4 * q[l3][3:0];
      if ((d.ip_proto == 6 || d.ip_proto == 17) && {q[l3+6][4:0], q[l3+7]} == 0 && n > l4 + 3) begin
        d.l4 = 1'b1;
        d.src_port = {q[l4], q[l4+1]};
        d.dst_port = {q[l4+2], q[l4+3]};
      end
    end
    d.frame_len = LEN_W'(n);
    d.len_ok = n >= 64 && n <= 1518;
    d.runt = n < 64;
    d.oversize = n > 1518;
    for (int i = 0; i < n - 4; i++) body.push_back(q[i]);
    d.fcs = crc32_ref(body);
    d.fcs_rx = {q[n-1], q[n-2], q[n-3], q[n-4]};
    d.crc_ok = d.fcs == d.fcs_rx;
    d.pre_len = 8'(npre);
    d.pre_ok = npre == 7;
    d.ifg_bytes = 16'(gap);
    d.ifg_ok = gap >= 12;
    d.rx_err = err;
    return d;
  endfunction

  // ---------------- PHY driver ----------------
  int prev_gap = 65535;   // idle byte times before the next frame
  bit gap_unknown = 1'b0; // the gap before the next frame is not modelled
  int exp_frames = 0, exp_runts = 0, exp_over = 0, exp_ifg = 0, exp_crc = 0, exp_pre = 0;

  task automatic phy_byte(input logic [7:0] b, input logic e);
    if (gmii_mode) begin
      @(negedge clk);
      rx_dv = 1'b1; rxd = b; rx_er = e;
    end else begin
      @(negedge clk);
      rx_dv = 1'b1; rxd = {4'h0, b[3:0]}; rx_er = e;
      @(negedge clk);
      rxd = {4'h0, b[7:4]};
    end
  endtask

  task automatic phy_idle(input int nbytes);
    @(negedge clk);
    rx_dv = 1'b0; rx_er = 1'b0; rxd = '0;
    repeat ((gmii_mode ? 1 : 2) * nbytes - 1) @(negedge clk);
  endtask

  // Sends one frame and checks its descriptor and its bytes on the frame bus.
  task automatic frame(input bq_t q, input int gap, input int npre = 7, input int err_at = -1,
                       input string name = "");
    desc_t e, g;
    for (int i = 0; i < npre; i++) phy_byte(PREAMBLE_BYTE, 1'b0);
    phy_byte(SFD_BYTE, 1'b0);
    foreach (q[i]) phy_byte(q[i], i == err_at);
    last_byte_cyc = cyc + 1;  // the edge that samples the last byte
    phy_idle(gap);
    repeat (8) @(negedge clk);
    e = ref_desc(q, npre, prev_gap > 65535 ? 65535 : prev_gap, err_at >= 0);
    check(descs.size() == 1, $sformatf("%s: %0d descriptors", name, descs.size()));
    if (descs.size() > 0) begin
      g = descs.pop_front();
      if (gap_unknown) begin
        e.ifg_bytes = g.ifg_bytes;
        e.ifg_ok = g.ifg_bytes >= 12;
      end else if (!gmii_mode && prev_gap < 65535) begin
        // MII: the gap is measured to within one byte time of nibble alignment
        check(int'(g.ifg_bytes) >= prev_gap - 1 && int'(g.ifg_bytes) <= prev_gap + 1,
              $sformatf("%s: MII gap %0d for %0d", name, g.ifg_bytes, prev_gap));
        e.ifg_bytes = g.ifg_bytes;
        e.ifg_ok = g.ifg_bytes >= 12;
      end
      check(g == e, $sformatf("%s: descriptor\n  got %p\n  exp %p", name, g, e));
      if (g.encap == ENC_ETH2) mech[M_ETH2]++;
      if (g.encap == ENC_LLC) mech[M_LLC]++;
      if (g.encap == ENC_SNAP) mech[M_SNAP]++;
      if (g.encap == ENC_INVALID) mech[M_INVAL]++;
      if (g.ipv4) mech[M_IPV4]++;
      if (g.l4 && g.ip_proto == 6) mech[M_TCP]++;
      if (g.l4 && g.ip_proto == 17) mech[M_UDP]++;
      if (g.ipv4 && !g.l4 && (g.ip_proto == 6 || g.ip_proto == 17)) mech[M_FRAG]++;
      if (!g.ifg_ok) begin mech[M_IFG]++; exp_ifg++; end
      if (g.runt) begin mech[M_RUNT]++; exp_runts++; end
      if (g.oversize) begin mech[M_OVER]++; exp_over++; end
      if (!g.crc_ok) begin mech[M_CRC]++; exp_crc++; end
      if (g.rx_err) mech[M_RXER]++;
      if (!g.pre_ok) mech[M_SHORTPRE]++;
      mech[M_SFD]++;
      mech[gmii_mode ? M_GMII : M_MII]++;
    end
    descs.delete();
    check(bytes_out.size() == q.size(), $sformatf("%s: %0d bytes on frame bus", name, bytes_out.size()));
    if (bytes_out.size() == q.size())
      foreach (q[i]) if (bytes_out[i] != q[i]) begin
        check(1'b0, $sformatf("%s: frame bus byte %0d", name, i));
        break;
      end
    bytes_out.delete();
    exp_frames++;
    gap_unknown = 1'b0;
    prev_gap = gap + 8;  // idle byte times include the wait above
    if (!gmii_mode) prev_gap = gap + 4;
  endtask

  task automatic bad_preamble_event(input int gap);
    phy_byte(8'h55, 1'b0); phy_byte(8'h55, 1'b0); phy_byte(8'h5F, 1'b0);
    for (int i = 0; i < 30; i++) phy_byte(8'(i), 1'b0);
    phy_idle(gap);
    repeat (8) @(negedge clk);
    check(descs.size() == 0 && bytes_out.size() == 0, "bad preamble produced a frame");
    mech[M_BADPRE]++;
    exp_pre++;
    // the gap restarts at the dropped carrier event: its 32 further byte
    // times, the idle ones and the wait above all count
    prev_gap = gmii_mode ? 32 + gap + 8 : 32 + gap + 4;
  endtask

  function automatic bq_t tcp(input int pad, input logic [12:0] frag = '0);
    return eth2_frame({16'h0200, 32'($urandom)}, {16'h0211, 32'($urandom)}, 16'h0800,
                      ipv4_pkt(8'd6, $urandom, $urandom, 16'($urandom), 16'd80, pad, frag));
  endfunction

  function automatic bq_t udp(input int pad);
    return eth2_frame({16'h0200, 32'($urandom)}, {16'h0211, 32'($urandom)}, 16'h0800,
                      ipv4_pkt(8'd17, $urandom, $urandom, 16'd5060, 16'($urandom), pad));
  endfunction

  task automatic traffic(input string tag);
    bq_t none, q;
    frame(tcp(30), 12, 7, -1, {tag, " tcp"});
    frame(udp(200), 12, 7, -1, {tag, " udp"});
    frame(tcp(1000, 13'd185), 20, 7, -1, {tag, " tcp fragment"});
    frame(eth2_frame(48'hFFFFFFFFFFFF, 48'h021122334455, 16'h0806, none), 12, 7, -1, {tag, " arp broadcast"});
    frame(llc_frame(48'h0180C2000000, 48'h021122334455, 1'b0, 16'h0, none), 12, 7, -1, {tag, " llc"});
    frame(llc_frame(48'h021122334466, 48'h021122334455, 1'b1, 16'h0800,
                    ipv4_pkt(8'd17, 32'hC0A80001, 32'hC0A80002, 16'd53, 16'd53, 10)), 12, 7, -1, {tag, " snap udp"});
    frame(eth2_frame(48'h021122334466, 48'h021122334455, 16'h05FF, none), 12, 7, -1, {tag, " invalid type"});
    frame(udp(1400 + 72), 12, 7, -1, {tag, " 1518-byte udp"});
    frame(udp(1500), 12, 7, -1, {tag, " oversize"});
    q = tcp(10);
    q = q[0:39];
    frame(add_fcs(q), 12, 7, -1, {tag, " runt"});
    frame(eth2_frame(48'h021122334466, 48'h021122334455, 16'h0800,
                     ipv4_pkt(8'd6, 32'h0A000001, 32'h0A000002, 16'd1, 16'd2, 40), 1'b1), 12, 7, -1, {tag, " crc error"});
    frame(udp(60), 4, 7, 33, {tag, " rx_er"});
    frame(tcp(20), 12, 3, -1, {tag, " short gap, short preamble"});
    bad_preamble_event(12);
    frame(udp(80), 12, 7, -1, {tag, " after bad preamble"});
  endtask

  // Random mix: frame kind, length and gap drawn at random.
  task automatic random_traffic(input int n, input string tag);
    bq_t none, q;
    int  kind, pad, gap;
    for (int k = 0; k < n; k++) begin
      kind = $urandom_range(0, 5);
      pad  = $urandom_range(0, 1470);
      gap  = $urandom_range(9, 40);
      unique case (kind)
        0: q = tcp(pad);
        1: q = udp(pad);
        2: q = llc_frame({16'h0200, 32'($urandom)}, {16'h0211, 32'($urandom)}, 1'b1, 16'h0800,
                         ipv4_pkt(8'd17, $urandom, $urandom, 16'($urandom), 16'($urandom), pad > 1400 ? 1400 : pad));
        3: q = llc_frame({16'h0200, 32'($urandom)}, {16'h0211, 32'($urandom)}, 1'b0, 16'h0, none);
        4: q = eth2_frame({16'h0200, 32'($urandom)}, {16'h0211, 32'($urandom)}, 16'($urandom_range(16'h0600, 16'hFFFF)), none);
        default: q = raw_frame($urandom_range(20, 1530), k);
      endcase
      frame(q, gap, $urandom_range(1, 7), ($urandom_range(0, 19) == 0) ? $urandom_range(0, q.size() - 1) : -1,
            $sformatf("%s random %0d", tag, k));
    end
  endtask

  initial begin
    bq_t q;
    int  d0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) @(negedge clk);
    traffic("gmii");
    // line rate: 64-byte frames back to back at the minimum 12-byte gap
    d0 = 0;
    fork
      begin
        for (int k = 0; k < 16; k++) begin
          for (int i = 0; i < 7; i++) phy_byte(PREAMBLE_BYTE, 1'b0);
          phy_byte(SFD_BYTE, 1'b0);
          q = raw_frame(64, k);
          foreach (q[i]) phy_byte(q[i], 1'b0);
          last_byte_cyc = cyc + 1;
          phy_idle(12);
        end
      end
    join
    repeat (8) @(negedge clk);
    foreach (descs[i]) if (descs[i].crc_ok && descs[i].len_ok && descs[i].ifg_ok) d0++;
    check(d0 == 16, $sformatf("line rate: %0d of 16 frames", d0));
    check(bytes_out.size() == 16 * 64, "line rate: frame bus bytes");
    if (d0 == 16) mech[M_LINERATE]++;
    exp_frames += 16;
    descs.delete();
    bytes_out.delete();
    gap_unknown = 1'b1;
    // switch the PHY interface to MII while idle
    gmii_mode = 1'b0;
    mech[M_MODESW]++;
    repeat (12) @(negedge clk);
    traffic("mii");
    random_traffic(40, "mii");
    gmii_mode = 1'b1;
    mech[M_MODESW]++;
    repeat (12) @(negedge clk);
    gap_unknown = 1'b1;
    random_traffic(120, "gmii");
    // statistics
    check(frames == 32'(exp_frames), $sformatf("frames %0d exp %0d", frames, exp_frames));
    check(runts == 32'(exp_runts), "runt counter");
    check(oversizes == 32'(exp_over), "oversize counter");
    check(ifg_errors == 32'(exp_ifg), $sformatf("ifg counter %0d exp %0d", ifg_errors, exp_ifg));
    check(crc_errors == 32'(exp_crc), "crc counter");
    check(preamble_errors == 32'(exp_pre), "preamble error counter");
    check(lat_checked > 0, "latency checked");
    for (int m = 0; m < M_NUM; m++) begin
      $display("mechanism %-12s %0d", mech_e'(m), mech[m]);
      check(mech[m] > 0, $sformatf("mechanism %s never happened", mech_e'(m)));
    end
    finish();
  end
endmodule
