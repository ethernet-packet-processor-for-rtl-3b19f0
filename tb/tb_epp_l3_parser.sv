// tb_epp_l3_parser: IPv4 headers behind Ethernet II (offset 14) and SNAP
// (offset 22): TCP, UDP, ICMP, a non-first fragment and a non-IP type. The
// layer-2 inputs are driven directly, as the L2 parser would present them.
module tb_epp_l3_parser;
  import epp_pkg::*;
  import tb_epp_pkg::*;
  localparam int WATCHDOG = 50000;
  // <bus-common>
  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;

  int checks = 0;
  int failures = 0;
  int tdiv = 1;            // clocks per byte time
  fbeat_t bus = FBEAT_IDLE;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  // One byte time on the frame bus: the beat with tick, then idle clocks.
  task automatic beat(input fbeat_t b);
    @(negedge clk);
    bus = b;
    bus.tick = 1'b1;
    repeat (tdiv - 1) begin
      @(negedge clk);
      bus = FBEAT_IDLE;
    end
  endtask

  task automatic idle(input int n);
    repeat (n) beat(FBEAT_IDLE);
  endtask

  // Carrier start, 7 more preamble/SFD byte times, the frame, then gap idle
  // byte times after the eof beat.
  task automatic send(input bq_t q, input int gap);
    fbeat_t b;
    b = FBEAT_IDLE;
    b.pre = 1'b1;
    beat(b);
    idle(7);
    foreach (q[i]) begin
      b = FBEAT_IDLE;
      b.valid = 1'b1;
      b.sof   = (i == 0);
      b.eof   = (i == q.size() - 1);
      b.idx   = (i > 2047) ? '1 : IDX_W'(i);
      b.data  = q[i];
      beat(b);
    end
    idle(gap);
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
  // </bus-common>

  logic [15:0]      ethertype = '0;
  logic [IDX_W-1:0] l3_offset = '0;
  logic             l3_valid  = 1'b0;
  logic             ipv4, l4_valid;
  logic [3:0]       ihl;
  logic [15:0]      total_len;
  logic [7:0]       ttl, proto;
  logic [31:0]      src_ip, dst_ip;
  logic [IDX_W-1:0] l4_offset;

  epp_l3_parser dut (.*);

  task automatic run(input logic [15:0] et, input int off, input logic [7:0] pr,
                     input logic [12:0] frag, input string name);
    logic [31:0] sip, dip;
    bq_t p, q;
    sip = $urandom;
    dip = $urandom;
    p = ipv4_pkt(pr, sip, dip, 16'd1000, 16'd80, 30, frag, 8'd33);
    if (off == 22) q = llc_frame(48'h1, 48'h2, 1'b1, et, p);
    else           q = eth2_frame(48'h1, 48'h2, et, p);
    ethertype = et;
    l3_offset = IDX_W'(off);
    l3_valid  = 1'b1;
    send(q, 2);
    if (et == 16'h0800) begin
      check(ipv4, {name, " ipv4"});
      check(src_ip == sip && dst_ip == dip, {name, " addresses"});
      check(proto == pr, {name, " protocol"});
      check(ihl == 4'd5 && ttl == 8'd33 && total_len == 16'd54, {name, " ihl/ttl/total_len"});
      check(l4_valid == ((pr == 8'd6 || pr == 8'd17) && frag == 0), {name, " l4_valid"});
      check(int'(l4_offset) == off + 20, {name, " l4_offset"});
    end else begin
      check(!ipv4 && !l4_valid, {name, " not ipv4"});
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(16'h0800, 14, 8'd6,  13'd0, "eth2 tcp");
    run(16'h0800, 14, 8'd17, 13'd0, "eth2 udp");
    run(16'h0800, 14, 8'd1,  13'd0, "eth2 icmp");
    run(16'h0800, 14, 8'd17, 13'd100, "eth2 fragment");
    run(16'h0800, 22, 8'd17, 13'd0, "snap udp");
    run(16'h0806, 14, 8'd6,  13'd0, "arp");
    run(16'h0800, 22, 8'd6,  13'd0, "snap tcp");
    finish();
  end
endmodule
