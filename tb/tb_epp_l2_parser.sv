// tb_epp_l2_parser: Ethernet II, 802.3/LLC, 802.3/LLC/SNAP and invalid
// length/type values; checks the encapsulation, type, layer-3 offset and that
// l3_valid is already high when the bus reaches byte l3_offset.
module tb_epp_l2_parser;
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

  encap_e           encap;
  logic [15:0]      type_len, ethertype;
  logic [IDX_W-1:0] l3_offset;
  logic             l3_valid;

  epp_l2_parser dut (.*);

  int  watch_idx = -1;
  bit  seen_valid;
  always @(posedge clk)
    if (bus.valid && int'(bus.idx) == watch_idx) seen_valid = l3_valid;

  task automatic run(input bq_t q, input encap_e e, input logic [15:0] et,
                     input int off, input string name);
    watch_idx  = off;
    seen_valid = 1'b0;
    send(q, 2);
    check(encap == e, $sformatf("%s encap %s", name, encap.name()));
    check(ethertype == et, $sformatf("%s ethertype %h exp %h", name, ethertype, et));
    check(type_len == {q[12], q[13]}, $sformatf("%s type_len", name));
    if (off >= 0) begin
      check(l3_valid, $sformatf("%s l3_valid", name));
      check(int'(l3_offset) == off, $sformatf("%s l3_offset %0d exp %0d", name, l3_offset, off));
      check(seen_valid, $sformatf("%s l3_valid late", name));
    end else begin
      check(!l3_valid, $sformatf("%s l3_valid set", name));
    end
  endtask

  initial begin
    bq_t none;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(eth2_frame(48'hFFFFFFFFFFFF, 48'h001122334455, 16'h0800, none), ENC_ETH2, 16'h0800, 14, "eth2 ipv4");
    run(eth2_frame(48'h01005E000001, 48'h001122334455, 16'h0806, none), ENC_ETH2, 16'h0806, 14, "eth2 arp");
    run(eth2_frame(48'h001122334455, 48'h001122334466, 16'h0600, none), ENC_ETH2, 16'h0600, 14, "eth2 0600");
    run(llc_frame(48'h0180C2000000, 48'h001122334455, 1'b0, 16'h0000, none), ENC_LLC, 16'h0000, 17, "llc");
    run(llc_frame(48'h001122334455, 48'h00AABBCCDDEE, 1'b1, 16'h0800, none), ENC_SNAP, 16'h0800, 22, "snap");
    run(eth2_frame(48'h001122334455, 48'h00AABBCCDDEE, 16'h05FF, none), ENC_INVALID, 16'h0000, -1, "invalid");
    run(eth2_frame(48'h001122334455, 48'h00AABBCCDDEE, 16'h86DD, none), ENC_ETH2, 16'h86DD, 14, "eth2 ipv6");
    finish();
  end
endmodule
