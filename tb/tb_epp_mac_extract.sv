// tb_epp_mac_extract: random destination/source addresses, the valid flags,
// and a frame too short to carry a source address.
module tb_epp_mac_extract;
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

  logic [47:0] dst_mac, src_mac;
  logic        dst_valid, src_valid;

  epp_mac_extract dut (.*);

  initial begin
    logic [47:0] da, sa;
    bq_t q, none;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 20; k++) begin
      da = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF;
      sa = {$urandom, $urandom} & 48'hFFFF_FFFF_FFFF;
      send(eth2_frame(da, sa, 16'h0800, none), 2);
      check(dst_mac == da, $sformatf("dst_mac %h exp %h", dst_mac, da));
      check(src_mac == sa, $sformatf("src_mac %h exp %h", src_mac, sa));
      check(dst_valid && src_valid, "valid flags");
    end
    // 9-byte frame: destination only
    q = '{8'h01, 8'h02, 8'h03, 8'h04, 8'h05, 8'h06, 8'h07, 8'h08, 8'h09};
    send(q, 2);
    check(dst_mac == 48'h010203040506, "short frame dst_mac");
    check(dst_valid && !src_valid, "short frame valid flags");
    finish();
  end
endmodule
