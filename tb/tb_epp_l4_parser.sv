// tb_epp_l4_parser: TCP/UDP ports at layer-4 offsets 34 and 42, and no ports
// when the L3 parser reports no TCP/UDP header. l4_offset/l4_valid are driven
// directly, as the L3 parser would present them.
module tb_epp_l4_parser;
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

  logic [IDX_W-1:0] l4_offset = '0;
  logic             l4_valid  = 1'b0;
  logic [15:0]      src_port, dst_port;
  logic             ports_valid;

  epp_l4_parser dut (.*);

  task automatic run(input int l3off, input bit valid);
    logic [15:0] sp, dp;
    bq_t p, q;
    sp = 16'($urandom);
    dp = 16'($urandom);
    p = ipv4_pkt(8'd17, 32'h0a000001, 32'h0a000002, sp, dp, 20);
    if (l3off == 22) q = llc_frame(48'h1, 48'h2, 1'b1, 16'h0800, p);
    else             q = eth2_frame(48'h1, 48'h2, 16'h0800, p);
    l4_offset = IDX_W'(l3off + 20);
    l4_valid  = valid;
    send(q, 2);
    check(ports_valid == valid, $sformatf("ports_valid at %0d", l3off + 20));
    if (valid) begin
      check(src_port == sp, $sformatf("src_port %h exp %h", src_port, sp));
      check(dst_port == dp, $sformatf("dst_port %h exp %h", dst_port, dp));
    end
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    for (int k = 0; k < 8; k++) run((k % 2) ? 22 : 14, 1'b1);
    run(14, 1'b0);
    run(22, 1'b1);
    finish();
  end
endmodule
