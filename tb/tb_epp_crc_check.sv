// tb_epp_crc_check: good and corrupted frames of random length, minimum and
// maximum length; checks crc_ok, the calculated FCS against an independent
// CRC model and the received FCS field.
module tb_epp_crc_check;
  import epp_pkg::*;
  import tb_epp_pkg::*;
  localparam int WATCHDOG = 200000;
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

  logic        done, crc_ok;
  logic [31:0] fcs_calc, fcs_rx;

  epp_crc_check dut (.*);

  task automatic run(input int n, input bit bad);
    bq_t q, body;
    logic [31:0] f;
    q = raw_frame(n, $urandom);
    if (bad) q[$urandom_range(0, n - 1)] ^= 8'h10;
    for (int i = 0; i < n - 4; i++) body.push_back(q[i]);
    f = {q[n-1], q[n-2], q[n-3], q[n-4]};
    send(q, 1);
    check(crc_ok == !bad, $sformatf("crc_ok len %0d bad %0d", n, bad));
    check(fcs_calc == crc32_ref(body), $sformatf("fcs_calc %h exp %h", fcs_calc, crc32_ref(body)));
    check(fcs_rx == f, $sformatf("fcs_rx %h exp %h", fcs_rx, f));
  endtask

  initial begin
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    run(64, 1'b0);
    run(1518, 1'b0);
    run(64, 1'b1);
    for (int k = 0; k < 20; k++) run($urandom_range(64, 300), k % 3 == 0);
    finish();
  end
endmodule
