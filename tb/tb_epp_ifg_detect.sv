// tb_epp_ifg_detect: gaps of 96 bit times and more, 88 bit times and less,
// back-to-back frames, in both 1 and 2 clocks per byte time. After the eof
// beat, which is itself the first idle byte time, `gap` more idle byte times
// pass, so the expected gap is gap + 1.
module tb_epp_ifg_detect;
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

  logic [15:0] ifg_bytes;
  logic        ifg_ok, ifg_short;
  int          shorts = 0;

  epp_ifg_detect dut (.*);

  always @(posedge clk) if (rst_n && ifg_short) shorts++;

  initial begin
    int gaps[$] = '{11, 10, 0, 30, 12, 5, 11};
    int prev, exp_short = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    send(raw_frame(64, 1), gaps[0]);
    check(ifg_ok, "first frame after reset");
    prev = gaps[0];
    for (int k = 1; k < gaps.size() * 2; k++) begin
      tdiv = (k >= gaps.size()) ? 2 : 1;
      send(raw_frame(64, k), gaps[k % gaps.size()]);
      check(int'(ifg_bytes) == prev + 1, $sformatf("ifg_bytes %0d exp %0d", ifg_bytes, prev + 1));
      check(ifg_ok == (prev + 1 >= 12), $sformatf("ifg_ok gap %0d", prev + 1));
      if (prev + 1 < 12) exp_short++;
      prev = gaps[k % gaps.size()];
    end
    check(shorts == exp_short, $sformatf("ifg_short pulses %0d exp %0d", shorts, exp_short));
    finish();
  end
endmodule
