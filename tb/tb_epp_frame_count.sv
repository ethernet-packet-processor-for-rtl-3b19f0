// tb_epp_frame_count: frame lengths at and around the 64/1518-byte limits, the
// length flags and the frame, runt, oversize and IFG-error counters.
module tb_epp_frame_count;
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

  logic             ifg_short = 1'b0;
  logic             done, len_ok, runt, oversize;
  logic [LEN_W-1:0] frame_len;
  logic [31:0]      frames, runts, oversizes, ifg_errors;
  int               dones = 0;

  epp_frame_count dut (.*);

  always @(posedge clk) if (rst_n && done) dones++;

  initial begin
    int lens[$] = '{64, 1518, 63, 1519, 200, 10, 1600, 65};
    int exp_runt = 0, exp_over = 0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    foreach (lens[k]) begin
      send(raw_frame(lens[k], k), 3);
      check(frame_len == LEN_W'(lens[k]), $sformatf("frame_len %0d exp %0d", frame_len, lens[k]));
      check(len_ok == (lens[k] >= 64 && lens[k] <= 1518), $sformatf("len_ok len %0d", lens[k]));
      check(runt == (lens[k] < 64), $sformatf("runt len %0d", lens[k]));
      check(oversize == (lens[k] > 1518), $sformatf("oversize len %0d", lens[k]));
      if (lens[k] < 64) exp_runt++;
      if (lens[k] > 1518) exp_over++;
    end
    repeat (3) begin
      @(negedge clk) ifg_short = 1'b1;
      @(negedge clk) ifg_short = 1'b0;
    end
    @(negedge clk);
    check(frames == 32'(lens.size()), "frame counter");
    check(dones == lens.size(), "done pulses");
    check(runts == 32'(exp_runt), "runt counter");
    check(oversizes == 32'(exp_over), "oversize counter");
    check(ifg_errors == 32'd3, "ifg error counter");
    finish();
  end
endmodule
