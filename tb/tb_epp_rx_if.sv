// tb_epp_rx_if: GMII bytes pass with one clock of latency and a tick every
// clock; MII nibble pairs are assembled low nibble first with a tick every
// second clock, also while idle; an odd trailing nibble is dropped and the
// pairing restarts with the next carrier.
module tb_epp_rx_if;
  import tb_epp_pkg::*;
  localparam int WATCHDOG = 100000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;

  logic       gmii_mode = 1'b1, rx_dv = 1'b0, rx_er = 1'b0;
  logic [7:0] rxd = '0;
  logic       tick, dv, er;
  logic [7:0] data;

  epp_rx_if dut (.*);

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

  // output monitor
  logic [7:0] got[$];
  logic       got_er[$];
  int         got_t[$];
  int         ticks = 0, cycles = 0;
  always @(posedge clk) if (rst_n) begin
    cycles++;
    if (tick) ticks++;
    if (tick && dv) begin
      got.push_back(data);
      got_er.push_back(er);
      got_t.push_back(cycles);
    end
  end

  task automatic gmii_send(input bq_t q, input int err_at);
    foreach (q[i]) begin
      @(negedge clk);
      rx_dv = 1'b1; rxd = q[i]; rx_er = (i == err_at);
    end
    @(negedge clk);
    rx_dv = 1'b0; rx_er = 1'b0; rxd = '0;
  endtask

  task automatic mii_send(input bq_t q, input int err_at, input bit odd);
    foreach (q[i]) begin
      @(negedge clk);
      rx_dv = 1'b1; rxd = {4'hF, q[i][3:0]}; rx_er = 1'b0;
      @(negedge clk);
      rxd = {4'hF, q[i][7:4]}; rx_er = (i == err_at);
    end
    if (odd) begin
      @(negedge clk);
      rxd = 8'h0A; rx_er = 1'b0;
    end
    @(negedge clk);
    rx_dv = 1'b0; rx_er = 1'b0; rxd = '0;
  endtask

  task automatic compare(input bq_t q, input int err_at, input string name);
    check(got.size() == q.size(), $sformatf("%s: %0d bytes, expected %0d", name, got.size(), q.size()));
    if (got.size() == q.size())
      foreach (q[i]) check(got[i] == q[i] && got_er[i] == (i == err_at), $sformatf("%s: byte %0d", name, i));
    got.delete();
    got_er.delete();
    got_t.delete();
  endtask

  initial begin
    bq_t q;
    int  t0, c0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    // GMII: one byte per clock, one clock latency
    q = raw_frame(80, 1);
    gmii_send(q, 7);
    repeat (4) @(negedge clk);
    compare(q, 7, "gmii");
    t0 = ticks; c0 = cycles;
    repeat (20) @(negedge clk);
    check(ticks - t0 == cycles - c0, "gmii idle tick every clock");
    // latency: a byte driven before edge n is on data after edge n
    @(negedge clk) begin rx_dv = 1'b1; rxd = 8'hC3; end
    @(negedge clk) check(tick && dv && data == 8'hC3, "gmii one-clock latency");
    rx_dv = 1'b0;
    repeat (4) @(negedge clk);
    got.delete(); got_er.delete();
    // switch to MII while idle
    gmii_mode = 1'b0;
    repeat (4) @(negedge clk);
    t0 = ticks; c0 = cycles;
    repeat (40) @(negedge clk);
    check(ticks - t0 == (cycles - c0) / 2, $sformatf("mii idle ticks %0d in %0d clocks", ticks - t0, cycles - c0));
    q = raw_frame(70, 2);
    got_t.delete();
    mii_send(q, 11, 1'b0);
    repeat (4) @(negedge clk);
    for (int i = 1; i < got_t.size(); i++)
      check(got_t[i] - got_t[i-1] == 2, $sformatf("mii byte %0d: byte time is two clocks", i));
    compare(q, 11, "mii");
    // odd trailing nibble dropped, next frame aligned again
    q = raw_frame(64, 3);
    mii_send(q, -1, 1'b1);
    repeat (1) @(negedge clk);
    q = raw_frame(66, 4);
    mii_send(q, -1, 1'b0);
    repeat (4) @(negedge clk);
    begin
      bq_t both;
      both = raw_frame(64, 3);
      foreach (q[i]) both.push_back(q[i]);
      compare(both, -1, "mii odd nibble / realign");
    end
    finish();
  end
endmodule
