// tb_epp_sfd_detect: preamble/SFD detection and frame delineation. Drives the
// byte-time interface directly (1 and 2 clocks per byte time) with nominal,
// shortened and corrupted preambles, a carrier that drops inside the preamble
// and a receive error; collects the frame bus and compares every beat with the
// frame sent.
module tb_epp_sfd_detect;
  import epp_pkg::*;
  import tb_epp_pkg::*;
  localparam int WATCHDOG = 100000;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  always #5 clk = ~clk;
  int checks = 0;
  int failures = 0;
  int tdiv = 1;

  logic       tick = 1'b0, dv = 1'b0, er = 1'b0;
  logic [7:0] data = '0;
  fbeat_t     bus;
  logic       sfd_found, pre_ok, bad_preamble;
  logic [7:0] pre_len;

  epp_sfd_detect dut (.*);

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

  task automatic bt(input logic d, input logic [7:0] b, input logic e = 1'b0);
    @(negedge clk);
    tick = 1'b1; dv = d; data = b; er = e;
    repeat (tdiv - 1) begin
      @(negedge clk);
      tick = 1'b0;
    end
  endtask

  // collected bus beats
  fbeat_t got[$];
  int     sfds = 0, bads = 0, pres = 0;
  logic [7:0] last_pre_len;
  logic       last_pre_ok;
  always @(posedge clk) if (rst_n) begin
    if (bus.valid) got.push_back(bus);
    if (bus.pre) pres++;
    if (sfd_found) begin
      sfds++;
      last_pre_len = pre_len;
      last_pre_ok  = pre_ok;
    end
    if (bad_preamble) bads++;
  end

  task automatic send(input int npre, input bq_t q, input int err_at = -1);
    for (int i = 0; i < npre; i++) bt(1'b1, PREAMBLE_BYTE);
    bt(1'b1, SFD_BYTE);
    foreach (q[i]) bt(1'b1, q[i], i == err_at);
    repeat (12) bt(1'b0, 8'h00);
  endtask

  task automatic compare(input bq_t q, input int err_at, input string name);
    check(got.size() == q.size(), $sformatf("%s: %0d beats, expected %0d", name, got.size(), q.size()));
    if (got.size() == q.size()) begin
      foreach (q[i]) begin
        check(got[i].data == q[i] && int'(got[i].idx) == i &&
              got[i].sof == (i == 0) && got[i].eof == (i == q.size() - 1) &&
              got[i].err == (i == err_at),
              $sformatf("%s: beat %0d", name, i));
      end
    end
    got.delete();
  endtask

  initial begin
    bq_t q;
    int  s0, b0;
    repeat (3) @(posedge clk);
    rst_n = 1'b1;
    repeat (5) bt(1'b0, 8'h00);
    for (int m = 0; m < 2; m++) begin
      tdiv = m + 1;
      // nominal 7-byte preamble
      q = raw_frame(64, m);
      s0 = sfds;
      send(7, q);
      compare(q, -1, "nominal");
      check(sfds == s0 + 1 && last_pre_len == 8'd7 && last_pre_ok, "nominal sfd_found/pre_len");
      // shortened preamble, receive error on byte 20
      q = raw_frame(100, m + 5);
      send(3, q, 20);
      compare(q, 20, "short preamble");
      check(last_pre_len == 8'd3 && !last_pre_ok, "short pre_len/pre_ok");
      // corrupted preamble: the carrier event is dropped
      b0 = bads;
      s0 = sfds;
      bt(1'b1, 8'h55); bt(1'b1, 8'h55); bt(1'b1, 8'h57); bt(1'b1, 8'hD5);
      foreach (q[i]) bt(1'b1, q[i]);
      repeat (12) bt(1'b0, 8'h00);
      check(got.size() == 0 && sfds == s0 && bads == b0 + 1, "corrupted preamble dropped");
      // carrier drops inside the preamble
      bt(1'b1, 8'h55); bt(1'b1, 8'h55); bt(1'b0, 8'h00);
      repeat (12) bt(1'b0, 8'h00);
      check(got.size() == 0 && bads == b0 + 2, "carrier lost in preamble");
      // SFD with no preamble byte (below MIN_PREAMBLE)
      send(0, q);
      check(got.size() == 0 && bads == b0 + 3, "SFD without preamble");
      // maximum length frame
      q = raw_frame(1518, m + 9);
      send(7, q);
      compare(q, -1, "1518-byte frame");
    end
    check(pres == 12, $sformatf("pre beats %0d", pres));
    finish();
  end
endmodule
