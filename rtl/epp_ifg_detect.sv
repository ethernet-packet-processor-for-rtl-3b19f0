// epp_ifg_detect: interframe-gap detection.
//
// Consecutive frames must be separated by at least 96 bit times (12 byte
// times). The block counts the idle byte times on the frame bus from the end of
// one frame (the eof beat, which falls in the first idle byte time) to the
// start of the next carrier (the pre beat). When the next preamble starts it
// reports the gap in ifg_bytes, sets ifg_ok, and pulses ifg_short if the gap
// was below IFG_MIN_BYTES. The gap before the first frame after reset counts
// as long enough. Because the bus counts byte times, the same threshold holds
// at 10, 100 and 1000 Mb/s.
//
// Timing: outputs change one clock after the pre beat and hold until the next
// one, so they describe the frame that follows that preamble.
// The 96-bit limit is the paper's; counting in byte times from the last FCS
// byte to the first preamble byte, and restarting the count at a carrier event
// that never reaches an SFD (bad preamble), are this design's choices.
module epp_ifg_detect
  import epp_pkg::*;
#(
  parameter int unsigned IFG_MIN_BYTES = 12   // 96 bit times
) (
  input  logic        clk,
  input  logic        rst_n,
  input  fbeat_t      bus,
  output logic [15:0] ifg_bytes,
  output logic        ifg_ok,
  output logic        ifg_short     // one-clock pulse
);

  logic [15:0] gcnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      gcnt      <= '1;
      ifg_bytes <= '1;
      ifg_ok    <= 1'b1;
      ifg_short <= 1'b0;
    end else begin
      ifg_short <= 1'b0;
      if (bus.tick) begin
        if (bus.pre) begin
          ifg_bytes <= gcnt;
          ifg_ok    <= (gcnt >= 16'(IFG_MIN_BYTES));
          ifg_short <= (gcnt <  16'(IFG_MIN_BYTES));
          gcnt      <= '0;
        end else if (bus.valid && bus.eof) begin
          gcnt <= 16'd1;
        end else if (!bus.valid && gcnt != '1) begin
          gcnt <= gcnt + 16'd1;
        end
      end
    end
  end

endmodule
