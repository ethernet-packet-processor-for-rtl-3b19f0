// epp_frame_count: frame length count and frame statistics.
//
// Counts the bytes of each frame on the frame bus, from the first destination
// MAC byte to the last FCS byte, and checks the count against the Ethernet
// limits: 6+6+2 header bytes, 46..1500 data bytes and 4 FCS bytes give
// MIN_FRAME = 64 and MAX_FRAME = 1518. It also keeps running counts of frames,
// runts, oversize frames and interframe-gap violations (ifg_short from the IFG
// block, which feeds this block as in the paper's SFD -> IFG -> Frame Count
// chain).
//
// Timing: frame_len, len_ok, runt and oversize are updated in the clock after
// the eof beat (done pulses then) and hold until the next frame ends. The
// counters wrap at 2**32.
// The limits follow the paper's frame table (its other figure prints
// "64 to 1584 Bytes"; the table's 1518 is used). Which counters exist is this
// design's choice.
module epp_frame_count
  import epp_pkg::*;
#(
  parameter int unsigned MIN_FRAME = 64,
  parameter int unsigned MAX_FRAME = 1518
) (
  input  logic             clk,
  input  logic             rst_n,
  input  fbeat_t           bus,
  input  logic             ifg_short,
  output logic             done,
  output logic [LEN_W-1:0] frame_len,
  output logic             len_ok,
  output logic             runt,
  output logic             oversize,
  output logic [31:0]      frames,
  output logic [31:0]      runts,
  output logic [31:0]      oversizes,
  output logic [31:0]      ifg_errors
);

  logic [LEN_W-1:0] cnt;
  logic [LEN_W-1:0] len_now;

  always_comb begin
    // length including the current byte, saturating
    len_now = bus.sof ? LEN_W'(1) : ((cnt == '1) ? cnt : cnt + 1'b1);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt        <= '0;
      done       <= 1'b0;
      frame_len  <= '0;
      len_ok     <= 1'b0;
      runt       <= 1'b0;
      oversize   <= 1'b0;
      frames     <= '0;
      runts      <= '0;
      oversizes  <= '0;
      ifg_errors <= '0;
    end else begin
      done <= 1'b0;
      if (ifg_short) ifg_errors <= ifg_errors + 32'd1;
      if (bus.valid) begin
        cnt <= len_now;
        if (bus.eof) begin
          done      <= 1'b1;
          frame_len <= len_now;
          len_ok    <= (len_now >= LEN_W'(MIN_FRAME)) && (len_now <= LEN_W'(MAX_FRAME));
          runt      <= (len_now <  LEN_W'(MIN_FRAME));
          oversize  <= (len_now >  LEN_W'(MAX_FRAME));
          frames    <= frames + 32'd1;
          if (len_now < LEN_W'(MIN_FRAME)) runts     <= runts + 32'd1;
          if (len_now > LEN_W'(MAX_FRAME)) oversizes <= oversizes + 32'd1;
        end
      end
    end
  end

endmodule
