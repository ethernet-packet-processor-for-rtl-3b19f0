// epp_crc_check: CRC-32 calculation and frame check sequence (FCS) check.
//
// The 32-bit FCS closes every Ethernet frame. The block runs the IEEE 802.3
// CRC-32 (polynomial 0x04C11DB7, reflected, initial value all ones) over every
// frame byte from the destination MAC to the last FCS byte, one byte per bus
// beat (epp_pkg::crc32_byte, eight unrolled bit steps). When the received FCS
// is included, a correct frame leaves the register at the fixed residue
// 0xDEBB20E3, which gives crc_ok without knowing where the data ends.
//
// It also reports the CRC it calculated over the frame without its last four
// bytes (fcs_calc, the value a transmitter would append) next to the four
// received FCS bytes (fcs_rx, first received byte in bits 7:0). For that it
// keeps the register values of the last three beats.
//
// Timing: done, crc_ok, fcs_calc and fcs_rx are updated in the clock after
// the eof beat and hold until the next frame ends. Frames shorter than five
// bytes give a meaningless fcs_calc.
// CRC detection/calculation in hardware is the paper's; the byte-serial
// residue check is this design's implementation.
module epp_crc_check
  import epp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  fbeat_t      bus,
  output logic        done,
  output logic        crc_ok,
  output logic [31:0] fcs_calc,
  output logic [31:0] fcs_rx
);

  logic [31:0] crc;          // register after the last byte
  logic [31:0] crc_in;       // register before the byte on the bus
  logic [31:0] crc_next;
  logic [31:0] h0, h1, h2;   // crc_in of the previous three beats
  logic [23:0] last3;        // last three bytes, newest in bits 23:16

  always_comb begin
    crc_in   = bus.sof ? CRC_INIT : crc;
    crc_next = crc32_byte(crc_in, bus.data);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      crc      <= CRC_INIT;
      h0       <= '0;
      h1       <= '0;
      h2       <= '0;
      last3    <= '0;
      done     <= 1'b0;
      crc_ok   <= 1'b0;
      fcs_calc <= '0;
      fcs_rx   <= '0;
    end else begin
      done <= 1'b0;
      if (bus.valid) begin
        crc   <= crc_next;
        h0    <= crc_in;
        h1    <= h0;
        h2    <= h1;
        last3 <= {bus.data, last3[23:8]};
        if (bus.eof) begin
          done     <= 1'b1;
          crc_ok   <= (crc_next == CRC_RESIDUE);
          fcs_calc <= ~h2;
          fcs_rx   <= {bus.data, last3};
        end
      end
    end
  end

endmodule
