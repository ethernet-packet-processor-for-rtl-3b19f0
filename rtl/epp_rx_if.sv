// epp_rx_if: receive interface between the PHY chip and the packet processor.
//
// The processor supports 10/100/1000 Mb/s links. At 1000 Mb/s the PHY delivers
// a byte per receive clock (GMII, rxd[7:0]); at 10 and 100 Mb/s it delivers a
// nibble per clock (MII, rxd[3:0], low nibble first). This block turns either
// into one byte per "byte time", so the rest of the processor is the same for
// all three speeds; gmii_mode selects the width and may only change while the
// line is idle.
//
// Outputs (registered, one clock after the input):
//   tick  one byte time elapsed: every clock in GMII mode, every second clock
//         in MII mode, also while idle (the gap is counted in byte times)
//   dv    the byte in data belongs to a carrier event (preamble, SFD, frame)
//   data  the byte; er: the PHY flagged rx_er on it
// In MII mode the nibble pairing restarts when rx_dv rises; an odd trailing
// nibble is dropped. The 10/100/1000 requirement is the paper's; MII/GMII as
// the PHY interface and the nibble handling are this design's choice.
module epp_rx_if (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       gmii_mode,   // 1: 8-bit GMII (1000 Mb/s), 0: 4-bit MII (10/100 Mb/s)
  input  logic       rx_dv,
  input  logic       rx_er,
  input  logic [7:0] rxd,
  output logic       tick,
  output logic       dv,
  output logic       er,
  output logic [7:0] data
);

  logic       ph;       // MII: low nibble held
  logic       dv_prev;  // rx_dv one clock earlier
  logic [3:0] lo;
  logic       er_lo;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tick    <= 1'b0;
      dv      <= 1'b0;
      er      <= 1'b0;
      data    <= '0;
      ph      <= 1'b0;
      dv_prev <= 1'b0;
      lo      <= '0;
      er_lo   <= 1'b0;
    end else begin
      dv_prev <= rx_dv;
      tick    <= 1'b0;
      if (gmii_mode) begin
        tick <= 1'b1;
        dv   <= rx_dv;
        er   <= rx_dv & rx_er;
        data <= rxd;
        ph   <= 1'b0;
      end else if (rx_dv) begin
        if (!dv_prev || !ph) begin
          // first nibble of a byte (pairing restarts when the carrier rises)
          lo    <= rxd[3:0];
          er_lo <= rx_er;
          ph    <= 1'b1;
        end else begin
          tick <= 1'b1;
          dv   <= 1'b1;
          er   <= rx_er | er_lo;
          data <= {rxd[3:0], lo};
          ph   <= 1'b0;
        end
      end else begin
        // idle: a byte time every second clock
        if (ph) begin
          tick <= 1'b1;
          dv   <= 1'b0;
          er   <= 1'b0;
          data <= '0;
          ph   <= 1'b0;
        end else begin
          ph <= 1'b1;
        end
      end
    end
  end

endmodule
