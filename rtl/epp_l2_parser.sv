// epp_l2_parser: layer-2 parsing, identification of the Ethernet encapsulation.
//
// Bytes 12..13 are the length/type field. A value of 0x0600 or more is an
// Ethernet II type; 1500 (0x05DC) or less is an IEEE 802.3 length, after which
// an 802.2 LLC header follows (DSAP, SSAP, control at bytes 14..16). LLC
// AA-AA-03 announces a SNAP header: a 3-byte OUI (bytes 17..19) and a 16-bit
// type (bytes 20..21). Values 1501..1535 are invalid. The block reports:
//   encap      ENC_ETH2 / ENC_LLC / ENC_SNAP / ENC_INVALID
//   type_len   the raw length/type field
//   ethertype  the protocol type (Ethernet II or SNAP type; 0 for plain LLC)
//   l3_offset  frame byte where the layer-3 header starts (14, 17 or 22)
//   l3_valid   ethertype and l3_offset are final for this frame; rises the
//              clock after the last byte that decides them (byte 13 for
//              Ethernet II, byte 16 for LLC, byte 21 for SNAP), so a layer-3
//              block tapping the same bus sees it before byte l3_offset.
// All outputs are registered; l3_valid drops and encap returns to ENC_INVALID
// the clock after the next sof (so a frame shorter than 14 bytes is INVALID).
// Identifying "the type of Ethernet encapsulation" and "type of protocol" is
// the paper's; the set of encapsulations recognised is this design's choice
// (802.1Q VLAN tags are not decoded: 0x8100 is reported as a type).
module epp_l2_parser
  import epp_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  fbeat_t           bus,
  output encap_e           encap,
  output logic [15:0]      type_len,
  output logic [15:0]      ethertype,
  output logic [IDX_W-1:0] l3_offset,
  output logic             l3_valid
);

  logic [15:0] llc;      // DSAP, SSAP
  logic [15:0] tl_now;   // length/type including the byte on the bus

  always_comb tl_now = {type_len[15:8], bus.data};

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      encap     <= ENC_INVALID;
      type_len  <= '0;
      ethertype <= '0;
      l3_offset <= '0;
      l3_valid  <= 1'b0;
      llc       <= '0;
    end else if (bus.valid) begin
      if (bus.sof) begin
        l3_valid <= 1'b0;
        encap    <= ENC_INVALID;
      end
      unique case (int'(bus.idx))
        12: type_len[15:8] <= bus.data;
        13: begin
          type_len[7:0] <= bus.data;
          if (tl_now >= 16'h0600) begin
            encap     <= ENC_ETH2;
            ethertype <= tl_now;
            l3_offset <= IDX_W'(14);
            l3_valid  <= 1'b1;
          end else if (tl_now <= 16'd1500) begin
            encap     <= ENC_LLC;       // until the LLC header says SNAP
            ethertype <= '0;
          end else begin
            encap     <= ENC_INVALID;
            ethertype <= '0;
          end
        end
        14: llc[15:8] <= bus.data;
        15: llc[7:0]  <= bus.data;
        16: if (encap == ENC_LLC) begin
          if ({llc, bus.data} == 24'hAAAA03) begin
            encap <= ENC_SNAP;
          end else begin
            l3_offset <= IDX_W'(17);
            l3_valid  <= 1'b1;
          end
        end
        20: if (encap == ENC_SNAP) ethertype[15:8] <= bus.data;
        21: if (encap == ENC_SNAP) begin
          ethertype[7:0] <= bus.data;
          l3_offset      <= IDX_W'(22);
          l3_valid       <= 1'b1;
        end
        default: ;
      endcase
    end
  end

endmodule
