// epp_sfd_detect: preamble / start-of-frame-delimiter detection and frame
// delineation.
//
// A frame is preceded by a preamble of alternating ones and zeros whose last
// two bits are "11" (8 bytes 10101...1011 on the wire, i.e. seven 0x55 bytes
// and the SFD byte 0xD5 on a byte-wide LSB-first interface). This block walks
// the received bytes through IDLE -> PREAMBLE -> FRAME, and drives the internal
// frame bus (epp_pkg::fbeat_t) that all parsing blocks tap.
//
// One byte is held back so that the last frame byte can carry eof: the byte
// received in byte time n is put on the bus in byte time n+1 (or when the
// carrier drops). The bus is registered, so a byte appears 1 clock after the
// tick that completes the following byte. idx counts frame bytes from 0 (first
// destination MAC byte).
//
// Side outputs, each a one-clock pulse with the bus beat it belongs to:
//   sfd_found    SFD seen; pre_len gives the preamble bytes before it
//   bad_preamble carrier ended, or a byte other than 0x55/0xD5 came, before a
//                valid SFD (the rest of the carrier event is ignored)
// The preamble/SFD pattern is the paper's. Accepting a preamble of at least
// MIN_PREAMBLE bytes (so a PHY that shortens it still works) is this design's
// choice; pre_len lets the host compare it with PREAMBLE_BYTES.
module epp_sfd_detect
  import epp_pkg::*;
#(
  parameter int unsigned PREAMBLE_BYTES = 7,  // 0x55 bytes before the SFD (paper: 8 bytes with SFD)
  parameter int unsigned MIN_PREAMBLE   = 1   // fewest 0x55 bytes accepted before the SFD
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tick,
  input  logic       dv,
  input  logic       er,
  input  logic [7:0] data,
  output fbeat_t     bus,
  output logic       sfd_found,
  output logic [7:0] pre_len,
  output logic       pre_ok,        // pre_len == PREAMBLE_BYTES (valid with sfd_found)
  output logic       bad_preamble
);

  typedef enum logic [1:0] {S_IDLE, S_PRE, S_FRAME, S_DROP} state_e;

  state_e           state;
  logic [7:0]       pcnt;
  logic             have;     // a frame byte is held back
  logic [7:0]       hold;
  logic             hold_er;
  logic [IDX_W-1:0] cnt;      // frame bytes already put on the bus

  function automatic logic [IDX_W-1:0] sat_inc(input logic [IDX_W-1:0] v);
    return (v == '1) ? v : v + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      pcnt         <= '0;
      have         <= 1'b0;
      hold         <= '0;
      hold_er      <= 1'b0;
      cnt          <= '0;
      bus          <= FBEAT_IDLE;
      sfd_found    <= 1'b0;
      pre_len      <= '0;
      pre_ok       <= 1'b0;
      bad_preamble <= 1'b0;
    end else begin
      bus          <= FBEAT_IDLE;
      sfd_found    <= 1'b0;
      bad_preamble <= 1'b0;
      bus.tick     <= tick;
      if (tick) begin
        unique case (state)
          S_IDLE: if (dv) begin
            bus.pre <= 1'b1;
            if (data == PREAMBLE_BYTE) begin
              pcnt  <= 8'd1;
              state <= S_PRE;
            end else begin
              bad_preamble <= 1'b1;
              state        <= S_DROP;
            end
          end
          S_PRE: begin
            if (!dv) begin
              bad_preamble <= 1'b1;
              state        <= S_IDLE;
            end else if (data == PREAMBLE_BYTE) begin
              if (pcnt != 8'hFF) pcnt <= pcnt + 8'd1;
            end else if (data == SFD_BYTE && pcnt >= 8'(MIN_PREAMBLE)) begin
              sfd_found <= 1'b1;
              pre_len   <= pcnt;
              pre_ok    <= (pcnt == 8'(PREAMBLE_BYTES));
              have      <= 1'b0;
              cnt       <= '0;
              state     <= S_FRAME;
            end else begin
              bad_preamble <= 1'b1;
              state        <= S_DROP;
            end
          end
          S_FRAME: begin
            if (have) begin
              bus.valid <= 1'b1;
              bus.sof   <= (cnt == '0);
              bus.eof   <= !dv;
              bus.err   <= hold_er;
              bus.idx   <= cnt;
              bus.data  <= hold;
              cnt       <= sat_inc(cnt);
            end
            if (dv) begin
              hold    <= data;
              hold_er <= er;
              have    <= 1'b1;
            end else begin
              have  <= 1'b0;
              state <= S_IDLE;
            end
          end
          S_DROP: if (!dv) state <= S_IDLE;
          default: state <= S_IDLE;
        endcase
      end
    end
  end

  // Bus rules: sof and eof only mark data beats; data only moves on a tick.
  a_sof_valid: assert property (@(posedge clk) disable iff (!rst_n) bus.sof |-> bus.valid);
  a_eof_valid: assert property (@(posedge clk) disable iff (!rst_n) bus.eof |-> bus.valid);
  a_valid_tick: assert property (@(posedge clk) disable iff (!rst_n) bus.valid |-> bus.tick);

endmodule
