// epp_mac_extract: destination and source MAC address extraction.
//
// Frame bytes 0..5 are the destination MAC address and bytes 6..11 the source
// MAC address; the first byte received is the most significant byte of the
// address as it is usually written (byte 0 -> dst_mac[47:40]).
//
// Timing: each byte is stored in the clock after its bus beat. dst_valid rises
// the clock after byte 5, src_valid the clock after byte 11; both drop the
// clock after the next sof. The addresses hold until overwritten by the next
// frame, so they can be read together with the other blocks' results in the
// clock after eof. A frame too short to carry an address leaves its valid low.
// The two fields are the paper's (SRC MAC, DST MAC blocks); their order in the
// frame is Ethernet's; the valid flags are this design's.
module epp_mac_extract
  import epp_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  fbeat_t      bus,
  output logic [47:0] dst_mac,
  output logic [47:0] src_mac,
  output logic        dst_valid,
  output logic        src_valid
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      dst_mac   <= '0;
      src_mac   <= '0;
      dst_valid <= 1'b0;
      src_valid <= 1'b0;
    end else if (bus.valid) begin
      if (bus.sof) begin
        dst_valid <= 1'b0;
        src_valid <= 1'b0;
      end
      if (bus.idx < IDX_W'(SA_OFFSET)) begin
        dst_mac[8*(5 - (int'(bus.idx) - DA_OFFSET)) +: 8] <= bus.data;
        if (bus.idx == IDX_W'(SA_OFFSET - 1)) dst_valid <= 1'b1;
      end else if (bus.idx < IDX_W'(TL_OFFSET)) begin
        src_mac[8*(5 - (int'(bus.idx) - SA_OFFSET)) +: 8] <= bus.data;
        if (bus.idx == IDX_W'(TL_OFFSET - 1)) src_valid <= 1'b1;
      end
    end
  end

endmodule
