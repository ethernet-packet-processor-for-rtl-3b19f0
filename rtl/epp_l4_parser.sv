// epp_l4_parser: layer-4 parsing, TCP/UDP port extraction.
//
// When the L3 parser has found a TCP or UDP header (l4_valid), the block reads
// the 16-bit source port (l4_offset + 0..1) and destination port
// (l4_offset + 2..3), the first four bytes of both headers. ports_valid rises
// the clock after byte l4_offset + 3 and drops the clock after the next sof;
// the ports hold until overwritten.
// Layer-4 parsing is named by the paper; which fields are taken is this
// design's choice.
module epp_l4_parser
  import epp_pkg::*;
(
  input  logic             clk,
  input  logic             rst_n,
  input  fbeat_t           bus,
  input  logic [IDX_W-1:0] l4_offset,
  input  logic             l4_valid,
  output logic [15:0]      src_port,
  output logic [15:0]      dst_port,
  output logic             ports_valid
);

  logic [IDX_W-1:0] rel;
  logic             in_hdr;

  always_comb begin
    rel    = bus.idx - l4_offset;
    in_hdr = bus.valid && !bus.sof && l4_valid && (bus.idx >= l4_offset);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      src_port    <= '0;
      dst_port    <= '0;
      ports_valid <= 1'b0;
    end else begin
      if (bus.valid && bus.sof) ports_valid <= 1'b0;
      if (in_hdr) begin
        unique case (int'(rel))
          0: src_port[15:8] <= bus.data;
          1: src_port[7:0]  <= bus.data;
          2: dst_port[15:8] <= bus.data;
          3: begin
            dst_port[7:0] <= bus.data;
            ports_valid   <= 1'b1;
          end
          default: ;
        endcase
      end
    end
  end

endmodule
