// gmi_packet_decoder: Packet Decoder of the Gateway kernel, with the
// Forwarding path.
//
// Every inter-cluster message enters its cluster at the Gateway kernel with
// a one-byte GMI header (TDATA[7:0] of the leading flit, see
// gmi_header_attacher). The decoder reads the destination kernel ID from the
// header, removes the header flit, and steers the payload to one of N output
// ports: port i (i >= 1) if the ID equals VID[i], the virtual kernel ID of a
// GMI module built into the gateway (gather, broadcast, ...); otherwise port
// 0, the Forwarding path for point-to-point messages. Every payload flit
// leaves with TDEST set to the header's kernel ID and TUSER bit 16 cleared,
// so it is routed as ordinary intra-cluster traffic from here on; that is
// all the Forwarding module has to do, so it is folded into this block.
// The header-strip-and-steer behaviour is the paper's; the port numbering is
// this design's. Timing: the header flit is consumed in one cycle; payload
// passes combinationally to the selected port.
module gmi_packet_decoder
  import gp_pkg::*;
#(
  parameter int unsigned N = 3,
  parameter logic [7:0]  VID [N] = '{default: 8'hFF}   // VID[0] unused
) (
  input  logic          clk,
  input  logic          rst_n,
  input  flit_t         s_flit,
  input  logic          s_valid,
  output logic          s_ready,
  output flit_t [N-1:0] m_flit,
  output logic  [N-1:0] m_valid,
  input  logic  [N-1:0] m_ready,
  output logic  [15:0]  fwd_pkts      // packets sent down the forwarding path
);
  logic       in_payload;
  kid_t       kid;
  logic [7:0] port;

  always_comb begin
    port = 8'd0;
    for (int unsigned i = 1; i < N; i++)
      if (VID[i] == kid) port = 8'(i);
  end

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      m_flit[i]       = s_flit;
      m_flit[i].tdest = kid;
      m_flit[i].tuser[INTER_BIT] = 1'b0;
      m_valid[i]      = in_payload && s_valid && (port == 8'(i));
    end
    s_ready = 1'b1;                        // header flit: always taken
    if (in_payload)
      for (int unsigned i = 0; i < N; i++)
        if (port == 8'(i)) s_ready = m_ready[i];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_payload <= 1'b0;
      kid        <= '0;
      fwd_pkts   <= '0;
    end else if (s_valid && s_ready) begin
      if (!in_payload) begin
        kid        <= s_flit.tdata[7:0];
        in_payload <= !s_flit.tlast;       // header-only message: nothing follows
      end else if (s_flit.tlast) begin
        in_payload <= 1'b0;
        if (port == 8'd0) fwd_pkts <= fwd_pkts + 16'd1;
      end
    end
  end
endmodule
