// gmi_header_attacher: GMI Header Attacher, placed on the output stream of a
// kernel whose results go to another cluster.
//
// GMI needs a one-byte header on inter-cluster messages only: it names the
// destination kernel inside the destination cluster (a compute kernel or a
// GMI kernel). This block emits that header in front of every packet of the
// kernel and re-addresses the packet to the destination cluster: TDEST becomes
// the cluster ID and TUSER bit 16 is set, so the router uses its gateway
// table. The header byte and the TUSER bit are the paper's; carrying the byte
// in TDATA[7:0] of an extra leading flit (the rest of that flit zero) is this
// design's choice, so payload flits are never realigned.
// Interface: valid/ready in and out. Timing: one output register; each packet
// grows by one flit, the header flit costs one cycle.
module gmi_header_attacher
  import gp_pkg::*;
#(
  parameter logic [7:0] DEST_KID     = 8'd0,  // kernel inside the destination cluster
  parameter logic [7:0] DEST_CLUSTER = 8'd1   // destination cluster ID
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t s_flit,
  input  logic  s_valid,
  output logic  s_ready,
  output flit_t m_flit,
  output logic  m_valid,
  input  logic  m_ready
);
  logic need_hdr;   // next output flit of this packet is the header
  logic out_free;
  assign out_free = !m_valid || m_ready;
  assign s_ready  = out_free && !need_hdr;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      need_hdr <= 1'b1;
      m_valid  <= 1'b0;
      m_flit   <= '0;
    end else if (out_free) begin
      if (s_valid && need_hdr) begin
        m_flit   <= make_flit(DATA_W'(DEST_KID), s_flit.tid, DEST_CLUSTER, 1'b0, 1'b1);
        m_valid  <= 1'b1;
        need_hdr <= 1'b0;
      end else if (s_valid) begin
        m_flit       <= s_flit;
        m_flit.tdest <= DEST_CLUSTER;
        m_flit.tuser[INTER_BIT] <= 1'b1;
        m_valid      <= 1'b1;
        need_hdr     <= s_flit.tlast;
      end else begin
        m_valid <= 1'b0;
      end
    end
  end
endmodule
