// input_switch: 1-to-N packet demultiplexer, the Input Switch of a Galapagos
// application region. It delivers each packet arriving from the router (or
// from the network) to the local kernel port named by its TDEST.
//
// The kernel-ID-to-port map is a parameter table PORT_OF_KID (one entry per
// kernel ID, value = local port). A packet whose TUSER inter-cluster bit is
// set came from another cluster and is always delivered to GATEWAY_PORT,
// because all inter-cluster traffic enters a cluster through its Gateway
// kernel. Packets whose TDEST maps to no port (value >= N) are dropped and
// counted. The port is chosen on the first flit and held until TLAST.
// Timing: combinational pass-through, no added latency; back-pressure from
// the selected port stalls the input.
module input_switch
  import gp_pkg::*;
#(
  parameter int unsigned N            = 4,
  parameter int unsigned GATEWAY_PORT = 0,
  parameter logic [7:0]  PORT_OF_KID [MAX_KERNELS] = '{default: 8'hFF}
) (
  input  logic          clk,
  input  logic          rst_n,
  input  flit_t         s_flit,
  input  logic          s_valid,
  output logic          s_ready,
  output flit_t [N-1:0] m_flit,
  output logic  [N-1:0] m_valid,
  input  logic  [N-1:0] m_ready,
  output logic  [15:0]  dropped
);
  logic       in_pkt;          // inside a packet (first flit already routed)
  logic [7:0] held_port;
  logic [7:0] port;

  always_comb begin
    if (in_pkt)                          port = held_port;
    else if (s_flit.tuser[INTER_BIT])    port = 8'(GATEWAY_PORT);
    else                                 port = PORT_OF_KID[s_flit.tdest];
  end

  always_comb begin
    for (int unsigned i = 0; i < N; i++) begin
      m_flit[i]  = s_flit;
      m_valid[i] = s_valid && (port == 8'(i));
    end
    s_ready = 1'b1;                    // no such port: the packet is dropped
    for (int unsigned i = 0; i < N; i++)
      if (port == 8'(i)) s_ready = m_ready[i];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      in_pkt    <= 1'b0;
      held_port <= '0;
      dropped   <= '0;
    end else if (s_valid && s_ready) begin
      in_pkt    <= !s_flit.tlast;
      held_port <= port;
      if (port >= 8'(N) && !in_pkt) dropped <= dropped + 16'd1;
    end
  end
endmodule
