// gateway_kernel: the Gateway kernel (kernel 0) of a Galapagos cluster.
//
// All messages from other clusters arrive here, each carrying a one-byte GMI
// header with the destination kernel ID. The Packet Decoder strips the header
// and steers the payload: to the Forwarding path (point-to-point, the
// payload is re-sent to the destination kernel of this cluster), or to the
// GMI modules built into the gateway as "virtual kernels", here a Broadcast
// (virtual ID BCAST_VID) and a Gather (virtual ID GATHER_VID). An AXI-Stream
// Switch merges the three paths onto the gateway's single output. The block
// list (decoder, forwarding, GMI modules, switch) follows the paper's gateway
// figure; which GMI modules are built in, their IDs and destinations are
// parameters chosen per cluster. The defaults follow the I-BERT encoder
// cluster: the gateway broadcasts each input row to the Q/K/V Linear kernels
// 1, 2, 3 and the residual LayerNorm kernel 29.
// Timing: header flit 1 cycle, then the latency of the chosen path plus one
// switch register.
module gateway_kernel
  import gp_pkg::*;
#(
  parameter logic [7:0]  MY_KID      = 8'd0,
  parameter logic [7:0]  BCAST_VID   = 8'd39,
  parameter logic [7:0]  GATHER_VID  = 8'd40,
  parameter int unsigned BCAST_N     = 4,
  parameter logic [7:0]  BCAST_DEST [BCAST_N] = '{8'd1, 8'd2, 8'd3, 8'd29},
  parameter int unsigned BCAST_FLITS = 16,
  parameter int unsigned GATHER_N    = 2,
  parameter int unsigned GATHER_CHUNK= 6,
  parameter logic [7:0]  GATHER_SRC [GATHER_N] = '{8'd0, 8'd1},
  parameter logic [7:0]  GATHER_DEST = 8'd1
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t s_flit,
  input  logic  s_valid,
  output logic  s_ready,
  output flit_t m_flit,
  output logic  m_valid,
  input  logic  m_ready,
  output logic [15:0] fwd_pkts,
  output logic [15:0] gather_rows,
  output logic        bcast_overflow
);
  localparam logic [7:0] VIDS [3] = '{8'hFF, BCAST_VID, GATHER_VID};

  flit_t [2:0] d_flit;
  logic  [2:0] d_valid, d_ready;
  flit_t [2:0] p_flit;
  logic  [2:0] p_valid, p_ready;

  gmi_packet_decoder #(.N(3), .VID(VIDS)) u_dec (
    .clk, .rst_n, .s_flit, .s_valid, .s_ready,
    .m_flit(d_flit), .m_valid(d_valid), .m_ready(d_ready), .fwd_pkts);

  // forwarding path: payload already re-addressed by the decoder
  assign p_flit[0]  = d_flit[0];
  assign p_valid[0] = d_valid[0];
  assign d_ready[0] = p_ready[0];

  gmi_broadcast #(.NUM_DEST(BCAST_N), .MAX_FLITS(BCAST_FLITS), .MY_KID(MY_KID),
                  .DEST(BCAST_DEST)) u_bcast (
    .clk, .rst_n, .s_flit(d_flit[1]), .s_valid(d_valid[1]), .s_ready(d_ready[1]),
    .m_flit(p_flit[1]), .m_valid(p_valid[1]), .m_ready(p_ready[1]),
    .overflow(bcast_overflow));

  gmi_gather #(.NUM_SRC(GATHER_N), .CHUNK(GATHER_CHUNK), .MY_KID(MY_KID),
               .DEST(GATHER_DEST), .SRC(GATHER_SRC)) u_gather (
    .clk, .rst_n, .s_flit(d_flit[2]), .s_valid(d_valid[2]), .s_ready(d_ready[2]),
    .m_flit(p_flit[2]), .m_valid(p_valid[2]), .m_ready(p_ready[2]),
    .rows_out(gather_rows));

  axis_arbiter #(.N(3)) u_switch (
    .clk, .rst_n, .s_flit(p_flit), .s_valid(p_valid), .s_ready(p_ready),
    .m_flit, .m_valid, .m_ready);
endmodule
