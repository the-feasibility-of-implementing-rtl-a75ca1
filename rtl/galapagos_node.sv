// galapagos_node: one FPGA of the I-BERT encoder cluster, built on the
// enhanced Galapagos platform.
//
// The node joins the platform fabric to the compute kernels:
//   network in ─┐                         ┌─> network out (with IP)
//               ├─ merge ─ Input Switch ─ kernels ─ Output Switch ─ Router
//   loopback <──┘                                                  │
//   <──────────────────────────── local destinations ──────────────┘
// The kernels carry the kernel IDs of the encoder cluster: Kern_0 Gateway
// (broadcasts each input row to the Q/K/V Linear kernels 1-3 and to the
// residual LayerNorm 29), Kern_1 Linear+Quant (Q projection), Kern_34 Scatter
// (sends the 64 columns of head h of each Q row to kern_(4+h)), kern_4 the
// Attention Dot-Product of head 0 (Q from Kern_34, K from Kern_35, told
// apart by TID), kern_16 the Softmax Matrix Multiply + Quant of head 0 (V
// from Kern_36), Kern_37 the Gather of the 12 head outputs into a row for
// Linear kern_28. Every kernel input has a FIFO deep enough for one whole
// matrix, as in the paper, so a kernel that waits never blocks the switch.
// The other kernels of the cluster sit on other FPGAs and
// are reached through the router. Softmax (inside kern_4) and LayerNorm are
// not built: the dot-product scores leave on the sm_* ports, softmax results
// come back on the p_* ports, and the cluster's final LayerNorm output
// enters on the ln_* port, where a GMI Header Attacher addresses it to the
// gateway of the next cluster (the next encoder).
// From the paper: the fabric (switches, router with intra/inter tables and
// TUSER bit 16), the kernel roles and IDs, the GMI kernels and header.
// This design's choices: which kernels share this FPGA, the merge of network
// and loopback traffic, and all widths and handshakes not printed in the
// paper's figures.
module galapagos_node
  import gp_pkg::*;
#(
  parameter int unsigned H         = 768,
  parameter int unsigned M_MAX     = 128,
  parameter int unsigned NUM_TILES = 16,
  parameter int unsigned NUM_PE    = 16,
  parameter int unsigned FIFO_DEPTH = 1536,   // one 128 x 768 INT8 matrix
  parameter logic [7:0]  NEXT_CLUSTER = 8'd1,
  parameter logic [7:0]  NEXT_BCAST   = 8'd39   // gateway broadcast virtual ID
) (
  input  logic        clk,
  input  logic        rst_n,
  input  ip_t         my_ip,
  input  logic [7:0]  seq_len,
  // routing tables
  input  logic        tbl_we,
  input  logic        tbl_sel,
  input  kid_t        tbl_addr,
  input  ip_t         tbl_ip,
  // Linear kern_1 weights / bias
  input  logic        w_we,
  input  logic [$clog2(NUM_TILES)-1:0] w_tile,
  input  logic [$clog2((H/NUM_TILES)*(H/64))-1:0] w_addr,
  input  logic [DATA_W-1:0] w_data,
  input  logic        b_we,
  input  logic [$clog2(H)-1:0] b_addr,
  input  logic signed [31:0] b_data,
  // Quant scales
  input  logic [30:0] lin_mult,
  input  logic [5:0]  lin_shift,
  input  logic [30:0] sm_mult,
  input  logic [5:0]  sm_shift,
  // network side (network bridge / UDP core)
  input  flit_t       net_in_flit,
  input  logic        net_in_valid,
  output logic        net_in_ready,
  output flit_t       net_out_flit,
  output ip_t         net_out_ip,
  output logic        net_out_valid,
  input  logic        net_out_ready,
  // to the Softmax of kern_4 (not built here): attention scores
  output flit_t       sm_flit,
  output logic        sm_valid,
  input  logic        sm_ready,
  // from the Softmax: probability rows (INT8)
  input  flit_t       p_flit,
  input  logic        p_valid,
  output logic        p_ready,
  // from the final LayerNorm (kern_32, not built): encoder output rows
  input  flit_t       ln_flit,
  input  logic        ln_valid,
  output logic        ln_ready,
  // activity counters
  output logic [15:0] fwd_pkts,
  output logic [15:0] gather_rows,
  output logic [15:0] inter_pkts,
  output logic [15:0] dp_pad,
  output logic [15:0] sm_pad,
  output logic [15:0] dropped,
  output logic        bcast_overflow,
  output logic [15:0] gw_gather_out,   // rows assembled by the gateway's Gather
  output logic [15:0] fifo_peak         // highest kernel-FIFO fill seen

);
  localparam int unsigned HEADS = H / 64;
  typedef logic [7:0] kid_list_t [HEADS];

  function automatic kid_list_t seq_ids(int unsigned base);
    kid_list_t l;
    for (int unsigned i = 0; i < HEADS; i++) l[i] = 8'(base + i);
    return l;
  endfunction

  typedef logic [7:0] port_map_t [MAX_KERNELS];
  function automatic port_map_t port_map();
    port_map_t m;
    for (int unsigned i = 0; i < MAX_KERNELS; i++) m[i] = 8'hFF;
    m[0] = 8'd0; m[1] = 8'd1; m[34] = 8'd2; m[4] = 8'd3; m[16] = 8'd4; m[37] = 8'd5;
    return m;
  endfunction

  localparam kid_list_t SCATTER_DEST = seq_ids(4);    // kern_4 .. kern_15
  localparam kid_list_t GATHER_SRC   = seq_ids(16);   // kern_16 .. kern_27
  localparam port_map_t PORT_OF_KID  = port_map();

  // ---------------- input side ----------------
  flit_t [1:0] mi_flit;  logic [1:0] mi_valid, mi_ready;
  flit_t in_flit;        logic in_valid, in_ready;
  flit_t loc_flit;       logic loc_valid, loc_ready;

  assign mi_flit[0]   = net_in_flit;
  assign mi_valid[0]  = net_in_valid;
  assign net_in_ready = mi_ready[0];
  assign mi_flit[1]   = loc_flit;
  assign mi_valid[1]  = loc_valid;
  assign loc_ready    = mi_ready[1];

  axis_arbiter #(.N(2)) u_in_merge (
    .clk, .rst_n, .s_flit(mi_flit), .s_valid(mi_valid), .s_ready(mi_ready),
    .m_flit(in_flit), .m_valid(in_valid), .m_ready(in_ready));

  flit_t [5:0] k_flit;  logic [5:0] k_valid, k_ready;

  input_switch #(.N(6), .GATEWAY_PORT(0), .PORT_OF_KID(PORT_OF_KID)) u_in_sw (
    .clk, .rst_n, .s_flit(in_flit), .s_valid(in_valid), .s_ready(in_ready),
    .m_flit(k_flit), .m_valid(k_valid), .m_ready(k_ready), .dropped);

  // ---------------- kernel input FIFOs ----------------
  // one FIFO per kernel input (two for kern_4: Q and K are split by TID)
  flit_t [6:0] f_in;  logic [6:0] f_in_v, f_in_r;
  flit_t [6:0] f_flit; logic [6:0] f_valid, f_ready;
  logic  q_sel;
  logic [$clog2(FIFO_DEPTH+1)-1:0] f_level [7];
  logic [15:0] gw_gather_rows;
  assign q_sel = (k_flit[3].tid == 8'd34);
  always_comb begin
    for (int i = 0; i < 6; i++) begin
      f_in[i]   = k_flit[i];
      f_in_v[i] = k_valid[i];
      k_ready[i] = f_in_r[i];
    end
    f_in[6]    = k_flit[3];
    f_in_v[3]  = k_valid[3] && !q_sel;      // K rows
    f_in_v[6]  = k_valid[3] &&  q_sel;      // Q rows
    k_ready[3] = q_sel ? f_in_r[6] : f_in_r[3];
  end
  for (genvar i = 0; i < 7; i++) begin : g_fifo
    axis_fifo #(.DEPTH(FIFO_DEPTH)) u_fifo (
      .clk, .rst_n, .s_flit(f_in[i]), .s_valid(f_in_v[i]), .s_ready(f_in_r[i]),
      .m_flit(f_flit[i]), .m_valid(f_valid[i]), .m_ready(f_ready[i]), .level(f_level[i]));
  end

  assign gw_gather_out = gw_gather_rows;
  always_ff @(posedge clk) begin
    if (!rst_n) fifo_peak <= '0;
    else for (int i = 0; i < 7; i++)
      if (16'(f_level[i]) > fifo_peak) fifo_peak <= 16'(f_level[i]);
  end

  // ---------------- kernels ----------------
  flit_t [5:0] o_flit;  logic [5:0] o_valid, o_ready;

  // Kern_0: Gateway
  gateway_kernel #(.MY_KID(8'd0)) u_gateway (
    .clk, .rst_n, .s_flit(f_flit[0]), .s_valid(f_valid[0]), .s_ready(f_ready[0]),
    .m_flit(o_flit[0]), .m_valid(o_valid[0]), .m_ready(o_ready[0]),
    .fwd_pkts, .gather_rows(gw_gather_rows), .bcast_overflow);

  // Kern_1: Linear + Quant, output to Kern_34
  logic [NUM_TILES*32-1:0] lin_data;
  logic lin_valid, lin_ready, lin_last;
  linear #(.H(H), .NUM_TILES(NUM_TILES)) u_linear (
    .clk, .rst_n, .w_we, .w_tile, .w_addr, .w_data, .b_we, .b_addr, .b_data,
    .s_flit(f_flit[1]), .s_valid(f_valid[1]), .s_ready(f_ready[1]),
    .m_data(lin_data), .m_valid(lin_valid), .m_ready(lin_ready), .m_last(lin_last));
  quant #(.QL(NUM_TILES), .ROW(H)) u_lin_quant (
    .clk, .rst_n, .mult(lin_mult), .shift(lin_shift), .my_kid(8'd1), .dest(8'd34),
    .s_data(lin_data), .s_valid(lin_valid), .s_ready(lin_ready),
    .m_flit(o_flit[1]), .m_valid(o_valid[1]), .m_ready(o_ready[1]));

  // Kern_34: Scatter of Q rows to the heads
  gmi_scatter #(.NUM_DEST(HEADS), .CHUNK(1), .MY_KID(8'd34), .DEST(SCATTER_DEST)) u_scatter (
    .clk, .rst_n, .s_flit(f_flit[2]), .s_valid(f_valid[2]), .s_ready(f_ready[2]),
    .m_flit(o_flit[2]), .m_valid(o_valid[2]), .m_ready(o_ready[2]));

  // kern_4: Attention Dot-Product of head 0 (Q from TID 34, K from TID 35)
  attention_dot_product #(.M_MAX(M_MAX), .NUM_PE(NUM_PE)) u_dotprod (
    .clk, .rst_n, .seq_len, .my_kid(8'd4), .dest(8'd4),
    .k_flit(f_flit[3]), .k_valid(f_valid[3]), .k_ready(f_ready[3]),
    .q_flit(f_flit[6]), .q_valid(f_valid[6]), .q_ready(f_ready[6]),
    .m_flit(sm_flit), .m_valid(sm_valid), .m_ready(sm_ready), .pad_cycles(dp_pad));

  // kern_16: Softmax Matrix Multiply + Quant of head 0, output to Kern_37
  logic [64*32-1:0] smm_data;
  logic smm_valid, smm_ready, smm_last;
  softmax_matmul #(.M_MAX(M_MAX), .NUM_PE(NUM_PE), .N(64)) u_smm (
    .clk, .rst_n, .seq_len,
    .v_flit(f_flit[4]), .v_valid(f_valid[4]), .v_ready(f_ready[4]),
    .p_flit, .p_valid, .p_ready,
    .m_data(smm_data), .m_valid(smm_valid), .m_ready(smm_ready), .m_last(smm_last),
    .pad_rows(sm_pad));
  quant #(.QL(64), .ROW(64)) u_smm_quant (
    .clk, .rst_n, .mult(sm_mult), .shift(sm_shift), .my_kid(8'd16), .dest(8'd37),
    .s_data(smm_data), .s_valid(smm_valid), .s_ready(smm_ready),
    .m_flit(o_flit[3]), .m_valid(o_valid[3]), .m_ready(o_ready[3]));

  // Kern_37: Gather of the head outputs into a row for kern_28
  gmi_gather #(.NUM_SRC(HEADS), .CHUNK(1), .MY_KID(8'd37), .DEST(8'd28),
               .SRC(GATHER_SRC)) u_gather (
    .clk, .rst_n, .s_flit(f_flit[5]), .s_valid(f_valid[5]), .s_ready(f_ready[5]),
    .m_flit(o_flit[4]), .m_valid(o_valid[4]), .m_ready(o_ready[4]),
    .rows_out(gather_rows));

  // encoder output (from LayerNorm kern_32) to the next cluster's gateway
  gmi_header_attacher #(.DEST_KID(NEXT_BCAST), .DEST_CLUSTER(NEXT_CLUSTER)) u_attach (
    .clk, .rst_n, .s_flit(ln_flit), .s_valid(ln_valid), .s_ready(ln_ready),
    .m_flit(o_flit[5]), .m_valid(o_valid[5]), .m_ready(o_ready[5]));

  // ---------------- output side ----------------
  flit_t sw_flit; logic sw_valid, sw_ready;
  axis_arbiter #(.N(6)) u_out_sw (
    .clk, .rst_n, .s_flit(o_flit), .s_valid(o_valid), .s_ready(o_ready),
    .m_flit(sw_flit), .m_valid(sw_valid), .m_ready(sw_ready));

  router u_router (
    .clk, .rst_n, .my_ip, .tbl_we, .tbl_sel, .tbl_addr, .tbl_ip,
    .s_flit(sw_flit), .s_valid(sw_valid), .s_ready(sw_ready),
    .m_loc_flit(loc_flit), .m_loc_valid(loc_valid), .m_loc_ready(loc_ready),
    .m_net_flit(net_out_flit), .m_net_ip(net_out_ip), .m_net_valid(net_out_valid),
    .m_net_ready(net_out_ready), .inter_pkts);

  logic unused;
  assign unused = ^{lin_last, smm_last};
endmodule
