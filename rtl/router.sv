// router: the modified Galapagos Router (Middleware/Network layer) with the
// two routing tables that make clusters of clusters possible.
//
// Table 0 (intra) holds the IP address of the FPGA hosting every kernel of
// this cluster, indexed by kernel ID. Table 1 (inter) holds the IP address of
// the FPGA hosting the Gateway kernel of every other cluster, indexed by
// cluster ID. TUSER bit 16 of a packet selects the table: 0 -> look TDEST up
// in table 0, 1 -> look TDEST (then a cluster ID) up in table 1. That bit and
// the two tables follow the paper; both tables have 256 entries of 32 bits.
// If the IP found is this FPGA's own address (my_ip) the packet is sent back
// to the local input switch, otherwise it goes to the network side together
// with the destination IP (m_net_ip) for the network bridge / UDP core.
// The tables are written through a simple write port (tbl_we, tbl_sel,
// tbl_addr, tbl_ip); the paper loads them at build time, the port is this
// design's choice. The lookup is a synchronous (BRAM-style) read: the first
// flit of a packet waits one cycle for its lookup, the rest of the packet
// streams through at one flit per cycle with no added latency.
module router
  import gp_pkg::*;
(
  input  logic  clk,
  input  logic  rst_n,
  input  ip_t   my_ip,
  // table write port
  input  logic  tbl_we,
  input  logic  tbl_sel,       // 0: intra-cluster table, 1: gateway table
  input  kid_t  tbl_addr,
  input  ip_t   tbl_ip,
  // from the output switch
  input  flit_t s_flit,
  input  logic  s_valid,
  output logic  s_ready,
  // to the local input switch
  output flit_t m_loc_flit,
  output logic  m_loc_valid,
  input  logic  m_loc_ready,
  // to the network bridge
  output flit_t m_net_flit,
  output ip_t   m_net_ip,
  output logic  m_net_valid,
  input  logic  m_net_ready,
  // statistics
  output logic [15:0] inter_pkts
);
  ip_t intra_tbl [MAX_KERNELS];
  ip_t inter_tbl [MAX_CLUSTERS];

  always_ff @(posedge clk) begin
    if (tbl_we) begin
      if (tbl_sel) inter_tbl[tbl_addr] <= tbl_ip;
      else         intra_tbl[tbl_addr] <= tbl_ip;
    end
  end

  typedef enum logic [1:0] {IDLE, LOOKUP, PASS} state_t;
  state_t state;
  ip_t    rd_intra, rd_inter, dst_ip;
  logic   use_inter, to_local;

  // synchronous table read, issued while IDLE with a packet waiting
  always_ff @(posedge clk) begin
    rd_intra <= intra_tbl[s_flit.tdest];
    rd_inter <= inter_tbl[s_flit.tdest];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= IDLE;
      use_inter  <= 1'b0;
      dst_ip     <= '0;
      to_local   <= 1'b0;
      inter_pkts <= '0;
    end else begin
      unique case (state)
        IDLE:   if (s_valid) begin
                  use_inter <= s_flit.tuser[INTER_BIT];
                  state     <= LOOKUP;
                end
        LOOKUP: begin
                  dst_ip   <= use_inter ? rd_inter : rd_intra;
                  to_local <= (use_inter ? rd_inter : rd_intra) == my_ip;
                  if (use_inter) inter_pkts <= inter_pkts + 16'd1;
                  state    <= PASS;
                end
        PASS:   if (s_valid && s_ready && s_flit.tlast) state <= IDLE;
        default: state <= IDLE;
      endcase
    end
  end

  always_comb begin
    m_loc_flit  = s_flit;
    m_net_flit  = s_flit;
    m_net_ip    = dst_ip;
    m_loc_valid = (state == PASS) && s_valid &&  to_local;
    m_net_valid = (state == PASS) && s_valid && !to_local;
    s_ready     = (state == PASS) && (to_local ? m_loc_ready : m_net_ready);
  end
endmodule
