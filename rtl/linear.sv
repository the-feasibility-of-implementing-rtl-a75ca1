// linear: the Linear module of I-BERT: a Matrix Multiply (tiles of chained
// PEs) followed by Bias Addition, for an H x H weight matrix held on chip.
//
// How it works. An input row of H INT8 values arrives as one packet of
// H/64 flits and is stored. The weight matrix is stored per tile: tile t
// holds the weight columns c with c mod NUM_TILES == t, as 512-bit words
// (64 INT8 weights of one column) at address (c / NUM_TILES) * CH + chunk,
// where CH = H/64. For every group of NUM_TILES output columns the tiles
// run over the CH chunks of the row, one chunk per cycle, each accumulating
// its column's dot product; at the end the bias is added and the NUM_TILES
// INT32 results leave as one beat. So output columns come out in order,
// NUM_TILES per beat, and a row costs H/64 cycles to receive plus
// (H/NUM_TILES)*(H/64) cycles to compute (576 for H=768, NUM_TILES=16),
// plus 2 pipeline cycles. Rows of any sequence length stream through, one
// after another, with no padding: a sequence is just fewer rows.
// From the paper: row-wise streaming, weights in on-chip memory, tiles of
// PEs with the first tile on the first column, Matrix Multiply then Bias
// Addition, INT8 in / INT32 out, H = 768. This design's choices: the number
// of tiles and PEs, the weight/bias write ports (the paper loads them when
// the bitstream is built) and the one-cycle synchronous weight read.
module linear
  import gp_pkg::*;
#(
  parameter int unsigned H         = 768,
  parameter int unsigned NUM_TILES = 16,
  parameter int unsigned PES       = 4,
  parameter int unsigned LANES     = 16     // PES*LANES must be 64
) (
  input  logic                    clk,
  input  logic                    rst_n,
  // weight / bias load
  input  logic                    w_we,
  input  logic [$clog2(NUM_TILES)-1:0] w_tile,
  input  logic [$clog2((H/NUM_TILES)*(H/64))-1:0] w_addr,
  input  logic [DATA_W-1:0]       w_data,
  input  logic                    b_we,
  input  logic [$clog2(H)-1:0]    b_addr,
  input  logic signed [31:0]      b_data,
  // input rows
  input  flit_t                   s_flit,
  input  logic                    s_valid,
  output logic                    s_ready,
  // output: NUM_TILES INT32 per beat, column order
  output logic [NUM_TILES*32-1:0] m_data,
  output logic                    m_valid,
  input  logic                    m_ready,
  output logic                    m_last      // last beat of a row
);
  localparam int unsigned CH    = H / 64;              // chunks (flits) per row
  localparam int unsigned NG    = H / NUM_TILES;       // column groups
  localparam int unsigned DEPTH = NG * CH;
  localparam int unsigned AW    = $clog2(DEPTH);
  localparam int unsigned CW    = (CH > 1) ? $clog2(CH) : 1;
  localparam int unsigned GW    = (NG > 1) ? $clog2(NG) : 1;

  logic [DATA_W-1:0] wmem [NUM_TILES][DEPTH];
  logic signed [31:0] bias [H];
  logic [DATA_W-1:0] rowbuf [CH];

  always_ff @(posedge clk) begin
    if (w_we) wmem[w_tile][w_addr] <= w_data;
    if (b_we) bias[b_addr] <= b_data;
  end

  typedef enum logic [1:0] {RECV, COMP, DRAIN} state_t;
  state_t        state;
  logic [CW-1:0] rcv, ch;
  logic [GW-1:0] grp;
  logic          stall;

  // stage 1: registered weight/row read
  logic [DATA_W-1:0] wq [NUM_TILES];
  logic [DATA_W-1:0] aq;
  logic              v1, first1, last1;
  logic [GW-1:0]     grp1;
  // stage 2: accumulators
  logic signed [31:0] acc [NUM_TILES];
  logic signed [31:0] tsum [NUM_TILES];

  assign s_ready = (state == RECV);
  assign stall   = m_valid && !m_ready;

  for (genvar t = 0; t < NUM_TILES; t++) begin : g_tile
    mm_tile #(.PES(PES), .LANES(LANES)) u_tile (
      .a(aq), .w(wq[t]), .psum_in(first1 ? 32'sd0 : acc[t]), .psum_out(tsum[t]));
    always_ff @(posedge clk)
      if (!stall && state == COMP) wq[t] <= wmem[t][AW'(grp) * AW'(CH) + AW'(ch)];
  end

  always_ff @(posedge clk) begin
    if (s_valid && s_ready) rowbuf[rcv] <= s_flit.tdata;
    if (!stall) aq <= rowbuf[ch];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state   <= RECV;
      rcv     <= '0;
      ch      <= '0;
      grp     <= '0;
      v1      <= 1'b0;
      first1  <= 1'b0;
      last1   <= 1'b0;
      grp1    <= '0;
      m_valid <= 1'b0;
      m_last  <= 1'b0;
      m_data  <= '0;
      for (int unsigned t = 0; t < NUM_TILES; t++) acc[t] <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      unique case (state)
        RECV: if (s_valid) begin
                if (s_flit.tlast || rcv == CW'(CH - 1)) begin
                  rcv   <= '0;
                  state <= COMP;
                end else rcv <= rcv + 1'b1;
              end
        COMP: if (!stall) begin
                if (ch == CW'(CH - 1)) begin
                  ch <= '0;
                  if (grp == GW'(NG - 1)) begin
                    grp   <= '0;
                    state <= DRAIN;
                  end else grp <= grp + 1'b1;
                end else ch <= ch + 1'b1;
              end
        DRAIN: if (!stall && !v1) state <= RECV;
        default: state <= RECV;
      endcase
      if (!stall) begin
        v1     <= (state == COMP);
        first1 <= (state == COMP) && (ch == '0);
        last1  <= (state == COMP) && (ch == CW'(CH - 1));
        grp1   <= grp;
        if (v1) begin
          for (int unsigned t = 0; t < NUM_TILES; t++) acc[t] <= tsum[t];
          if (last1) begin
            for (int unsigned t = 0; t < NUM_TILES; t++)
              m_data[t*32 +: 32] <= tsum[t] + bias[int'(grp1) * NUM_TILES + t];
            m_valid <= 1'b1;
            m_last  <= (grp1 == GW'(NG - 1));
          end
        end
      end
    end
  end

  // a result beat must not be overwritten before it is taken
  a_hold: assert property (@(posedge clk) disable iff (!rst_n)
    (m_valid && !m_ready) |=> m_valid);
endmodule
