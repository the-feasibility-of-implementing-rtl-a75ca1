// attention_dot_product: Attention Dot-Product module (one attention head):
// S = Q * K^T for Q and K of seq_len x 64 INT8, S of seq_len x seq_len INT32.
//
// How it works (paper): the columns of K^T, i.e. the rows of K, are scattered
// over NUM_PE PEs, PE p holding K rows p, p+NUM_PE, p+2*NUM_PE, ... in its
// own bank; each row of Q is broadcast to all PEs and every PE forms the dot
// product of that row with one of its K rows. So that every PE has a column,
// the K side is padded with zero rows up to NUM_PE*ceil(seq_len/NUM_PE),
// one padding row per clock cycle, after K has arrived; the padding results
// are removed again so an output row has exactly seq_len values.
// Design choices: a PE does all 64 multiplies of a dot product in one cycle
// (K = H/A = 64 is one flit); NUM_PE = 16, so a group of results is one
// 512-bit flit of 16 INT32; the sequence length is a runtime input sampled
// when a K matrix starts; K must be complete before Q rows are taken.
// Interface: K rows and Q rows arrive one flit each on two streams; an output
// row is a packet of ceil(seq_len/NUM_PE) flits of NUM_PE INT32 (unused lanes
// of the last flit zero). Timing: per Q row, ceil(seq_len/NUM_PE) cycles plus
// one read-latency cycle; padding costs Mpad - seq_len cycles per sequence.
module attention_dot_product
  import gp_pkg::*;
#(
  parameter int unsigned M_MAX  = 128,
  parameter int unsigned NUM_PE = 16       // NUM_PE*32 <= 512
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic [7:0]  seq_len,          // 1 .. M_MAX
  input  kid_t        my_kid,
  input  kid_t        dest,
  input  flit_t       k_flit,
  input  logic        k_valid,
  output logic        k_ready,
  input  flit_t       q_flit,
  input  logic        q_valid,
  output logic        q_ready,
  output flit_t       m_flit,
  output logic        m_valid,
  input  logic        m_ready,
  output logic [15:0] pad_cycles        // padding rows inserted so far
);
  localparam int unsigned BD = M_MAX / NUM_PE;        // bank depth
  localparam int unsigned BW = (BD > 1) ? $clog2(BD) : 1;
  localparam int unsigned MW = $clog2(M_MAX + 1);

  logic [DATA_W-1:0] bank [NUM_PE][BD];

  typedef enum logic [2:0] {LOADK, PAD, WAITQ, COMP, OUT} state_t;
  state_t state;
  logic [MW-1:0] m_len, kcnt, mpad, qcnt;
  logic [BW-1:0] grp, ngrp_m1;
  logic [DATA_W-1:0] qrow;

  logic [DATA_W-1:0] rd [NUM_PE];
  logic signed [31:0] dp [NUM_PE];

  assign k_ready = (state == LOADK);
  assign q_ready = (state == WAITQ);

  // K rows (and padding rows) into the banks
  always_ff @(posedge clk) begin
    if (state == LOADK && k_valid)
      bank[int'(kcnt) % NUM_PE][BW'(int'(kcnt) / NUM_PE)] <= k_flit.tdata;
    else if (state == PAD)
      bank[int'(kcnt) % NUM_PE][BW'(int'(kcnt) / NUM_PE)] <= '0;
  end

  // one synchronous read per bank, addressed with the group needed next cycle
  logic [BW-1:0] rd_addr;
  always_comb begin
    rd_addr = grp;
    if (state == COMP && (!m_valid || m_ready) && grp != ngrp_m1) rd_addr = grp + 1'b1;
  end
  always_ff @(posedge clk)
    for (int unsigned p = 0; p < NUM_PE; p++) rd[p] <= bank[p][rd_addr];

  always_comb
    for (int unsigned p = 0; p < NUM_PE; p++) begin
      dp[p] = '0;
      for (int unsigned i = 0; i < 64; i++)
        dp[p] += 32'(signed'(qrow[i*8 +: 8])) * 32'(signed'(rd[p][i*8 +: 8]));
    end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= LOADK;
      m_len      <= '0;
      kcnt       <= '0;
      mpad       <= '0;
      qcnt       <= '0;
      grp        <= '0;
      ngrp_m1    <= '0;
      qrow       <= '0;
      m_valid    <= 1'b0;
      m_flit     <= '0;
      pad_cycles <= '0;
    end else begin
      unique case (state)
        LOADK: begin
          if (kcnt == '0) begin
            m_len   <= MW'(seq_len);
            mpad    <= MW'((int'(seq_len) + NUM_PE - 1) / NUM_PE * NUM_PE);
            ngrp_m1 <= BW'((int'(seq_len) + NUM_PE - 1) / NUM_PE - 1);
          end
          if (k_valid) begin
            kcnt <= kcnt + 1'b1;
            if (kcnt + 1'b1 == ((kcnt == '0) ? MW'(seq_len) : m_len))
              state <= (kcnt + 1'b1 == ((kcnt == '0)
                        ? MW'((int'(seq_len) + NUM_PE - 1) / NUM_PE * NUM_PE) : mpad))
                       ? WAITQ : PAD;
          end
        end
        PAD: begin
          pad_cycles <= pad_cycles + 16'd1;
          kcnt       <= kcnt + 1'b1;
          if (kcnt + 1'b1 == mpad) state <= WAITQ;
        end
        WAITQ: begin
          grp <= '0;
          if (q_valid) begin
            qrow  <= q_flit.tdata;
            state <= COMP;            // bank read for group 0 issued this cycle
          end
        end
        COMP: begin                   // rd holds group `grp`
          if (!m_valid || m_ready) begin
            logic [DATA_W-1:0] d;
            d = '0;
            for (int unsigned p = 0; p < NUM_PE; p++)
              if (int'(grp) * NUM_PE + p < int'(m_len)) d[p*32 +: 32] = dp[p];
            m_flit  <= make_flit(d, my_kid, dest, grp == ngrp_m1, 1'b0);
            m_valid <= 1'b1;
            if (grp == ngrp_m1) state <= OUT;
            else begin
              grp   <= grp + 1'b1;
              state <= COMP;
            end
          end
        end
        OUT: if (m_ready) begin       // last flit of the row is being taken
          m_valid <= 1'b0;
          grp     <= '0;
          if (qcnt + 1'b1 == m_len) begin
            qcnt  <= '0;
            kcnt  <= '0;
            state <= LOADK;
          end else begin
            qcnt  <= qcnt + 1'b1;
            state <= WAITQ;
          end
        end
        default: state <= LOADK;
      endcase
    end
  end
endmodule
