// softmax_matmul: Softmax Matrix Multiply module (one attention head):
// O = P * V with P the seq_len x seq_len INT8 softmax output and V the
// seq_len x N INT8 value matrix (N = H/A = 64); O is seq_len x N INT32.
//
// How it works (paper): each of the NUM_PE PEs takes one element of a
// different row of P and the same row of V, and accumulates the whole N-wide
// row of the output: PE p computes O[r0+p][:] += P[r0+p][j] * V[j][:] for
// j = 0 .. seq_len-1, so a group of NUM_PE output rows costs seq_len cycles
// and any sequence length works without padding the V side. The P side is
// padded with zero rows up to NUM_PE*ceil(seq_len/NUM_PE) so every PE has a
// row, and the padding rows are not output.
// Design choices: NUM_PE = 16; V arrives first (seq_len rows of one flit
// each) and is stored, then P rows arrive one packet per row
// (ceil(seq_len/64) flits); each PE does N = 64 multiplies per cycle; the
// sequence length is a runtime input sampled when V starts.
// Output: one beat of N INT32 values per output row (for the Quant module),
// m_last on the last row of the sequence. Timing per group: NUM_PE*ceil(
// seq_len/64) cycles to take the P rows, seq_len+1 cycles to compute, one
// cycle per row to output.
module softmax_matmul
  import gp_pkg::*;
#(
  parameter int unsigned M_MAX  = 128,
  parameter int unsigned NUM_PE = 16,
  parameter int unsigned N      = 64
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [7:0]        seq_len,
  input  flit_t             v_flit,
  input  logic              v_valid,
  output logic              v_ready,
  input  flit_t             p_flit,
  input  logic              p_valid,
  output logic              p_ready,
  output logic [N*32-1:0]   m_data,
  output logic              m_valid,
  input  logic              m_ready,
  output logic              m_last,
  output logic [15:0]       pad_rows
);
  localparam int unsigned MW  = $clog2(M_MAX + 1);
  localparam int unsigned PW  = (NUM_PE > 1) ? $clog2(NUM_PE) : 1;
  localparam int unsigned PFL = (M_MAX + 63) / 64;     // flits per P row (max)
  localparam int unsigned FW  = (PFL > 1) ? $clog2(PFL) : 1;

  logic [N*8-1:0]    vmem [M_MAX];
  logic [PFL*DATA_W-1:0] pbuf [NUM_PE];

  typedef enum logic [2:0] {LOADV, LOADP, COMP, OUT} state_t;
  state_t state;
  localparam int unsigned AW = $clog2(M_MAX);
  logic [MW-1:0] m_len, vcnt, j, row0;
  logic [PW-1:0] prow, orow;
  logic [FW-1:0] pfl;
  logic [N*8-1:0] vrow;
  logic           vrow_ok, first;
  logic signed [31:0] acc [NUM_PE][N];

  assign v_ready = (state == LOADV);
  assign p_ready = (state == LOADP) && (int'(row0) + int'(prow) < int'(m_len));

  always_ff @(posedge clk) begin
    if (v_valid && v_ready) vmem[AW'(vcnt)] <= v_flit.tdata[N*8-1:0];
    vrow <= vmem[AW'(j)];                       // synchronous read of row j
  end

  always_ff @(posedge clk) begin
    if (p_valid && p_ready) pbuf[prow][int'(pfl)*DATA_W +: DATA_W] <= p_flit.tdata;
    else if (state == LOADP && !p_ready) pbuf[prow] <= '0;   // padding row
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= LOADV;
      m_len    <= '0;
      vcnt     <= '0;
      j        <= '0;
      row0     <= '0;
      prow     <= '0;
      orow     <= '0;
      pfl      <= '0;
      vrow_ok  <= 1'b0;
      first    <= 1'b0;
      m_valid  <= 1'b0;
      m_last   <= 1'b0;
      m_data   <= '0;
      pad_rows <= '0;
      for (int unsigned p = 0; p < NUM_PE; p++)
        for (int unsigned n = 0; n < N; n++) acc[p][n] <= '0;
    end else begin
      unique case (state)
        LOADV: begin
          if (vcnt == '0) m_len <= MW'(seq_len);
          if (v_valid) begin
            if (vcnt + 1'b1 == ((vcnt == '0) ? MW'(seq_len) : m_len)) begin
              vcnt  <= '0;
              row0  <= '0;
              state <= LOADP;
            end else vcnt <= vcnt + 1'b1;
          end
        end
        LOADP: begin
          logic row_done;
          row_done = 1'b0;
          if (!p_ready) begin
            row_done = 1'b1;                                  // padding row, 1 cycle
            pad_rows <= pad_rows + 16'd1;
          end else if (p_valid) begin
            if (p_flit.tlast) row_done = 1'b1;
            else pfl <= pfl + 1'b1;
          end
          if (row_done) begin
            pfl <= '0;
            if (prow == PW'(NUM_PE - 1)) begin
              prow  <= '0;
              j     <= '0;
              first <= 1'b1;
              vrow_ok <= 1'b0;
              state <= COMP;
            end else prow <= prow + 1'b1;
          end
        end
        COMP: begin                    // vrow holds V[j-1] when vrow_ok
          vrow_ok <= (j < m_len);
          if (j < m_len) j <= j + 1'b1;
          if (vrow_ok) begin
            for (int unsigned p = 0; p < NUM_PE; p++) begin
              logic signed [31:0] pe_a;
              pe_a = 32'(signed'(pbuf[p][(int'(j) - 1) * 8 +: 8]));
              for (int unsigned n = 0; n < N; n++)
                acc[p][n] <= (first ? 32'sd0 : acc[p][n])
                             + pe_a * 32'(signed'(vrow[n*8 +: 8]));
            end
            first <= 1'b0;
          end
          if (!vrow_ok && j == m_len) begin   // all products accumulated
            orow  <= '0;
            state <= OUT;
          end
        end
        OUT: begin
          if (m_valid && m_ready) m_valid <= 1'b0;
          if (!m_valid || m_ready) begin
            if (int'(row0) + int'(orow) < int'(m_len)) begin
              for (int unsigned n = 0; n < N; n++) m_data[n*32 +: 32] <= acc[orow][n];
              m_valid <= 1'b1;
              m_last  <= (int'(row0) + int'(orow) + 1 == int'(m_len));
            end
            if (orow == PW'(NUM_PE - 1) || int'(row0) + int'(orow) + 1 >= int'(m_len)) begin
              orow <= '0;
              if (int'(row0) + NUM_PE >= int'(m_len)) state <= LOADV;
              else begin
                row0  <= row0 + MW'(NUM_PE);
                state <= LOADP;
              end
            end else orow <= orow + 1'b1;
          end
        end
        default: state <= LOADV;
      endcase
      if (state != OUT && m_valid && m_ready) m_valid <= 1'b0;
    end
  end
endmodule
