// gmi_scatter: GMI Scatter kernel. Cuts every incoming packet into NUM_DEST
// chunks of CHUNK flits and sends chunk i, as a packet of its own, to
// DEST[i].
//
// In the I-BERT encoder a Linear kernel produces one row of Q, K or V per
// packet (768 INT8 = 12 flits of 512 bits); the scatter kernel after it sends
// flit i (the 64 columns of head i) to the attention head i, so 12
// destinations of one flit each. Scatter as a GMI kernel, so the compute
// kernel need not do it, is the paper's; the chunking rule is this design's.
// A packet longer than NUM_DEST*CHUNK flits wraps round to DEST[0]; the chunk
// index restarts at every input TLAST. Timing: one output register, one
// flit per cycle, no buffering.
module gmi_scatter
  import gp_pkg::*;
#(
  parameter int unsigned NUM_DEST = 12,
  parameter int unsigned CHUNK    = 1,
  parameter logic [7:0]  MY_KID   = 8'd0,
  parameter logic [7:0]  DEST [NUM_DEST] = '{default: 8'd0}
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
  localparam int unsigned DW = (NUM_DEST > 1) ? $clog2(NUM_DEST) : 1;
  localparam int unsigned CW = (CHUNK > 1) ? $clog2(CHUNK) : 1;

  logic [DW-1:0] idx;
  logic [CW-1:0] cnt;
  logic          chunk_end;
  assign chunk_end = (cnt == CW'(CHUNK - 1));
  assign s_ready   = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      idx     <= '0;
      cnt     <= '0;
      m_valid <= 1'b0;
      m_flit  <= '0;
    end else if (s_ready) begin
      m_valid <= s_valid;
      if (s_valid) begin
        m_flit <= make_flit(s_flit.tdata, MY_KID, DEST[idx], chunk_end || s_flit.tlast, 1'b0);
        if (s_flit.tlast) begin
          idx <= '0;
          cnt <= '0;
        end else if (chunk_end) begin
          cnt <= '0;
          idx <= (idx == DW'(NUM_DEST - 1)) ? '0 : idx + 1'b1;
        end else begin
          cnt <= cnt + 1'b1;
        end
      end
    end
  end
endmodule
