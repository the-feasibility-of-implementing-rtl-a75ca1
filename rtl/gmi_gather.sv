// gmi_gather: GMI Gather kernel. Collects one chunk of CHUNK flits from each
// of NUM_SRC source kernels and sends them, concatenated in source order, as
// one packet to DEST.
//
// In the I-BERT encoder the 12 attention heads each produce one 64-column
// slice (one flit) of an output row; the gather kernel joins the 12 slices
// into the 768-column row for the next Linear layer. Gather as a GMI kernel
// is the paper's; how it works is this design's choice: the source is known
// from TID and its rank is its position in SRC[]. Each rank has a queue of
// ROWS chunks (ROWS = 128 holds one whole matrix, like the paper's kernel
// FIFOs), so a fast head can run ahead of a slow one without blocking the
// shared input; row r is sent when every rank holds its chunk r. A source
// whose queue is full is stalled; a packet from a TID not in SRC[] is
// dropped. Timing: NUM_SRC*CHUNK cycles to send a row, one flit per cycle;
// input is taken during sending too.
module gmi_gather
  import gp_pkg::*;
#(
  parameter int unsigned NUM_SRC = 12,
  parameter int unsigned CHUNK   = 1,
  parameter int unsigned ROWS    = 128,
  parameter logic [7:0]  MY_KID  = 8'd0,
  parameter logic [7:0]  DEST    = 8'd0,
  parameter logic [7:0]  SRC [NUM_SRC] = '{default: 8'd0}
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t s_flit,
  input  logic  s_valid,
  output logic  s_ready,
  output flit_t m_flit,
  output logic  m_valid,
  input  logic  m_ready,
  output logic [15:0] rows_out
);
  localparam int unsigned SW = (NUM_SRC > 1) ? $clog2(NUM_SRC) : 1;
  localparam int unsigned CW = (CHUNK > 1) ? $clog2(CHUNK) : 1;
  localparam int unsigned RW = (ROWS > 1) ? $clog2(ROWS) : 1;
  localparam int unsigned TOT = NUM_SRC * CHUNK;
  localparam int unsigned TW = (TOT > 1) ? $clog2(TOT) : 1;
  localparam int unsigned MEM = NUM_SRC * ROWS * CHUNK;
  localparam int unsigned MW = $clog2(MEM);

  logic [DATA_W-1:0] slot [MEM];
  logic [RW:0]        cnt  [NUM_SRC];     // complete chunks queued per rank
  logic [RW-1:0]      wrow [NUM_SRC];     // row being written per rank
  logic [CW-1:0]      wcnt [NUM_SRC];
  logic [RW-1:0]      rrow;               // row being sent
  logic               sending;
  logic [TW-1:0]      rd;
  logic               all_have, row_done;

  logic [SW-1:0] rank;
  logic          known;
  always_comb begin
    rank  = '0;
    known = 1'b0;
    for (int unsigned i = 0; i < NUM_SRC; i++)
      if (SRC[i] == s_flit.tid) begin
        rank  = SW'(i);
        known = 1'b1;
      end
    all_have = 1'b1;
    for (int unsigned i = 0; i < NUM_SRC; i++)
      if (cnt[i] == '0) all_have = 1'b0;
  end

  function automatic logic [MW-1:0] addr(int unsigned r, int unsigned row, int unsigned c);
    return MW'((r * ROWS + row) * CHUNK + c);
  endfunction

  assign s_ready  = !(known && cnt[rank] == (RW+1)'(ROWS));
  assign row_done = sending && m_ready && rd == TW'(TOT - 1);

  logic [DATA_W-1:0] rdata;
  always_ff @(posedge clk) begin
    if (s_valid && s_ready && known)
      slot[addr(int'(rank), int'(wrow[rank]), int'(wcnt[rank]))] <= s_flit.tdata;
  end
  always_comb rdata = slot[addr(int'(rd) / CHUNK, int'(rrow), int'(rd) % CHUNK)];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sending  <= 1'b0;
      rd       <= '0;
      rrow     <= '0;
      rows_out <= '0;
      for (int unsigned i = 0; i < NUM_SRC; i++) begin
        wcnt[i] <= '0; wrow[i] <= '0; cnt[i] <= '0;
      end
    end else begin
      for (int unsigned i = 0; i < NUM_SRC; i++) begin
        automatic logic inc = s_valid && s_ready && known && rank == SW'(i) &&
                              (s_flit.tlast || wcnt[i] == CW'(CHUNK - 1));
        cnt[i] <= cnt[i] + (RW+1)'(inc) - (RW+1)'(row_done);
      end
      if (s_valid && s_ready && known) begin
        if (s_flit.tlast || wcnt[rank] == CW'(CHUNK - 1)) begin
          wcnt[rank] <= '0;
          wrow[rank] <= (wrow[rank] == RW'(ROWS - 1)) ? '0 : wrow[rank] + 1'b1;
        end else begin
          wcnt[rank] <= wcnt[rank] + 1'b1;
        end
      end
      if (!sending && all_have) sending <= 1'b1;
      if (sending && m_ready) begin
        if (rd == TW'(TOT - 1)) begin
          rd       <= '0;
          sending  <= 1'b0;
          rrow     <= (rrow == RW'(ROWS - 1)) ? '0 : rrow + 1'b1;
          rows_out <= rows_out + 16'd1;
        end else begin
          rd <= rd + 1'b1;
        end
      end
    end
  end

  assign m_valid = sending;
  assign m_flit  = make_flit(rdata, MY_KID, DEST, rd == TW'(TOT - 1), 1'b0);

  a_no_overrun: assert property (@(posedge clk) disable iff (!rst_n)
    sending |-> all_have);
endmodule
