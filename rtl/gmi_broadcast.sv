// gmi_broadcast: GMI Broadcast kernel. Sends one copy of every incoming
// packet to each of NUM_DEST destination kernels.
//
// Broadcast is one of the four GMI collectives (with Reduce, Scatter,
// Gather). In the I-BERT encoder, the gateway broadcasts each input row to
// the three Linear kernels (Q, K, V) and to the residual LayerNorm, and a
// stand-alone broadcast kernel feeds the feed-forward block.
// How it works (this design's choice, the paper gives only the function):
// the packet is stored in a buffer of MAX_FLITS flits, then replayed
// NUM_DEST times, copy i with TDEST = DEST[i] and TID = MY_KID. A packet
// longer than MAX_FLITS is truncated to MAX_FLITS flits (flagged on
// overflow). Timing: a packet of F flits takes F cycles in and F*NUM_DEST
// cycles out; input is stalled while copies are sent.
module gmi_broadcast
  import gp_pkg::*;
#(
  parameter int unsigned NUM_DEST  = 4,
  parameter int unsigned MAX_FLITS = 16,
  parameter logic [7:0]  MY_KID    = 8'd0,
  parameter logic [7:0]  DEST [NUM_DEST] = '{default: 8'd0}
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t s_flit,
  input  logic  s_valid,
  output logic  s_ready,
  output flit_t m_flit,
  output logic  m_valid,
  input  logic  m_ready,
  output logic  overflow
);
  localparam int unsigned FW = $clog2(MAX_FLITS + 1);
  localparam int unsigned DW = (NUM_DEST > 1) ? $clog2(NUM_DEST) : 1;

  logic [DATA_W-1:0] buf_q [MAX_FLITS];
  logic [FW-1:0]     n_flits, rd;
  logic [DW-1:0]     copy;
  logic              sending;

  assign s_ready = !sending;

  always_ff @(posedge clk) begin
    if (s_valid && s_ready && n_flits < FW'(MAX_FLITS))
      buf_q[n_flits[$clog2(MAX_FLITS)-1:0]] <= s_flit.tdata;
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      n_flits  <= '0;
      rd       <= '0;
      copy     <= '0;
      sending  <= 1'b0;
      overflow <= 1'b0;
    end else if (!sending) begin
      if (s_valid) begin
        if (n_flits < FW'(MAX_FLITS)) n_flits <= n_flits + 1'b1;
        else                          overflow <= 1'b1;
        if (s_flit.tlast) sending <= 1'b1;
      end
    end else if (m_ready) begin
      if (rd == n_flits - 1'b1) begin
        rd <= '0;
        if (copy == DW'(NUM_DEST - 1)) begin
          copy    <= '0;
          sending <= 1'b0;
          n_flits <= '0;
        end else begin
          copy <= copy + 1'b1;
        end
      end else begin
        rd <= rd + 1'b1;
      end
    end
  end

  always_comb begin
    m_valid = sending;
    m_flit  = make_flit(buf_q[rd[$clog2(MAX_FLITS)-1:0]], MY_KID, DEST[copy],
                        rd == n_flits - 1'b1, 1'b0);
  end
endmodule
