// quant: Quant module (INT32 -> INT8 requantisation) with output packing.
//
// I-BERT matrix multiplies produce INT32; the Quant module turns them back
// into INT8 for the next layer (paper). The arithmetic is not given in the
// paper beyond that; this design uses the dyadic requantisation of integer-
// only BERT: y = saturate_int8( (x * mult + 2^(shift-1)) >>> shift ), with a
// runtime multiplier `mult` (unsigned 31 bit) and right shift `shift`
// (1..62). Input: beats of QL INT32 values (valid/ready). Output: 512-bit
// flits of 64 INT8 values; ROW values form one output packet (TLAST on its
// last flit, unused lanes of that flit zero). 64 must be a multiple of QL and
// ROW a multiple of QL. Timing: one register stage; a flit leaves one cycle
// after its last beat is accepted.
module quant
  import gp_pkg::*;
#(
  parameter int unsigned QL  = 16,    // INT32 lanes per input beat
  parameter int unsigned ROW = 768    // INT8 values per output packet
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic [30:0]        mult,
  input  logic [5:0]         shift,
  input  kid_t               my_kid,
  input  kid_t               dest,
  input  logic [QL*32-1:0]   s_data,
  input  logic               s_valid,
  output logic               s_ready,
  output flit_t              m_flit,
  output logic               m_valid,
  input  logic               m_ready
);
  localparam int unsigned BPF = 64 / QL;                  // beats per flit
  localparam int unsigned BW  = (BPF > 1) ? $clog2(BPF) : 1;
  localparam int unsigned RB  = ROW / QL;                 // beats per row
  localparam int unsigned RW  = $clog2(RB + 1);

  function automatic logic [7:0] rq(logic signed [31:0] x, logic [30:0] m, logic [5:0] s);
    logic signed [63:0] p;
    p = 64'(x) * 64'(signed'({1'b0, m}));
    p = (p + (64'sd1 <<< (s - 6'd1))) >>> s;
    if (p > 64'sd127)       return 8'h7F;
    else if (p < -64'sd128) return 8'h80;
    else                    return p[7:0];
  endfunction

  logic [DATA_W-1:0] acc;
  logic [BW-1:0]     bcnt;
  logic [RW-1:0]     rcnt;
  logic              row_end, flit_end;

  assign row_end  = (rcnt == RW'(RB - 1));
  assign flit_end = (bcnt == BW'(BPF - 1)) || row_end;
  assign s_ready  = !m_valid || m_ready;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      acc     <= '0;
      bcnt    <= '0;
      rcnt    <= '0;
      m_valid <= 1'b0;
      m_flit  <= '0;
    end else begin
      if (m_valid && m_ready) m_valid <= 1'b0;
      if (s_valid && s_ready) begin
        logic [DATA_W-1:0] nxt;
        nxt = acc;
        for (int unsigned i = 0; i < QL; i++)
          nxt[(int'(bcnt) * QL + i) * 8 +: 8] = rq(s_data[i*32 +: 32], mult, shift);
        if (flit_end) begin
          m_flit  <= make_flit(nxt, my_kid, dest, row_end, 1'b0);
          m_valid <= 1'b1;
          acc     <= '0;
          bcnt    <= '0;
        end else begin
          acc  <= nxt;
          bcnt <= bcnt + 1'b1;
        end
        rcnt <= row_end ? '0 : rcnt + 1'b1;
      end
    end
  end
endmodule
