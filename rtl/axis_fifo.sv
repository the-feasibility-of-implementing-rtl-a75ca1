// axis_fifo: the AXI-Stream FIFO placed in front of each kernel input.
//
// The paper attaches a FIFO to every kernel and sizes it to hold at least one
// whole matrix, so that a kernel that is not yet ready (for example a gather
// still waiting for other sources, or a dot-product still loading K) never
// blocks the shared input switch. For a 128 x 768 INT8 matrix that is 1536
// flits of 512 bits, the default DEPTH here (the paper quotes about 43
// 18-Kb BRAMs for it). Structure: a synchronous single-clock circular buffer
// with registered read data (block-RAM style) and a one-entry output stage,
// written as an array. Timing: a flit written in cycle t can be read in
// cycle t+2; full throughput; s_ready is low only when full.
module axis_fifo
  import gp_pkg::*;
#(
  parameter int unsigned DEPTH = 1536
) (
  input  logic  clk,
  input  logic  rst_n,
  input  flit_t s_flit,
  input  logic  s_valid,
  output logic  s_ready,
  output flit_t m_flit,
  output logic  m_valid,
  input  logic  m_ready,
  output logic [$clog2(DEPTH+1)-1:0] level
);
  localparam int unsigned AW = $clog2(DEPTH);
  flit_t         mem [DEPTH];
  logic [AW-1:0] wp, rp;
  logic [$clog2(DEPTH+1)-1:0] cnt;      // flits in mem
  logic          push, pop;

  assign s_ready = (cnt != ($clog2(DEPTH+1))'(DEPTH));
  assign push    = s_valid && s_ready;
  assign pop     = (cnt != '0) && (!m_valid || m_ready);   // refill the output stage
  assign level   = cnt + {{($clog2(DEPTH+1)-1){1'b0}}, m_valid};

  always_ff @(posedge clk) begin
    if (push) mem[wp] <= s_flit;
    if (pop)  m_flit  <= mem[rp];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      wp <= '0; rp <= '0; cnt <= '0; m_valid <= 1'b0;
    end else begin
      if (push) wp <= (wp == AW'(DEPTH - 1)) ? '0 : wp + 1'b1;
      if (pop)  rp <= (rp == AW'(DEPTH - 1)) ? '0 : rp + 1'b1;
      cnt <= cnt + push - pop;
      if (pop) m_valid <= 1'b1;
      else if (m_ready) m_valid <= 1'b0;
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) push |-> int'(cnt) < DEPTH);
endmodule
