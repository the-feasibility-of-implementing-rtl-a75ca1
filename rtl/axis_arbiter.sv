// axis_arbiter: N-to-1 packet switch (the Output Switch of a Galapagos
// application region, and the Switch inside the Gateway kernel).
//
// Each input carries whole packets (a run of flits ending with TLAST). The
// arbiter grants one input at a time and keeps the grant until the granted
// packet's TLAST flit has been accepted, so packets are never interleaved.
// The paper names the switches but not their arbitration; round-robin
// fairness and the two-entry output buffer are this design's choices. The
// buffer makes s_ready depend only on registers, which breaks the ready
// loop that would otherwise run through router, loopback and input switch.
// Interface: valid/ready per flit on every side. Timing: a flit accepted in
// cycle t appears on the output in cycle t+1; full throughput inside a packet.
module axis_arbiter
  import gp_pkg::*;
#(
  parameter int unsigned N = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  flit_t [N-1:0] s_flit,
  input  logic  [N-1:0] s_valid,
  output logic  [N-1:0] s_ready,
  output flit_t         m_flit,
  output logic          m_valid,
  input  logic          m_ready
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] grant, last_grant;
  logic          locked;           // a packet is in flight from input `grant`
  logic [IW-1:0] pick;
  logic          pick_ok;
  logic          out_free;
  flit_t         fifo [2];
  logic          wp, rp;
  logic [1:0]    cnt;

  // round-robin search starting after the last granted input
  always_comb begin
    pick    = '0;
    pick_ok = 1'b0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last_grant) + k) % N;
      if (!pick_ok && s_valid[idx]) begin
        pick    = IW'(idx);
        pick_ok = 1'b1;
      end
    end
  end

  logic [IW-1:0] sel;
  logic          sel_ok;
  assign sel    = locked ? grant : pick;
  assign sel_ok = locked ? s_valid[grant] : pick_ok;
  assign out_free = (cnt != 2'd2);
  assign m_valid  = (cnt != 2'd0);
  assign m_flit   = fifo[rp];

  always_comb begin
    s_ready = '0;
    if (sel_ok && out_free) s_ready[sel] = 1'b1;
  end

  always_ff @(posedge clk) begin
    if (sel_ok && out_free) fifo[wp] <= s_flit[sel];
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      cnt        <= '0;
      wp         <= 1'b0;
      rp         <= 1'b0;
      locked     <= 1'b0;
      grant      <= '0;
      last_grant <= IW'(N - 1);
    end else begin
      logic push, pop;
      push = sel_ok && out_free;
      pop  = m_valid && m_ready;
      if (push) wp <= !wp;
      if (pop)  rp <= !rp;
      cnt <= cnt + {1'b0, push} - {1'b0, pop};
      if (push) begin
        grant <= sel;
        if (s_flit[sel].tlast) begin
          locked     <= 1'b0;
          last_grant <= sel;
        end else begin
          locked <= 1'b1;
        end
      end
    end
  end

  // a granted packet may not be abandoned: while locked, only `grant` is served
  a_no_interleave: assert property (@(posedge clk) disable iff (!rst_n)
    locked |-> ((s_ready & ~(N'(1) << grant)) == '0));
endmodule
