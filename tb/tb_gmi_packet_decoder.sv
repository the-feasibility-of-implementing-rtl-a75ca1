// Testbench for gmi_packet_decoder: messages with a GMI header naming a
// virtual kernel (39, 40) must reach ports 1 and 2, any other kernel ID the
// forwarding port 0; the header flit must be removed, TDEST set to the
// header's kernel ID and TUSER bit 16 cleared.
module tb_gmi_packet_decoder;
  import gp_pkg::*;
  localparam int N = 3;
  localparam logic [7:0] VID [N] = '{8'hFF, 8'd39, 8'd40};
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t s_flit; logic s_valid, s_ready;
  flit_t [N-1:0] m_flit; logic [N-1:0] m_valid, m_ready;
  logic [15:0] fwd_pkts;
  int checks = 0, failures = 0;
  typedef struct { int port; int kid; int tag; logic last; } e_t;
  e_t q [$];
  gmi_packet_decoder #(.N(N), .VID(VID)) dut (.*);
  always_ff @(posedge clk) begin
    m_ready <= N'($urandom());
    for (int i = 0; i < N; i++) if (m_valid[i] && m_ready[i]) begin
      checks++;
      if (q.size() == 0 || q[0].port != i || q[0].kid != int'(m_flit[i].tdest) || q[0].tag != int'(m_flit[i].tdata[31:0])
          || q[0].last != m_flit[i].tlast || m_flit[i].tuser[INTER_BIT]) begin
        failures++; $display("port %0d flit %0d kid %0d", i, m_flit[i].tdata[31:0], m_flit[i].tdest);
      end
      if (q.size() != 0) void'(q.pop_front());
    end
  end
  task automatic put(flit_t f);
    s_flit = f; s_valid = 1;
    #1; while (!s_ready) begin @(negedge clk); #1; end
    @(negedge clk); s_valid = 0;
  endtask
  int nfwd = 0;
  initial begin
    s_valid = 0; s_flit = '0; m_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int p = 0; p < 60; p++) begin
      int kid, len, port; e_t e;
      kid = ($urandom_range(0, 2) == 0) ? 39 : ($urandom_range(0, 1) ? 40 : $urandom_range(1, 30));
      port = kid == 39 ? 1 : kid == 40 ? 2 : 0;
      if (port == 0) nfwd++;
      len = $urandom_range(1, 4);
      put(make_flit(DATA_W'(kid), 8'd9, 8'd0, 1'b0, 1'b1));
      for (int f = 0; f < len; f++) begin
        e.port = port; e.kid = kid; e.tag = p * 10 + f; e.last = (f == len - 1);
        q.push_back(e);
        put(make_flit(DATA_W'(e.tag), 8'd9, 8'd0, e.last, 1'b1));
      end
    end
    repeat (20) @(negedge clk);
    checks++; if (q.size() != 0) begin failures++; $display("missing %0d", q.size()); end
    checks++; if (int'(fwd_pkts) != nfwd) begin failures++; $display("fwd count"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
