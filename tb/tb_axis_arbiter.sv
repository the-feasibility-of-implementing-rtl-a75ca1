// Testbench for axis_arbiter: three sources send packets of random length
// (TID = source number, TDATA = running sequence) into a sink with random
// back-pressure. Checks every flit: it must come from the source whose packet
// is in flight (no interleaving) and carry that source's next value.
module tb_axis_arbiter;
  import gp_pkg::*;
  localparam int N = 3;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t [N-1:0] s_flit; logic [N-1:0] s_valid, s_ready;
  flit_t m_flit; logic m_valid, m_ready;
  int checks = 0, failures = 0;

  axis_arbiter #(.N(N)) dut (.*);

  int seq_tx [N], seq_rx [N], left [N];
  int cur = -1, pkts = 0;

  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) begin
      if (rst_n && s_valid[i] && s_ready[i]) begin
        seq_tx[i]++;
        left[i]--;
      end
    end
  end
  always_comb
    for (int i = 0; i < N; i++) begin
      s_valid[i] = rst_n && left[i] > 0;
      s_flit[i]  = make_flit(DATA_W'(seq_tx[i]), 8'(i), 8'(i), left[i] == 1, 1'b0);
    end
  always_ff @(posedge clk) begin
    for (int i = 0; i < N; i++) if (left[i] == 0 && $urandom_range(0, 3) == 0) left[i] <= $urandom_range(1, 5);
    m_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && m_valid && m_ready) begin
      int s; s = int'(m_flit.tid);
      checks++;
      if (cur != -1 && s != cur) begin failures++; $display("interleave: got %0d in %0d", s, cur); end
      if (m_flit.tdata != DATA_W'(seq_rx[s])) begin failures++; $display("data src %0d", s); end
      seq_rx[s]++;
      cur = m_flit.tlast ? -1 : s;
      if (m_flit.tlast) pkts++;
    end
  end
  initial begin
    for (int i = 0; i < N; i++) begin seq_tx[i] = 0; seq_rx[i] = 0; left[i] = 0; end
    m_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (3000) @(posedge clk);
    checks++; if (pkts < 50) begin failures++; $display("too few packets %0d", pkts); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
