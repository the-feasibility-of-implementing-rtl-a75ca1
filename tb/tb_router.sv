// Testbench for router: fills both routing tables, then sends packets with
// TUSER bit 16 clear (looked up by kernel ID in the intra table) and set
// (looked up by cluster ID in the gateway table). Packets whose IP is this
// FPGA's must come out of the loopback port, the others out of the network
// port with the right IP. Both outputs apply random back-pressure.
module tb_router;
  import gp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  ip_t my_ip; logic tbl_we, tbl_sel; kid_t tbl_addr; ip_t tbl_ip;
  flit_t s_flit; logic s_valid, s_ready;
  flit_t m_loc_flit; logic m_loc_valid, m_loc_ready;
  flit_t m_net_flit; ip_t m_net_ip; logic m_net_valid, m_net_ready;
  logic [15:0] inter_pkts;
  int checks = 0, failures = 0;
  router dut (.*);

  function automatic ip_t intra_ip(int k); return 32'h0A000000 + 32'(k % 5); endfunction
  function automatic ip_t inter_ip(int c); return 32'hC0A80000 + 32'(c * 7); endfunction

  typedef struct { int tag; ip_t ip; logic loc; } exp_t;
  exp_t q [$];
  int n_inter = 0;
  always_ff @(posedge clk) begin
    m_loc_ready <= $urandom_range(0, 1);
    m_net_ready <= $urandom_range(0, 1);
    if (rst_n && ((m_loc_valid && m_loc_ready) || (m_net_valid && m_net_ready))) begin
      flit_t f; logic loc; exp_t e;
      loc = m_loc_valid && m_loc_ready;
      f = loc ? m_loc_flit : m_net_flit;
      checks++;
      e = q[0];
      if (e.tag != int'(f.tdata[31:0]) || e.loc != loc || (!loc && m_net_ip != e.ip)) begin
        failures++; $display("tag %0d/%0d loc %0d/%0d ip %h/%h", f.tdata[31:0], e.tag, loc, e.loc, m_net_ip, e.ip);
      end
      void'(q.pop_front());
    end
  end
  initial begin
    my_ip = 32'h0A000002; tbl_we = 0; tbl_sel = 0; tbl_addr = 0; tbl_ip = 0; s_valid = 0; s_flit = '0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int i = 0; i < 256; i++) begin
      tbl_we = 1; tbl_sel = 0; tbl_addr = 8'(i); tbl_ip = intra_ip(i); @(negedge clk);
      tbl_sel = 1; tbl_ip = inter_ip(i); @(negedge clk);
    end
    tbl_we = 0;
    for (int t = 0; t < 200; t++) begin
      int d, len; logic inter; exp_t e;
      d = $urandom_range(0, 255); inter = $urandom_range(0, 1); len = $urandom_range(1, 3);
      for (int f = 0; f < len; f++) begin
        e.tag = t * 10 + f; e.ip = inter ? inter_ip(d) : intra_ip(d); e.loc = (e.ip == my_ip);
        q.push_back(e);
        s_flit = make_flit(DATA_W'(e.tag), 8'd3, 8'(d), f == len - 1, inter);
        s_valid = 1;
        #1; while (!s_ready) begin @(negedge clk); #1; end
        @(negedge clk);
      end
      if (inter) n_inter++;
      s_valid = 0;
    end
    repeat (20) @(posedge clk);
    checks++; if (q.size() != 0) begin failures++; $display("missing %0d", q.size()); end
    checks++; if (int'(inter_pkts) != n_inter) begin failures++; $display("inter count %0d/%0d", inter_pkts, n_inter); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (50000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
