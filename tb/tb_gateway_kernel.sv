// Testbench for gateway_kernel: inter-cluster messages carrying a GMI header
// are sent in. Header 39 (broadcast) must produce copies for kernels 1, 2, 3
// and 29; header 40 (gather) chunks from sources 0 and 1 must come out as one
// packet to kernel 1; any other header must be forwarded to that kernel.
module tb_gateway_kernel;
  import gp_pkg::*;
  logic [15:0] fwd_pkts, gather_rows; logic bcast_overflow;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t s_flit; logic s_valid, s_ready;
  flit_t m_flit; logic m_valid, m_ready;
  int checks = 0, failures = 0;
  flit_t got [$];
  always_ff @(posedge clk) begin
    m_ready <= ($urandom_range(0, 3) != 0);
    if (rst_n && m_valid && m_ready) got.push_back(m_flit);
  end
  task automatic put(flit_t f);
    s_flit = f; s_valid = 1;
    #1; while (!s_ready) begin @(negedge clk); #1; end
    @(negedge clk); s_valid = 0;
  endtask
  task automatic check(logic ok, string what);
    checks++; if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask
  task automatic start();
    s_valid = 0; s_flit = '0; m_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
  endtask
  task automatic finish();
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  endtask
  initial begin repeat (200000) @(posedge clk); failures++; finish(); end
  gateway_kernel dut (.*);
  task automatic msg(int kid, int tid, int len, int tag);
    put(make_flit(DATA_W'(kid), 8'(tid), 8'd0, 1'b0, 1'b1));
    for (int f = 0; f < len; f++) put(make_flit(DATA_W'(tag + f), 8'(tid), 8'd0, f == len - 1, 1'b1));
  endtask
  initial begin
    start();
    msg(39, 60, 12, 1000);               // one 768-byte row broadcast
    repeat (200) @(negedge clk);
    check(got.size() == 48, $sformatf("bcast size %0d", got.size()));
    for (int i = 0; i < got.size() && got.size() == 48; i++) begin
      logic [7:0] d [4]; d = '{8'd1, 8'd2, 8'd3, 8'd29};
      check(got[i].tdata == DATA_W'(1000 + i % 12) && got[i].tdest == d[i / 12] && !got[i].tuser[INTER_BIT], "bcast flit");
    end
    got.delete();
    msg(16, 60, 3, 2000);                // point-to-point
    repeat (10) @(negedge clk);
    check(got.size() == 3, "fwd size");
    foreach (got[i]) check(got[i].tdata == DATA_W'(2000 + i) && got[i].tdest == 8'd16 && got[i].tlast == (i == 2), "fwd flit");
    check(fwd_pkts == 16'd1, "fwd count");
    got.delete();
    msg(40, 1, 6, 3100);                 // gather, source 1 first
    msg(40, 0, 6, 3000);
    repeat (30) @(negedge clk);
    check(got.size() == 12, "gather size");
    foreach (got[i]) check(got[i].tdata == DATA_W'(3000 + (i / 6) * 100 + i % 6) && got[i].tdest == 8'd1 && got[i].tlast == (i == 11), "gather flit");
    check(gather_rows == 16'd1, "gather count");
    finish();
  end
endmodule
