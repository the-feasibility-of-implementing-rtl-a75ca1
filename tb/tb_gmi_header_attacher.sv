// Testbench for gmi_header_attacher: every packet must leave with one extra
// leading flit whose low byte is the destination kernel ID, and every flit
// must be addressed to the destination cluster with TUSER bit 16 set.
module tb_gmi_header_attacher;
  import gp_pkg::*;
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
  gmi_header_attacher #(.DEST_KID(8'd39), .DEST_CLUSTER(8'd5)) dut (.*);
  initial begin
    start();
    for (int p = 0; p < 20; p++) begin
      int len; len = $urandom_range(1, 4);
      for (int f = 0; f < len; f++) put(make_flit(DATA_W'(p * 16 + f + 1), 8'd7, 8'd3, f == len - 1, 1'b0));
      repeat (6) @(negedge clk);
      check(got.size() == len + 1, $sformatf("pkt %0d size %0d", p, got.size()));
      if (got.size() == len + 1) begin
        check(got[0].tdata == DATA_W'(39) && !got[0].tlast, "header flit");
        for (int f = 0; f <= len; f++) begin
          check(got[f].tdest == 8'd5 && got[f].tuser[INTER_BIT] && got[f].tid == 8'd7, "addressing");
          if (f > 0) check(got[f].tdata == DATA_W'(p * 16 + f) && got[f].tlast == (f == len), "payload");
        end
      end
      got.delete();
    end
    finish();
  end
endmodule
