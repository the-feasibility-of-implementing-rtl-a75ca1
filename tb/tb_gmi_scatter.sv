// Testbench for gmi_scatter: a packet of NUM_DEST*CHUNK flits must leave as
// NUM_DEST packets of CHUNK flits, chunk i addressed to DEST[i].
module tb_gmi_scatter;
  import gp_pkg::*;
  localparam logic [7:0] DEST [4] = '{8'd4, 8'd5, 8'd6, 8'd7};
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
  gmi_scatter #(.NUM_DEST(4), .CHUNK(2), .MY_KID(8'd34), .DEST(DEST)) dut (.*);
  initial begin
    start();
    for (int p = 0; p < 20; p++) begin
      for (int f = 0; f < 8; f++) put(make_flit(DATA_W'(p * 16 + f), 8'd1, 8'd34, f == 7, 1'b0));
      repeat (5) @(negedge clk);
      check(got.size() == 8, "size");
      for (int f = 0; f < 8 && got.size() == 8; f++)
        check(got[f].tdata == DATA_W'(p * 16 + f) && got[f].tdest == DEST[f / 2]
              && got[f].tlast == (f % 2 == 1) && got[f].tid == 8'd34, $sformatf("flit %0d", f));
      got.delete();
    end
    finish();
  end
endmodule
