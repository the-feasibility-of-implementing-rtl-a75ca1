// Testbench for gmi_broadcast: each packet must come out NUM_DEST times, in
// destination order, each copy complete and addressed to its destination.
// A packet longer than MAX_FLITS must raise the overflow flag.
module tb_gmi_broadcast;
  import gp_pkg::*;
  localparam logic [7:0] DEST [3] = '{8'd1, 8'd2, 8'd29};
  logic overflow;
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
  gmi_broadcast #(.NUM_DEST(3), .MAX_FLITS(8), .MY_KID(8'd0), .DEST(DEST)) dut (.*);
  initial begin
    start();
    for (int p = 0; p < 15; p++) begin
      int len; len = $urandom_range(1, 8);
      for (int f = 0; f < len; f++) put(make_flit(DATA_W'(p * 16 + f), 8'd50, 8'd39, f == len - 1, 1'b0));
      repeat (40) @(negedge clk);
      check(got.size() == 3 * len, $sformatf("size %0d", got.size()));
      for (int c = 0; c < 3 && got.size() == 3 * len; c++)
        for (int f = 0; f < len; f++) begin
          flit_t g; g = got[c * len + f];
          check(g.tdata == DATA_W'(p * 16 + f) && g.tdest == DEST[c] && g.tlast == (f == len - 1), "copy");
        end
      got.delete();
    end
    check(!overflow, "no overflow yet");
    for (int f = 0; f < 10; f++) put(make_flit(DATA_W'(f), 8'd50, 8'd39, f == 9, 1'b0));
    repeat (50) @(negedge clk);
    check(overflow, "overflow flagged");
    finish();
  end
endmodule
