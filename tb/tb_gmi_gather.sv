// Testbench for gmi_gather: three sources (TID 16, 17, 18) send two-flit
// chunks in a random order, the next round starting while the last is sent; the
// output must be one packet per round, chunks in source order. Then one
// source runs four rows ahead of the others, which its row queue absorbs.
module tb_gmi_gather;
  import gp_pkg::*;
  localparam logic [7:0] SRC [3] = '{8'd16, 8'd17, 8'd18};
  logic [15:0] rows_out;
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
  gmi_gather #(.NUM_SRC(3), .CHUNK(2), .MY_KID(8'd37), .DEST(8'd28), .SRC(SRC)) dut (.*);
  initial begin
    start();
    fork
      for (int r = 0; r < 10; r++) begin
        int ord [3]; ord = '{0, 1, 2}; ord.shuffle();
        foreach (ord[k]) for (int f = 0; f < 2; f++)
          put(make_flit(DATA_W'(r * 100 + ord[k] * 10 + f), SRC[ord[k]], 8'd37, f == 1, 1'b0));
      end
    join
    // source 18 runs 4 rows ahead of the others; rows must still pair up
    for (int r = 10; r < 14; r++) for (int f = 0; f < 2; f++)
      put(make_flit(DATA_W'(r * 100 + 20 + f), SRC[2], 8'd37, f == 1, 1'b0));
    for (int r = 10; r < 14; r++) for (int s = 0; s < 2; s++) for (int f = 0; f < 2; f++)
      put(make_flit(DATA_W'(r * 100 + s * 10 + f), SRC[s], 8'd37, f == 1, 1'b0));
    repeat (300) @(negedge clk);
    check(got.size() == 84, $sformatf("size %0d", got.size()));
    for (int i = 0; i < got.size(); i++) begin
      int r, s, f; r = i / 6; s = (i % 6) / 2; f = i % 2;
      check(got[i].tdata == DATA_W'(r * 100 + s * 10 + f) && got[i].tdest == 8'd28 && got[i].tlast == (i % 6 == 5), $sformatf("flit %0d", i));
    end
    check(rows_out == 16'd14, "row count");
    finish();
  end
endmodule
