// Testbench for quant: random INT32 beats with random multiplier and shift
// (including values that saturate) must become INT8 values equal to
// round(x * mult / 2^shift) clamped to [-128, 127], packed 64 per flit, with
// TLAST on the last flit of every 128-value row.
module tb_quant;
  import gp_pkg::*;
  localparam int QL = 16, ROW = 128;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [30:0] mult; logic [5:0] shift; kid_t my_kid, dest;
  logic [QL*32-1:0] s_data; logic s_valid, s_ready;
  flit_t m_flit; logic m_valid, m_ready;
  int checks = 0, failures = 0;
  quant #(.QL(QL), .ROW(ROW)) dut (.*);

  byte exp_q [$];
  int nflit = 0;
  function automatic byte rq(int x, int m, int s);
    longint p, q;
    p = longint'(x) * longint'(m);
    q = p + (longint'(1) << (s - 1));
    q = (q >= 0) ? (q / (longint'(1) << s)) : -((-q + (longint'(1) << s) - 1) / (longint'(1) << s));
    if (q > 127) return 127;
    if (q < -128) return -128;
    return byte'(q);
  endfunction
  always_ff @(posedge clk) begin
    m_ready <= $urandom_range(0, 1);
    if (rst_n && m_valid && m_ready) begin
      for (int i = 0; i < 64; i++) begin
        checks++;
        if (byte'(m_flit.tdata[i*8 +: 8]) != exp_q[0]) begin failures++; $display("lane %0d got %0d exp %0d", i, byte'(m_flit.tdata[i*8 +: 8]), exp_q[0]); end
        void'(exp_q.pop_front());
      end
      checks++;
      if (m_flit.tlast != (nflit % 2 == 1) || m_flit.tdest != 8'd34) begin failures++; $display("tlast/tdest"); end
      nflit++;
    end
  end
  initial begin
    s_valid = 0; s_data = '0; m_ready = 0; my_kid = 8'd1; dest = 8'd34;
    mult = 31'd1; shift = 6'd1;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int r = 0; r < 16; r++) begin
      mult  = 31'($urandom_range(1, 32'h7fff_ffff));
      shift = 6'($urandom_range(20, 40));
      for (int b = 0; b < ROW / QL; b++) begin
        for (int i = 0; i < QL; i++) begin
          int x; x = (r % 4 == 0) ? int'($urandom) : ($urandom_range(0, 20000) - 10000);
          s_data[i*32 +: 32] = x;
          exp_q.push_back(rq(x, int'(mult), int'(shift)));
        end
        s_valid = 1;
        #1; while (!s_ready) begin @(negedge clk); #1; end
        @(negedge clk); s_valid = 0;
      end
      repeat (6) @(negedge clk);       // drain before the scale changes
    end
    repeat (10) @(negedge clk);
    checks++; if (nflit != 32) begin failures++; $display("flits %0d", nflit); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
