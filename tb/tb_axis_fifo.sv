// Testbench for axis_fifo (DEPTH 16): random writes and reads with random
// back-pressure; the output must be the input sequence, in order, complete;
// s_ready must drop exactly when 16 flits are stored plus the output stage.
module tb_axis_fifo;
  import gp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t s_flit, m_flit; logic s_valid, s_ready, m_valid, m_ready;
  logic [4:0] level;
  int checks = 0, failures = 0, tx = 0, rx = 0;
  bit fill_phase = 1;
  axis_fifo #(.DEPTH(16)) dut (.*);
  always_ff @(posedge clk) if (rst_n) begin
    if (s_valid && s_ready) tx <= tx + 1;
    if (rst_n && m_valid && m_ready) begin
      checks++;
      if (m_flit.tdata != DATA_W'(rx)) begin failures++; $display("got %0d exp %0d", m_flit.tdata[31:0], rx); end
      rx <= rx + 1;
    end
  end
  always_comb begin s_flit = make_flit(DATA_W'(tx), 8'd1, 8'd2, tx % 3 == 2, 1'b0); end
  always @(negedge clk) begin
    s_valid = rst_n && tx < 2000 && (fill_phase || $urandom_range(0, 1));
    m_ready = !fill_phase && $urandom_range(0, 2) != 0;
  end
  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (40) @(posedge clk);
    @(negedge clk); #1;
    checks++; if (s_ready || level != 5'd17 || tx != 17) begin failures++; $display("full: ready %0d level %0d tx %0d", s_ready, level, tx); end
    fill_phase = 0;
    wait (rx == 2000); repeat (3) @(posedge clk);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
