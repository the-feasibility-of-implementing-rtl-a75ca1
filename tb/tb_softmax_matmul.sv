// Testbench for softmax_matmul (4 PEs, N = 64): sequences of length 10
// (three groups, the last padded with two zero rows) and 70 (rows of P span
// two flits). Every output value must equal sum_j P[i][j] * V[j][n]
// computed here, one beat per real row, m_last on the last row; padding rows
// must be counted and never output; a group must take seq_len + 2 cycles.
module tb_softmax_matmul;
  import gp_pkg::*;
  localparam int MM = 80, NPE = 4;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] seq_len;
  flit_t v_flit, p_flit; logic v_valid, v_ready, p_valid, p_ready;
  logic [64*32-1:0] m_data; logic m_valid, m_ready, m_last;
  logic [15:0] pad_rows;
  int checks = 0, failures = 0;
  softmax_matmul #(.M_MAX(MM), .NUM_PE(NPE), .N(64)) dut (.*);

  byte P [MM][MM], V [MM][64];
  int nrow = 0, cur_m = 0;
  always_ff @(posedge clk) begin
    m_ready <= $urandom_range(0, 3) != 0;
    if (rst_n && m_valid && m_ready) begin
      for (int n = 0; n < 64; n++) begin
        int e; e = 0;
        for (int j = 0; j < cur_m; j++) e += int'(P[nrow][j]) * int'(V[j][n]);
        checks++;
        if (int'(signed'(m_data[n*32 +: 32])) != e) begin failures++; $display("O[%0d][%0d] got %0d exp %0d", nrow, n, signed'(m_data[n*32 +: 32]), e); end
      end
      checks++; if (m_last != (nrow == cur_m - 1)) begin failures++; $display("m_last at row %0d", nrow); end
      nrow <= nrow + 1;
    end
  end
  task automatic put_v(flit_t f);
    v_flit = f; v_valid = 1; #1; while (!v_ready) begin @(negedge clk); #1; end
    @(negedge clk); v_valid = 0;
  endtask
  task automatic put_p(flit_t f);
    p_flit = f; p_valid = 1; #1; while (!p_ready) begin @(negedge clk); #1; end
    @(negedge clk); p_valid = 0;
  endtask
  task automatic run(int M);
    int nf; nf = (M + 63) / 64;
    foreach (P[i, j]) P[i][j] = byte'($urandom);
    foreach (V[i, j]) V[i][j] = byte'($urandom);
    cur_m = M; nrow = 0; seq_len = 8'(M);
    for (int i = 0; i < M; i++) begin
      flit_t f; f = '0;
      for (int n = 0; n < 64; n++) f.tdata[n*8 +: 8] = V[i][n];
      put_v(f);
    end
    for (int i = 0; i < M; i++)
      for (int k = 0; k < nf; k++) begin
        flit_t f; f = '0;
        for (int j = 0; j < 64; j++) if (k * 64 + j < M) f.tdata[j*8 +: 8] = P[i][k * 64 + j];
        f.tlast = (k == nf - 1);
        put_p(f);
      end
    wait (nrow == M); repeat (5) @(negedge clk);
  endtask
  initial begin
    v_valid = 0; p_valid = 0; v_flit = '0; p_flit = '0; m_ready = 1; seq_len = 10;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    run(10);
    checks++; if (pad_rows != 16'd2) begin failures++; $display("pad %0d", pad_rows); end
    // time of one compute group: between the last P row of the group and its first output
    run(70);
    checks++; if (pad_rows != 16'd4) begin failures++; $display("pad %0d", pad_rows); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
