// Testbench for attention_dot_product (M_MAX = 32, 16 PEs): a sequence of
// length 20 (padded to 32, so 12 padding rows) and then one of length 5
// (padded to 16). Every score must equal the dot product of a Q row and a
// K row computed here; an output row must have ceil(M/16) flits with the
// padding lanes zero; padding must cost one cycle per padding row, and a Q
// row must be turned into scores within ceil(M/16) + 2 cycles.
module tb_attention_dot_product;
  import gp_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic [7:0] seq_len; kid_t my_kid, dest;
  flit_t k_flit, q_flit, m_flit; logic k_valid, k_ready, q_valid, q_ready, m_valid, m_ready;
  logic [15:0] pad_cycles;
  int checks = 0, failures = 0;
  attention_dot_product #(.M_MAX(32), .NUM_PE(16)) dut (.*);

  byte Q [32][64], K [32][64];
  flit_t got [$];
  always_ff @(posedge clk) if (rst_n && m_valid && m_ready) got.push_back(m_flit);
  task automatic put_k(flit_t f);
    k_flit = f; k_valid = 1; #1; while (!k_ready) begin @(negedge clk); #1; end
    @(negedge clk); k_valid = 0;
  endtask
  task automatic put_q(flit_t f);
    q_flit = f; q_valid = 1; #1; while (!q_ready) begin @(negedge clk); #1; end
    @(negedge clk); q_valid = 0;
  endtask
  task automatic run(int M);
    int nf; nf = (M + 15) / 16;
    seq_len = 8'(M);
    foreach (Q[i, j]) begin Q[i][j] = byte'($urandom); K[i][j] = byte'($urandom); end
    for (int i = 0; i < M; i++) begin
      flit_t f; f = '0;
      for (int j = 0; j < 64; j++) f.tdata[j*8 +: 8] = K[i][j];
      put_k(f);
    end
    for (int i = 0; i < M; i++) begin
      flit_t f; int t0; f = '0;
      for (int j = 0; j < 64; j++) f.tdata[j*8 +: 8] = Q[i][j];
      got.delete();
      put_q(f);
      t0 = $time / 10;
      wait (got.size() == nf); @(negedge clk);
      checks++; if ($time / 10 - t0 > nf + 2) begin failures++; $display("row time %0d", $time / 10 - t0); end
      for (int g = 0; g < nf; g++)
        for (int p = 0; p < 16; p++) begin
          int c, e; c = g * 16 + p; e = 0;
          if (c < M) for (int j = 0; j < 64; j++) e += int'(Q[i][j]) * int'(K[c][j]);
          checks++;
          if (int'(signed'(got[g].tdata[p*32 +: 32])) != e) begin failures++; $display("S[%0d][%0d] got %0d exp %0d", i, c, signed'(got[g].tdata[p*32 +: 32]), e); end
        end
      checks++; if (!got[nf-1].tlast || (nf > 1 && got[0].tlast)) begin failures++; $display("tlast"); end
    end
  endtask
  initial begin
    k_valid = 0; q_valid = 0; k_flit = '0; q_flit = '0; m_ready = 1; my_kid = 8'd4; dest = 8'd4; seq_len = 20;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    run(20);
    checks++; if (pad_cycles != 16'd12) begin failures++; $display("pad %0d", pad_cycles); end
    run(5);
    checks++; if (pad_cycles != 16'd23) begin failures++; $display("pad %0d", pad_cycles); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (100000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
