// Testbench for linear at H = 128 with 4 tiles: random INT8 weights, INT32
// bias and input rows; every output column must equal the dot product of
// the row with the weight column plus the bias, computed here. Also checks
// the compute time of a row: (H/NUM_TILES)*(H/64) cycles plus a few cycles
// of pipeline, measured from the last input flit to the last output beat.
module tb_linear;
  import gp_pkg::*;
  localparam int H = 128, T = 4, CH = H / 64, NG = H / T;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic w_we; logic [$clog2(T)-1:0] w_tile; logic [$clog2(NG*CH)-1:0] w_addr; logic [DATA_W-1:0] w_data;
  logic b_we; logic [$clog2(H)-1:0] b_addr; logic signed [31:0] b_data;
  flit_t s_flit; logic s_valid, s_ready;
  logic [T*32-1:0] m_data; logic m_valid, m_ready, m_last;
  int checks = 0, failures = 0;
  linear #(.H(H), .NUM_TILES(T), .PES(4), .LANES(16)) dut (.*);

  byte W [H][H];     // W[k][c]
  int  bias [H];
  byte X [4][H];
  int  exp_q [$];
  int  row_in_done, last_out, nbeats = 0;
  always_ff @(posedge clk) begin
    m_ready <= ($urandom_range(0, 7) != 0) || (nbeats < NG);   // stalls only in later rows
    if (rst_n && m_valid && m_ready) begin
      for (int t = 0; t < T; t++) begin
        checks++;
        if (int'(signed'(m_data[t*32 +: 32])) != exp_q[0]) begin failures++; $display("beat %0d lane %0d got %0d exp %0d", nbeats, t, signed'(m_data[t*32 +: 32]), exp_q[0]); end
        void'(exp_q.pop_front());
      end
      checks++; if (m_last != (nbeats % NG == NG - 1)) begin failures++; $display("m_last"); end
      if (m_last) last_out = $time / 10;
      nbeats++;
    end
  end
  initial begin
    w_we = 0; b_we = 0; s_valid = 0; s_flit = '0; m_ready = 1; w_tile = 0; w_addr = 0; w_data = 0; b_addr = 0; b_data = 0;
    foreach (W[k, c]) W[k][c] = byte'($urandom);
    W[0][0] = -128; X[0][0] = -128;
    foreach (bias[c]) bias[c] = $urandom_range(0, 2000000) - 1000000;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int c = 0; c < H; c++)
      for (int ch = 0; ch < CH; ch++) begin
        w_we = 1; w_tile = c % T; w_addr = (c / T) * CH + ch;
        for (int i = 0; i < 64; i++) w_data[i*8 +: 8] = W[ch * 64 + i][c];
        @(negedge clk);
      end
    w_we = 0;
    for (int c = 0; c < H; c++) begin b_we = 1; b_addr = c; b_data = bias[c]; @(negedge clk); end
    b_we = 0;
    for (int r = 0; r < 4; r++) begin
      for (int k = 0; k < H; k++) if (!(r == 0 && k == 0)) X[r][k] = byte'($urandom);
      for (int c = 0; c < H; c++) begin
        int acc; acc = bias[c];
        for (int k = 0; k < H; k++) acc += int'(X[r][k]) * int'(W[k][c]);
        exp_q.push_back(acc);
      end
      for (int ch = 0; ch < CH; ch++) begin
        for (int i = 0; i < 64; i++) s_flit.tdata[i*8 +: 8] = X[r][ch * 64 + i];
        s_flit.tlast = (ch == CH - 1); s_valid = 1;
        #1; while (!s_ready) begin @(negedge clk); #1; end
        @(negedge clk); s_valid = 0;
      end
      if (r == 0) begin
        row_in_done = $time / 10;
        wait (nbeats == NG); @(negedge clk);
        checks++;
        if (last_out - row_in_done > NG * CH + 3 || last_out - row_in_done < NG * CH) begin
          failures++; $display("row latency %0d, expected %0d + pipeline", last_out - row_in_done, NG * CH);
        end
      end
    end
    wait (nbeats == 4 * NG); repeat (3) @(negedge clk);
    checks++; if (exp_q.size() != 0) begin failures++; $display("missing"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (200000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
