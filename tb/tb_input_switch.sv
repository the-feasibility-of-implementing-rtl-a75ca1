// Testbench for input_switch: packets addressed to kernels 5, 6, 7 must reach
// ports 0, 1, 2; an inter-cluster packet must reach the gateway port 0
// whatever its TDEST; a packet to an unmapped kernel must be dropped and
// counted. Ports apply random back-pressure.
module tb_input_switch;
  import gp_pkg::*;
  localparam int N = 3;
  function automatic logic [7:0] pm(int k);
    return k == 5 ? 8'd0 : k == 6 ? 8'd1 : k == 7 ? 8'd2 : 8'hFF;
  endfunction
  typedef logic [7:0] map_t [MAX_KERNELS];
  function automatic map_t mk();
    map_t m; for (int i = 0; i < MAX_KERNELS; i++) m[i] = pm(i); return m;
  endfunction
  localparam map_t MAP = mk();
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  flit_t s_flit; logic s_valid, s_ready;
  flit_t [N-1:0] m_flit; logic [N-1:0] m_valid, m_ready;
  logic [15:0] dropped;
  int checks = 0, failures = 0;
  input_switch #(.N(N), .GATEWAY_PORT(0), .PORT_OF_KID(MAP)) dut (.*);

  int exp_q [N][$];
  always_ff @(posedge clk) begin
    m_ready <= N'($urandom());
    for (int i = 0; i < N; i++)
      if (m_valid[i] && m_ready[i]) begin
        checks++;
        if (exp_q[i].size() == 0 || exp_q[i][0] != int'(m_flit[i].tdata[31:0])) begin
          failures++; $display("port %0d unexpected %0d", i, m_flit[i].tdata[31:0]);
        end else void'(exp_q[i].pop_front());
      end
  end
  task automatic send(int dst, logic inter, int len, int tag, int port);
    for (int f = 0; f < len; f++) begin
      s_flit  = make_flit(DATA_W'(tag * 100 + f), 8'd1, 8'(dst), f == len - 1, inter);
      s_valid = 1;
      if (port >= 0) exp_q[port].push_back(tag * 100 + f);
      #1; while (!s_ready) begin @(negedge clk); #1; end
      @(negedge clk);
    end
    s_valid = 0;
  endtask
  initial begin
    s_valid = 0; s_flit = '0; m_ready = 0;
    repeat (3) @(posedge clk); rst_n = 1; @(negedge clk);
    for (int t = 1; t < 40; t++) begin
      int k; k = $urandom_range(0, 4);
      case (k)
        0: send(5, 0, $urandom_range(1, 4), t, 0);
        1: send(6, 0, $urandom_range(1, 4), t, 1);
        2: send(7, 0, $urandom_range(1, 4), t, 2);
        3: send(9, 1, $urandom_range(1, 4), t, 0);     // inter-cluster -> gateway
        default: send(3, 0, 2, t, -1);                 // unmapped -> dropped
      endcase
    end
    send(3, 0, 3, 99, -1);
    repeat (50) @(posedge clk);
    for (int i = 0; i < N; i++) begin checks++; if (exp_q[i].size() != 0) begin failures++; $display("port %0d missing %0d", i, exp_q[i].size()); end end
    checks++; if (dropped == 0) begin failures++; $display("no drops counted"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin repeat (20000) @(posedge clk); failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
