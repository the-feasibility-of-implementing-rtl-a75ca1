// Testbench for mm_tile: a 4-PE tile over 64 random INT8 pairs must return
// the full dot product plus the incoming partial sum.
module tb_mm_tile;
  localparam int P = 4, L = 16;
  logic [P*L*8-1:0] a, w; logic signed [31:0] psum_in, psum_out;
  int checks = 0, failures = 0;
  mm_tile #(.PES(P), .LANES(L)) dut (.*);
  initial begin
    for (int t = 0; t < 300; t++) begin
      int ref_v;
      psum_in = $urandom_range(0, 2000) - 1000;
      ref_v = psum_in;
      for (int i = 0; i < P * L; i++) begin
        byte x, y; x = byte'($urandom); y = byte'($urandom);
        a[i*8 +: 8] = x; w[i*8 +: 8] = y; ref_v += int'(x) * int'(y);
      end
      #1;
      checks++; if (psum_out != ref_v) begin failures++; $display("got %0d exp %0d", psum_out, ref_v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
