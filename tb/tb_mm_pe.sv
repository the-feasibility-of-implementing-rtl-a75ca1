// Testbench for mm_pe: random INT8 vectors and partial sums, including the
// extreme values -128 and 127, against a dot product computed here.
module tb_mm_pe;
  localparam int L = 16;
  logic [L*8-1:0] a, w; logic signed [31:0] psum_in, psum_out;
  int checks = 0, failures = 0;
  mm_pe #(.LANES(L)) dut (.*);
  initial begin
    for (int t = 0; t < 500; t++) begin
      int ref_v;
      psum_in = $urandom_range(0, 200000) - 100000;
      ref_v = psum_in;
      for (int i = 0; i < L; i++) begin
        byte x, y;
        x = (t < 2) ? -128 : byte'($urandom); y = (t == 0) ? -128 : (t == 1 ? 127 : byte'($urandom));
        a[i*8 +: 8] = x; w[i*8 +: 8] = y;
        ref_v += int'(x) * int'(y);
      end
      #1;
      checks++; if (psum_out != ref_v) begin failures++; $display("got %0d exp %0d", psum_out, ref_v); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
endmodule
