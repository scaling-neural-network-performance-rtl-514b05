// tb_vector_mul: random vectors through two vector_mul instances, one with
// bipolar 1-bit weights and one with 4-bit two's complement weights, each
// lane compared with an integer product computed here.
module tb_vector_mul;
  localparam int SIMD = 4;
  int checks = 0, failures = 0;

  logic [SIMD*1-1:0] w1;
  logic [SIMD*4-1:0] w4;
  logic [SIMD*3-1:0] a;
  logic [SIMD*4-1:0] p1;   // prod_bits(1,3) = 4
  logic [SIMD*7-1:0] p4;   // prod_bits(4,3) = 7

  vector_mul #(.SIMD(SIMD), .W(1), .A(3)) u_b (.w(w1), .a(a), .p(p1));
  vector_mul #(.SIMD(SIMD), .W(4), .A(3)) u_q (.w(w4), .a(a), .p(p4));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 300; t++) begin
      w1 = SIMD'($urandom);
      w4 = 16'($urandom);
      a  = 12'($urandom);
      #1;
      for (int i = 0; i < SIMD; i++) begin
        int av, e1, e4, g1, g4;
        av = int'(a[i*3 +: 3]);
        e1 = w1[i] ? av : -av;
        e4 = (int'(w4[i*4 +: 4]) >= 8 ? int'(w4[i*4 +: 4]) - 16 : int'(w4[i*4 +: 4])) * av;
        g1 = int'(signed'(p1[i*4 +: 4]));
        g4 = int'(signed'(p4[i*7 +: 7]));
        checks += 2;
        if (g1 != e1) begin failures++; $display("bipolar lane %0d: %0d expected %0d", i, g1, e1); end
        if (g4 != e4) begin failures++; $display("int4 lane %0d: %0d expected %0d", i, g4, e4); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
