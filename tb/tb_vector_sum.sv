// tb_vector_sum: random signed lanes summed by vector_sum, compared with an
// integer sum, including the all-minimum and all-maximum corner cases.
module tb_vector_sum;
  localparam int SIMD = 5, IW = 4, OW = 8;
  int checks = 0, failures = 0;
  logic [SIMD*IW-1:0] x;
  logic [OW-1:0]      s;

  vector_sum #(.SIMD(SIMD), .IW(IW), .OW(OW)) dut (.x(x), .s(s));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 302; t++) begin
      int e;
      if (t == 300)      x = {SIMD{4'b1000}};
      else if (t == 301) x = {SIMD{4'b0111}};
      else               x = 20'($urandom);
      #1;
      e = 0;
      for (int i = 0; i < SIMD; i++) e += int'(signed'(x[i*IW +: IW]));
      checks++;
      if (int'(signed'(s)) != e) begin
        failures++;
        $display("sum %0d expected %0d", int'(signed'(s)), e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
