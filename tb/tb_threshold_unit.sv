// tb_threshold_unit: random accumulator values against random ascending
// thresholds; the expected level is the number of thresholds reached,
// counted here. Values equal to a threshold are forced regularly so that
// the ">=" boundary is exercised.
module tb_threshold_unit;
  localparam int ACC = 10, AO = 2, NT = 3;
  int checks = 0, failures = 0;
  logic [ACC-1:0]    acc;
  logic [NT*ACC-1:0] thr;
  logic [AO-1:0]     q;

  threshold_unit #(.ACC(ACC), .AO(AO)) dut (.acc(acc), .thr(thr), .q(q));

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int t = 0; t < 400; t++) begin
      int tv[NT], av, e;
      tv[0] = int'($urandom % 200) - 150;
      for (int j = 1; j < NT; j++) tv[j] = tv[j-1] + int'($urandom % 80);
      av = (t % 4 == 0) ? tv[t % NT] : int'($urandom % 500) - 250;
      acc = ACC'(av);
      for (int j = 0; j < NT; j++) thr[j*ACC +: ACC] = ACC'(tv[j]);
      #1;
      e = 0;
      for (int j = 0; j < NT; j++) if (av >= tv[j]) e++;
      checks++;
      if (int'(q) != e) begin
        failures++;
        $display("acc %0d: level %0d expected %0d", av, q, e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
