// tb_threshold_mem: fills the memory with random words through the write port,
// reads every word back (one-clock read latency), checks that the read
// register holds while re is low, and rewrites a few words and rereads.
module tb_threshold_mem;
  localparam int DW = 12, D = 20;
  int checks = 0, failures = 0;
  logic          clk = 0;
  logic          we = 0, re = 0;
  logic [4:0]    waddr = '0, raddr = '0;
  logic [DW-1:0] wdata = '0, rdata;
  logic [DW-1:0] model [D];

  threshold_mem #(.ACC(4), .AO(2), .DEPTH(20)) dut (.clk(clk), .we(we), .waddr(waddr), .wdata(wdata),
                  .re(re), .raddr(raddr), .rdata(rdata));

  always #5 clk = ~clk;

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_read(int a);
    @(negedge clk); re = 1; raddr = 5'(a);
    @(negedge clk); re = 0;
    checks++;
    if (rdata !== model[a]) begin
      failures++;
      $display("word %0d: %h expected %h", a, rdata, model[a]);
    end
    raddr = 5'((a + 1) % D);
    @(negedge clk);
    checks++;
    if (rdata !== model[a]) begin
      failures++;
      $display("word %0d not held with re low", a);
    end
  endtask

  initial begin
    for (int a = 0; a < D; a++) begin
      @(negedge clk); we = 1; waddr = 5'(a); wdata = DW'($urandom); model[a] = wdata;
    end
    @(negedge clk); we = 0;
    for (int a = 0; a < D; a++) check_read(a);
    for (int k = 0; k < 10; k++) begin
      int a;
      a = int'($urandom % D);
      @(negedge clk); we = 1; waddr = 5'(a); wdata = DW'($urandom); model[a] = wdata;
      @(negedge clk); we = 0;
      check_read(a);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
