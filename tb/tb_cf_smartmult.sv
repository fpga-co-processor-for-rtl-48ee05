// tb_cf_smartmult -- self-checking testbench of the shift-and-add multiplier.
//
// Every multiplicand value 0..2**MB-1 is combined with random and extreme
// multipliers, for the default 4-bit limit and for a 5-bit instance; the
// products are compared with ordinary integer multiplication.
module tb_cf_smartmult;
  int checks = 0, failures = 0;

  logic [3:0]  m4;
  logic [19:0] x4;
  logic [23:0] p4;
  logic [4:0]  m5;
  logic [9:0]  x5;
  logic [15:0] p5;

  cf_smartmult #(.MB(4), .XW(20), .PW(24)) dut4 (.m(m4), .x(x4), .p(p4));
  cf_smartmult #(.MB(5), .XW(10), .PW(16)) dut5 (.m(m5), .x(x5), .p(p5));

  initial begin
    for (int m = 0; m < 16; m++) begin
      for (int r = 0; r < 40; r++) begin
        m4 = 4'(m);
        x4 = (r == 0) ? 20'hFFFFF : (r == 1) ? 20'd0 : 20'($urandom);
        #1;
        checks++;
        if (p4 !== 24'(longint'(m) * x4)) begin
          failures++;
          $display("FAIL: %0d * %0d = %0d, got %0d", m, x4, m * x4, p4);
        end
      end
    end
    for (int m = 0; m < 32; m++) begin
      for (int r = 0; r < 20; r++) begin
        m5 = 5'(m);
        x5 = (r == 0) ? 10'h3FF : 10'($urandom);
        #1;
        checks++;
        if (p5 !== 16'(m * x5)) begin
          failures++;
          $display("FAIL: %0d * %0d = %0d, got %0d", m, x5, m * x5, p5);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
