// tb_cf_fifo -- self-checking testbench of the sequence FIFO.
//
// Random pushes and pops (including simultaneous ones) are checked against a
// queue model: read data, empty, full, and the sticky overflow flag, which
// must rise exactly when a push meets a full FIFO that is not being read.
module tb_cf_fifo;
  localparam int unsigned W = 12, D = 16;
  logic clk = 1'b0, rst_n = 1'b0;
  always #5 clk = ~clk;
  logic         wr_en, rd_en, empty, full, overflow;
  logic [W-1:0] wr_data, rd_data;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];
  bit exp_ovf = 0;

  cf_fifo #(.WIDTH(W), .DEPTH(D)) dut (.*);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    wr_en = 0; rd_en = 0; wr_data = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < 3000; i++) begin
      int phase = (i / 500) % 3;   // fill-heavy, drain-heavy, balanced
      @(negedge clk);
      check(empty == (model.size() == 0), "empty");
      check(full == (model.size() == D), "full");
      check(overflow == exp_ovf, "overflow flag");
      if (!empty) check(rd_data == model[0], "read data");
      wr_en   = $urandom_range(99) < (phase == 0 ? 80 : phase == 1 ? 20 : 50);
      rd_en   = !empty && ($urandom_range(99) < (phase == 0 ? 20 : phase == 1 ? 80 : 50));
      wr_data = W'($urandom);
      @(posedge clk);
      #1;
      if (rd_en) void'(model.pop_front());
      if (wr_en) begin
        if (model.size() < D) model.push_back(wr_data);
        else exp_ovf = 1;
      end
      wr_en = 0; rd_en = 0;
    end
    check(exp_ovf, "overflow was exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
