// tb_cf_ringram -- self-checking testbench of the ring-buffer RAM.
//
// Random writes and reads are compared with an array model; reads of the
// address being written in the same cycle must return the new word
// (write-first), and the read data must appear one cycle after the address.
module tb_cf_ringram;
  localparam int unsigned W = 16, AW = 5;
  logic clk = 1'b0;
  always #5 clk = ~clk;
  logic          wr_en;
  logic [AW-1:0] wr_addr, rd_addr;
  logic [W-1:0]  wr_data, rd_data;
  logic [W-1:0]  model [2**AW];
  int checks = 0, failures = 0, bypasses = 0;

  cf_ringram #(.WIDTH(W), .AW(AW)) dut (.*);

  initial begin
    logic [W-1:0] exp;
    wr_en = 1;
    for (int i = 0; i < 2**AW; i++) begin
      @(negedge clk);
      wr_addr = AW'(i); wr_data = W'($urandom); model[i] = wr_data; rd_addr = '0;
    end
    for (int i = 0; i < 4000; i++) begin
      @(negedge clk);
      wr_en   = $urandom_range(1);
      wr_addr = AW'($urandom);
      wr_data = W'($urandom);
      rd_addr = ($urandom_range(3) == 0) ? wr_addr : AW'($urandom);
      if (wr_en && wr_addr == rd_addr) bypasses++;
      exp = (wr_en && wr_addr == rd_addr) ? wr_data : model[rd_addr];
      @(posedge clk);
      if (wr_en) model[wr_addr] = wr_data;
      #1;
      checks++;
      if (rd_data != exp) begin
        failures++;
        $display("FAIL: read %0d got %h exp %h", rd_addr, rd_data, exp);
      end
    end
    checks++;
    if (bypasses == 0) failures++;
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
