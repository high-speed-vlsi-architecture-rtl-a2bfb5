// tb_row_mem: row memory. Random writes and reads against a model array;
// a read of the address being written in the same clock must return the
// old word.
//
// Expected values are worked out in the test itself from the block's
// intended behaviour; the sizes, the random stimulus and the timing checks
// are this test's own choices.
module tb_row_mem;
  import dwt3d_pkg::*;

  localparam int DEPTH = 37;
  localparam int AW = $clog2(DEPTH);

  logic clk = 0;
  always #5 clk = ~clk;

  logic          we;
  logic [AW-1:0] waddr, raddr;
  word_t         wdata, rdata;
  int            model [DEPTH];
  int checks = 0, failures = 0;

  row_mem #(.DEPTH(DEPTH)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0;
    // fill
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = AW'(i); wdata = word_t'($urandom); model[i] = int'(wdata);
    end
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      raddr = AW'($urandom_range(DEPTH - 1));
      we    = $urandom_range(1);
      waddr = ($urandom_range(3) == 0) ? raddr : AW'($urandom_range(DEPTH - 1));
      wdata = word_t'($urandom);
      #1;
      checks++;
      if (int'(rdata) != model[raddr]) begin
        failures++;
        $display("addr %0d: got %0d want %0d", raddr, rdata, model[raddr]);
      end
      @(posedge clk);
      if (we) model[waddr] = int'(wdata);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
