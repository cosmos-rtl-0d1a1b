// temp_buffer_tb: self-checking test of the temporary buffer RAM.
//
// Fills all 64 words with random data, reads them back in random order and
// checks the one-cycle read latency, then overwrites random words while
// reading others and checks that reads return the data last written
// (a model array kept here).
module temp_buffer_tb;
  localparam int DEPTH = 64, W = 32;

  logic clk = 0, we;
  logic [5:0] waddr, raddr;
  logic [W-1:0] wdata, rdata;
  logic [W-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  always #5 clk = ~clk;

  temp_buffer #(.DEPTH(DEPTH), .WIDTH(W)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int i = 0; i < DEPTH; i++) begin
      @(negedge clk);
      we = 1; waddr = 6'(i); wdata = $urandom; model[i] = wdata;
    end
    @(negedge clk);
    we = 0;
    for (int t = 0; t < 2000; t++) begin
      int ra, wa;
      ra = int'($urandom % DEPTH);
      raddr = 6'(ra);
      we = (t > 500) && ($urandom % 2 == 1);
      wa = int'($urandom % DEPTH);
      if (wa == ra) wa = (wa + 1) % DEPTH;
      waddr = 6'(wa); wdata = $urandom;
      @(negedge clk);
      checks++;
      if (rdata != model[ra]) begin failures++; $display("FAIL read %0d", ra); end
      if (we) model[wa] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
