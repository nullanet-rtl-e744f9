// tb_param_mem: writes random words to random addresses, then reads every
// written address back and checks data and the one-clock read latency, and
// that a read in the same clock as a write to that address returns the old word.
module tb_param_mem;
  logic clk = 0;
  always #5 clk = ~clk;
  int checks = 0, failures = 0;

  localparam int DEPTH = 300;
  logic we;
  logic [8:0] waddr, raddr;
  logic [31:0] wdata, rdata;
  logic [31:0] model [DEPTH];

  param_mem #(.DEPTH(DEPTH), .WIDTH(32)) dut (.clk, .we, .waddr, .wdata, .raddr, .rdata);

  initial begin
    we = 0; waddr = 0; raddr = 0; wdata = 0;
    for (int q = 0; q < DEPTH; q++) begin
      @(negedge clk);
      we = 1; waddr = 9'(q); wdata = $urandom; model[q] = wdata;
    end
    @(negedge clk) we = 0;
    for (int t = 0; t < 600; t++) begin
      int q;
      q = $urandom_range(DEPTH - 1);
      @(negedge clk);
      raddr = 9'(q);
      // also write a new value to the same address this clock half the time
      we = $urandom_range(1); waddr = 9'(q); wdata = $urandom;
      @(posedge clk);
      #1;
      checks++;
      if (rdata !== model[q]) begin failures++; $display("FAIL addr %0d", q); end
      if (we) model[q] = wdata;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
