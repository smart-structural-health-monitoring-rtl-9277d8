// tb_bram -- self-checking test of the simple dual-port block RAM.
//
// Fills a small RAM with random words, reads every address back and checks
// the one-clock read latency, then checks that a read of the address being
// written in the same clock returns the old word (read-before-write).
// The RAM behaviour checked is this design's choice (registered read).
module tb_bram;
  localparam int unsigned DEPTH = 100;
  localparam int unsigned WIDTH = 16;
  localparam int unsigned AW    = $clog2(DEPTH);

  logic             clk = 1'b0;
  logic             we = 1'b0;
  logic [AW-1:0]    waddr = '0, raddr = '0;
  logic [WIDTH-1:0] wdata = '0, rdata;
  logic [WIDTH-1:0] model [DEPTH];
  int checks = 0, failures = 0;

  bram #(.DEPTH(DEPTH), .WIDTH(WIDTH)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input logic [WIDTH-1:0] got, exp, input string what);
    checks++;
    if (got !== exp) begin
      failures++;
      $display("FAIL %s: got %h expected %h", what, got, exp);
    end
  endtask

  initial begin
    repeat (2) @(posedge clk);
    for (int i = 0; i < int'(DEPTH); i++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(i); wdata = WIDTH'($urandom); model[i] = wdata;
    end
    @(negedge clk) we = 1'b0;
    // read back in random order
    for (int n = 0; n < 300; n++) begin
      int a;
      a = int'($urandom_range(DEPTH - 1));
      @(negedge clk) raddr = AW'(a);
      @(posedge clk); #1;
      check(rdata, model[a], $sformatf("read %0d", a));
    end
    // read during write to the same address returns the old word
    @(negedge clk);
    we = 1'b1; waddr = AW'(7); raddr = AW'(7); wdata = ~model[7];
    @(posedge clk); #1;
    check(rdata, model[7], "read-before-write old word");
    model[7] = ~model[7];
    @(negedge clk) we = 1'b0;
    @(posedge clk); #1;
    check(rdata, model[7], "new word after write");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
