// tb_ext_mem_if -- self-checking test of the external SRAM interface.
//
// Writes random 32-bit words at random word addresses through the request
// port into a byte-wide SRAM model, checks byte placement in the model
// (little-endian, byte b of word w at 4w + b), reads every word back through
// the port, and checks the number of clocks per word access
// (4 * (WAIT_CYC + 3) + 1 for a write, 4 * (WAIT_CYC + 2) + 1 for a read,
// counted from the clock the request is taken) and that the model saw no protocol error.
// The byte-wide SRAM is the board's; the access timing checked is this
// design's choice.
module tb_ext_mem_if;
  localparam int unsigned ADDR_W = 10, WAIT_CYC = 2, WA_W = ADDR_W - 2;
  localparam int unsigned NW = 40;

  logic              clk = 1'b0, rst_n = 1'b0;
  int                err0 = 0;
  logic              req = 1'b0, we = 1'b0, ready, rvalid;
  logic [WA_W-1:0]   addr = '0;
  logic [31:0]       wdata = '0, rdata;
  logic [ADDR_W-1:0] sram_a;
  logic [7:0]        sram_dq_o, sram_dq_i;
  logic              sram_dq_oe, sram_ce_n, sram_oe_n, sram_we_n;
  int checks = 0, failures = 0;

  ext_mem_if #(.ADDR_W(ADDR_W), .WAIT_CYC(WAIT_CYC)) dut (.*);
  sram_model #(.ADDR_W(ADDR_W)) u_sram (
    .a(sram_a), .dq_o(sram_dq_o), .dq_i(sram_dq_i), .dq_oe(sram_dq_oe),
    .ce_n(sram_ce_n), .oe_n(sram_oe_n), .we_n(sram_we_n)
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  logic [31:0]     words [NW];
  logic [WA_W-1:0] addrs [NW];

  task automatic access(input bit w, input logic [WA_W-1:0] a, input logic [31:0] d,
                        output logic [31:0] q, output int cyc);
    @(negedge clk);
    req = 1'b1; we = w; addr = a; wdata = d;
    @(posedge clk iff ready);
    @(negedge clk) req = 1'b0;
    cyc = 1;
    if (w) begin
      while (!ready) begin @(posedge clk); #1; cyc++; end
    end else begin
      while (!rvalid) begin @(posedge clk); #1; cyc++; end
      q = rdata;
    end
  endtask

  initial begin
    logic [31:0] q;
    int cyc;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    @(posedge clk);
    err0 = u_sram.errors;     // the bus is undefined before reset
    // distinct random addresses
    for (int i = 0; i < int'(NW); i++) begin
      addrs[i] = WA_W'(i * 5 + 3);
      words[i] = $urandom;
    end
    for (int i = 0; i < int'(NW); i++) begin
      access(1'b1, addrs[i], words[i], q, cyc);
      check(cyc == 4 * (WAIT_CYC + 3) + 1, $sformatf("write clocks %0d", cyc));
    end
    repeat (3) @(posedge clk);
    for (int i = 0; i < int'(NW); i++)
      for (int b = 0; b < 4; b++)
        check(u_sram.mem[{addrs[i], 2'(b)}] == words[i][8*b +: 8],
              $sformatf("byte %0d of word %0d in SRAM", b, i));
    for (int i = NW - 1; i >= 0; i--) begin
      access(1'b0, addrs[i], '0, q, cyc);
      check(q == words[i], $sformatf("read word %0d: got %h expected %h", i, q, words[i]));
      check(cyc == 4 * (WAIT_CYC + 2) + 1, $sformatf("read clocks %0d", cyc));
    end
    check(u_sram.errors == err0, $sformatf("SRAM protocol errors %0d", u_sram.errors - err0));
    check(u_sram.writes == 4 * int'(NW), "byte write count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
