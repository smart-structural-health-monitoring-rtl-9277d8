// tb_uart -- self-checking test of the host serial link.
//
// With CLK_HZ = 100 MHz and BAUD = 10 Mbaud (10 clocks per bit) the test
//  - sends random bytes and decodes txd here, bit by bit at mid-bit, checking
//    start bit, data, stop bit and the 10-clock bit time;
//  - drives rxd with frames built here and checks rx_data / rx_valid;
//  - sends a frame with a low stop bit and checks frame_err;
//  - loops txd back to rxd and checks that bytes survive the round trip.
// The 8N1 format is this design's choice; the baud rate is raised from the
// paper's 230400 to keep the run short (the divider is the same logic).
module tb_uart;
  localparam int unsigned CLK_HZ = 100_000_000, BAUD = 10_000_000, DIV = 10;

  logic       clk = 1'b0, rst_n = 1'b0;
  logic [7:0] tx_data = '0, rx_data;
  logic       tx_valid = 1'b0, tx_ready, rx_valid, frame_err;
  logic       rxd, txd;
  logic       loop = 1'b0, drv = 1'b1;
  int checks = 0, failures = 0;

  assign rxd = loop ? txd : drv;

  uart #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // received-byte log
  logic [7:0] rx_log [$];
  int         ferr_cnt = 0;
  always @(posedge clk) if (rst_n) begin
    if (rx_valid) rx_log.push_back(rx_data);
    if (frame_err) ferr_cnt++;
  end

  task automatic send(input logic [7:0] b);
    @(negedge clk);
    tx_data = b; tx_valid = 1'b1;
    @(posedge clk iff tx_ready);
    @(negedge clk) tx_valid = 1'b0;
  endtask

  // decode one frame from txd, checking bit timing
  task automatic decode(output logic [7:0] b, output bit ok);
    int t0;
    ok = 1'b1;
    @(negedge txd);
    repeat (DIV / 2) @(posedge clk);
    if (txd !== 1'b0) ok = 1'b0;
    for (int i = 0; i < 8; i++) begin
      repeat (DIV) @(posedge clk);
      b[i] = txd;
    end
    repeat (DIV) @(posedge clk);
    if (txd !== 1'b1) ok = 1'b0;
  endtask

  task automatic drive_frame(input logic [7:0] b, input bit stop);
    drv = 1'b0; repeat (DIV) @(posedge clk);
    for (int i = 0; i < 8; i++) begin drv = b[i]; repeat (DIV) @(posedge clk); end
    drv = stop; repeat (DIV) @(posedge clk);
    drv = 1'b1; repeat (2 * DIV) @(posedge clk);
  endtask

  initial begin
    logic [7:0] b, exp;
    bit ok;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);
    check(txd === 1'b1 && tx_ready, "idle line high and ready");
    // transmit path
    for (int n = 0; n < 20; n++) begin
      exp = 8'($urandom);
      fork
        send(exp);
        decode(b, ok);
      join
      check(ok && b == exp, $sformatf("tx byte %0d: got %h expected %h", n, b, exp));
    end
    // bit time: a 0x00 byte keeps the line low for 9 bit times
    begin
      longint t0, low;
      fork
        send(8'h00);
        begin
          @(negedge txd) t0 = $time;
          @(posedge txd) low = ($time - t0) / 10;
        end
      join
      check(low == 9 * DIV, $sformatf("low time of 0x00 frame %0d clocks", low));
    end
    repeat (3 * DIV) @(posedge clk);
    // receive path
    rx_log.delete();
    for (int n = 0; n < 20; n++) begin
      exp = 8'($urandom);
      drive_frame(exp, 1'b1);
      check(rx_log.size() == 1 && rx_log[0] == exp,
            $sformatf("rx byte %0d expected %h", n, exp));
      rx_log.delete();
    end
    drive_frame(8'h5A, 1'b0);
    check(ferr_cnt == 1 && rx_log.size() == 0, "framing error on low stop bit");
    // loopback
    loop = 1'b1;
    for (int n = 0; n < 10; n++) begin
      exp = 8'($urandom);
      send(exp);
      repeat (12 * DIV) @(posedge clk);
      check(rx_log.size() == 1 && rx_log[0] == exp, $sformatf("loopback byte %0d", n));
      rx_log.delete();
    end
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
