// tb_dac_ip -- self-checking test of the excitation burst generator.
//
// A DAC7821 bus model latches dac_db on every rising edge of wr_n while
// cs_n is low. The test fires the burst twice and compares each latched code
// with the Hanning-windowed sine worked out here from the burst formula
// (5 cycles at 75 kHz, 10 MS/s update rate, offset-binary 12-bit codes),
// checks the final mid-scale code, the number of writes, and that done
// comes LUT_LEN + 1 update ticks after start. It also checks that data is
// stable while the write strobe is low.
// Burst shape, frequency, cycle count and width are the paper's; the bus
// strobe timing checked is this design's choice.
module tb_dac_ip;
  localparam int unsigned DIV     = 10;            // clocks per update tick
  localparam int unsigned UPD_HZ  = 10_000_000;
  localparam int unsigned F_HZ    = 75_000;
  localparam int unsigned NCYC    = 5;
  localparam int unsigned LUT_LEN = 667;           // 5 / 75 kHz * 10 MS/s

  logic        clk = 1'b0, rst_n = 1'b0, upd_tick = 1'b0, start = 1'b0;
  logic        busy, done, dac_cs_n, dac_wr_n;
  logic [11:0] dac_db;
  int checks = 0, failures = 0;
  int cnt = 0;

  dac_ip #(.UPD_HZ(UPD_HZ), .F_EXC_HZ(F_HZ), .N_CYCLES(NCYC)) dut (.*);

  always #5 clk = ~clk;
  always @(posedge clk) begin
    cnt      <= (cnt == DIV - 1) ? 0 : cnt + 1;
    upd_tick <= (cnt == DIV - 2);
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int expected(int i);
    real t, h, pi;
    pi = 3.14159265358979323846;
    if (i >= int'(LUT_LEN)) return 2048;
    t = real'(i) / real'(UPD_HZ);
    h = 0.5 * (1.0 - $cos(2.0 * pi * F_HZ * t / NCYC)) * $sin(2.0 * pi * F_HZ * t) * 2047.0;
    return 2048 + ((h >= 0.0) ? int'($floor(h + 0.5)) : -int'($floor(-h + 0.5)));
  endfunction

  // DAC model: latch on rising wr_n (cs_n was low)
  int          nwr;
  logic [11:0] latched [LUT_LEN + 1];
  logic        prev_wr = 1'b1, prev_cs = 1'b1;
  int          stable_err = 0;
  logic [11:0] db_at_fall;
  always @(posedge clk) begin
    if (prev_wr && !dac_wr_n) db_at_fall <= dac_db;
    if (!dac_wr_n && dac_db != db_at_fall && !prev_wr) stable_err++;
    if (!prev_wr && dac_wr_n && !prev_cs) begin
      if (nwr <= int'(LUT_LEN)) latched[nwr] = dac_db;
      nwr++;
    end
    prev_wr <= dac_wr_n;
    prev_cs <= dac_cs_n;
  end

  int ticks;
  always @(posedge clk) if (upd_tick && busy) ticks++;

  initial begin
    int maxc, minc;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    check(dac_db == 12'd2048 && dac_cs_n && dac_wr_n, "idle outputs after reset");
    for (int rep = 0; rep < 2; rep++) begin
      repeat (13) @(posedge clk);
      nwr = 0; ticks = 0; stable_err = 0;
      @(negedge clk) start = 1'b1;
      @(negedge clk) start = 1'b0;
      check(busy, "busy after start");
      @(posedge done);
      repeat (DIV) @(posedge clk);     // last strobe completes
      check(ticks == int'(LUT_LEN) + 1, $sformatf("ticks to done %0d", ticks));
      check(nwr == int'(LUT_LEN) + 1, $sformatf("number of DAC writes %0d", nwr));
      maxc = 0; minc = 4095;
      for (int i = 0; i <= int'(LUT_LEN); i++) begin
        int e;
        e = expected(i);
        if (int'(latched[i]) > maxc) maxc = int'(latched[i]);
        if (int'(latched[i]) < minc) minc = int'(latched[i]);
        check(int'(latched[i]) == e, $sformatf("code %0d: got %0d expected %0d", i, latched[i], e));
      end
      check(maxc > 3900 && minc < 200, $sformatf("burst swing %0d..%0d", minc, maxc));
      check(stable_err == 0, "data stable while wr_n low");
      check(!busy && dac_db == 12'd2048, "mid-scale after burst");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (40000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
