// tb_shm_top -- end-to-end test of the complete monitoring system at reduced
// size.
//
// The testbench plays the host computer and the board around the FPGA
// (board_model: DAC, receive path and ADC, SRAM). The sizes are shrunk so
// every path runs in a few thousand clocks: 2 receivers, 2 averages, a
// 40-sample record, decimation by 2 to 20-sample traces, a 4-sample window
// and a 3 x 4 pixel map; the serial link runs at 10 Mbaud and the burst at
// 2.5 MHz (a 20-entry table). The sequence is the published measurement
// flow:
//   0. a badly framed byte, then CMD_INFO (system information);
//   1. with the pipe intact, acquire every receiver (CMD_ACQ | ch over the
//      serial link); check each averaged trace against the logged ADC
//      conversions;
//   2. the same with the defect echo switched on in the board model;
//   3. decimate both data sets and upload them through the ld_* port;
//   4. CMD_RUN, wait for RSP_DONE; CMD_READ and compare every pixel with
//      the reference model (di_ref_pkg), and with the SRAM contents.
// Rates and latencies checked: ADC clock period (10 Msps), DAC update
// spacing and burst length (table length + 1 writes), serial bit time,
// shot-to-shot spacing (REC_SAMPLES + ADC_LAT + 1 ticks), clocks
// per pixel of the DI engine. Each mechanism is counted (shots, averaged
// shots, channel switches, serial bytes in and out, uploaded words, pixel
// writes to SRAM, SRAM reads, nonzero DI pixels, flagged framing errors, system
// information replies); one that never happened
// is a failure.
// The flow follows the paper; the reduced sizes are this testbench's.
module tb_shm_top;
  import shm_pkg::*;

  localparam int unsigned BAUD_T   = 10_000_000;
  localparam int unsigned NCH      = 2;
  localparam int unsigned NAVG     = 2;
  localparam int unsigned REC      = 40;
  localparam int unsigned DEPTH    = 64;
  localparam int unsigned LAT      = 2;
  localparam int unsigned FEXC     = 2_500_000;
  localparam int unsigned DEC      = 2;
  localparam int unsigned TL       = 20;
  localparam int unsigned W        = 4;
  localparam int unsigned NR       = 3;
  localparam int unsigned NC       = 4;
  localparam int unsigned DX       = 30;
  localparam int unsigned DZ       = 25;
  localparam int unsigned CIRC     = 90;
  localparam int unsigned RING     = 100;
  localparam int unsigned CMPS     = 100_000;
  localparam int unsigned BIT_CLK  = CLK_HZ / BAUD_T;
  localparam int unsigned TICK_CLK = CLK_HZ / FS_HZ;
  localparam int unsigned LUT_LEN  = (N_CYCLES * FS_HZ + FEXC / 2) / FEXC;
  localparam int unsigned SQ_W     = 24;           // engine square-root width for this geometry
  localparam int unsigned PIX_CLK  = NCH * (W + SQ_W / 2 + 5) + W + 1;
  localparam int unsigned DSAW     = $clog2(NCH * TL);

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        uart_rxd = 1'b1, uart_txd, uart_err;
  logic [11:0] dac_db;
  logic        dac_cs_n, dac_wr_n, adc_clk;
  logic [9:0]  adc_d;
  logic [0:0]  sw_sel;
  logic [18:0] sram_a;
  logic [7:0]  sram_dq_o, sram_dq_i;
  logic        sram_dq_oe, sram_ce_n, sram_oe_n, sram_we_n;
  logic        ld_we = 1'b0, ld_bank = 1'b0;
  logic [DSAW-1:0] ld_addr = '0;
  logic [15:0] ld_data = '0;
  logic        busy;
  logic        cond = 1'b0;

  int checks = 0, failures = 0;
  int sram_err0 = 0;

  shm_top #(
    .BAUD(BAUD_T), .N_CH(NCH), .N_AVG(NAVG), .REC_SAMPLES(REC), .ACQ_DEPTH(DEPTH),
    .ADC_LAT(LAT), .F_EXC_HZ(FEXC), .DECIM(DEC), .TRACE_LEN(TL), .WINDOW(W),
    .ROWS(NR), .COLS(NC), .DX_MM(DX), .DZ_MM(DZ), .CIRC_MM(CIRC), .RING_MM(RING),
    .C_MPS(CMPS)
  ) dut (.*);

  board_model #(.ADC_LAT(LAT), .MAX_CONV(1 << 16)) board (
    .clk, .rst_n, .cond, .dac_db, .dac_cs_n, .dac_wr_n, .adc_clk, .adc_d,
    .sw_sel({2'b00, sw_sel}), .sram_a, .sram_dq_o, .sram_dq_i, .sram_dq_oe,
    .sram_ce_n, .sram_oe_n, .sram_we_n
  );

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  // ---- host serial link ------------------------------------------------------
  logic [7:0] rxq [$];
  int  bytes_in = 0, bytes_out = 0, bit_time_bad = 0;
  task automatic host_send(input logic [7:0] b);
    logic [9:0] fr;
    fr = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      uart_rxd = fr[i];
      repeat (BIT_CLK) @(posedge clk);
    end
    bytes_in++;
  endtask

  initial forever begin
    logic [7:0] b;
    realtime t0;
    @(negedge uart_txd);
    t0 = $realtime;
    repeat (BIT_CLK / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      repeat (BIT_CLK) @(posedge clk);
      b[i] = uart_txd;
    end
    repeat (BIT_CLK) @(posedge clk);
    if (uart_txd !== 1'b1) bit_time_bad++;
    rxq.push_back(b);
    bytes_out++;
  end
  // every low run on the line lasts a whole number of bit times
  realtime sb_fall;
  int      sb_meas = 0;
  always @(negedge uart_txd) sb_fall = $realtime;
  always @(posedge uart_txd) if (rst_n && sb_meas < 1000) begin
    realtime len;
    len = $realtime - sb_fall;
    if ((int'(len) % (BIT_CLK * 10)) != 0) bit_time_bad++;
    sb_meas++;
  end

  task automatic host_recv(output logic [7:0] b);
    int guard = 0;
    while (rxq.size() == 0) begin
      @(posedge clk);
      guard++;
      if (guard > 200000) begin
        check(0, "host receive timeout");
        b = '0;
        return;
      end
    end
    b = rxq.pop_front();
  endtask

  int frame_errs = 0, infos = 0;
  always @(posedge clk) if (rst_n && uart_err) frame_errs++;

  // ---- rate monitors ---------------------------------------------------------
  realtime adc_last = 0;
  int      adc_edges = 0, adc_bad = 0;
  always @(posedge adc_clk) if (rst_n) begin
    if (adc_edges > 0 && ($realtime - adc_last) != real'(TICK_CLK * 10)) adc_bad++;
    adc_last = $realtime;
    adc_edges++;
  end

  realtime dac_last = 0;
  int      dac_bad_spacing = 0;
  logic    prev_wr = 1'b1;
  always @(posedge clk) begin
    if (rst_n && !prev_wr && dac_wr_n) begin
      realtime d;
      d = $realtime - dac_last;
      if (d < real'(3 * TICK_CLK * 10) && d != real'(TICK_CLK * 10)) dac_bad_spacing++;
      dac_last = $realtime;
    end
    prev_wr <= dac_wr_n;
  end

  // shots, averaging, channel routing
  int shots = 0, avg_shots = 0, sw_changes = 0, sw_bad = 0, cur_ch = 0;
  int shot_t [64];
  logic [0:0] sw_prev = '0;
  always @(posedge clk) begin
    if (rst_n && dut.shot_start) begin
      if (shots < 64) shot_t[shots] = int'($time / 10);
      shots++;
      if (!dut.shot_first) avg_shots++;
    end
    if (sw_sel != sw_prev) sw_changes++;
    sw_prev <= sw_sel;
  end
  always @(posedge adc_clk) if (dut.acq_busy && int'(sw_sel) != cur_ch) sw_bad++;

  // pixel handshakes of the engine
  int pix_hs = 0, pix_bad_gap = 0, last_pix = 0;
  always @(posedge clk) if (dut.pix_valid && dut.pix_ready) begin
    int now;
    now = int'($time / 10);
    if (pix_hs > 0 && now - last_pix != int'(PIX_CLK)) pix_bad_gap++;
    last_pix = now;
    pix_hs++;
  end

  // ---- test sequence -----------------------------------------------------------
  int bs [], dm [];
  int traces [2][NCH][REC];
  int uploads = 0, nonzero = 0;

  initial begin
    di_ref_pkg::geom_t g;
    logic [7:0] b0, b1, b2, b3;
    int s0;

    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (20) @(posedge clk);
    sram_err0 = board.u_sram.errors;   // pins are undefined before reset

    // a badly framed byte (stop bit low) is flagged and ignored
    begin
      logic [9:0] fr;
      fr = {1'b0, CMD_RUN, 1'b0};
      for (int i = 0; i < 10; i++) begin
        uart_rxd = fr[i];
        repeat (BIT_CLK) @(posedge clk);
      end
      uart_rxd = 1'b1;
      repeat (4 * BIT_CLK) @(posedge clk);
      check(frame_errs == 1, $sformatf("framing errors flagged %0d", frame_errs));
      check(!busy, "bad frame ignored");
    end

    // system information
    host_send(CMD_INFO);
    host_recv(b0); host_recv(b1); host_recv(b2); host_recv(b3);
    check(b0 == 8'(NCH) && b1 == 8'(NAVG) && {b3, b2} == 16'(REC),
          $sformatf("system information %02x %02x %02x %02x", b0, b1, b2, b3));
    infos++;

    // 1 and 2: acquisition of both conditions
    for (int c = 0; c < 2; c++) begin
      cond = 1'(c);
      for (int ch = 0; ch < int'(NCH); ch++) begin
        cur_ch = ch;
        s0 = board.bursts;
        host_send(CMD_ACQ | 8'(ch));
        for (int n = 0; n < int'(REC); n++) begin
          int sum;
          host_recv(b0);
          host_recv(b1);
          traces[c][ch][n] = int'({b1, b0});
          sum = 0;
          for (int s = 0; s < int'(NAVG); s++)
            sum += int'(board.conv_log[board.shot_label[s0 + s] + n]);
          check(traces[c][ch][n] == sum / int'(NAVG),
                $sformatf("cond %0d ch %0d sample %0d: got %0d expected %0d",
                          c, ch, n, traces[c][ch][n], sum / int'(NAVG)));
        end
        check(board.bursts == s0 + int'(NAVG), "one burst per shot");
        check(board.last_burst_len == int'(LUT_LEN) + 1 || board.burst_len == int'(LUT_LEN) + 1,
              $sformatf("burst length %0d", board.burst_len));
      end
    end
    check(board.peak > 3000 && board.trough < 1100, "DAC swing");
    // shot spacing inside one acquisition
    for (int s = 1; s < shots && s < 64; s++)
      if (s % int'(NAVG) != 0)
        // the first shot of a command starts at any tick phase, so it is
        // within one tick of a whole record ahead of the second
        check(shot_t[s] - shot_t[s-1] > int'((REC + LAT) * TICK_CLK) &&
              shot_t[s] - shot_t[s-1] < int'((REC + LAT + 2) * TICK_CLK),
              $sformatf("shot spacing %0d", shot_t[s] - shot_t[s-1]));

    // 3: decimate and upload
    bs = new[NCH * TL];
    dm = new[NCH * TL];
    for (int c = 0; c < 2; c++)
      for (int ch = 0; ch < int'(NCH); ch++)
        for (int n = 0; n < int'(TL); n++) begin
          @(negedge clk);
          ld_we   = 1'b1;
          ld_bank = 1'(c);
          ld_addr = DSAW'(ch * TL + n);
          ld_data = 16'(traces[c][ch][n * DEC]);
          if (c == 0) bs[ch * TL + n] = traces[c][ch][n * DEC];
          else        dm[ch * TL + n] = traces[c][ch][n * DEC];
          uploads++;
        end
    @(negedge clk) ld_we = 1'b0;

    // 4: compute the map and read it back
    host_send(CMD_RUN);
    host_recv(b0);
    check(b0 == RSP_DONE, $sformatf("run answer %02x", b0));
    check(pix_hs == int'(NR * NC), $sformatf("pixels produced %0d", pix_hs));
    host_send(CMD_READ);
    g = '{n_ch: NCH, trace_len: TL, window: W, dx: DX, dz: DZ, circ: CIRC, ring: RING,
          fs_dec: FS_HZ / DEC, c_mps: CMPS};
    for (int r = 0; r < int'(NR); r++)
      for (int c = 0; c < int'(NC); c++) begin
        longint unsigned ref_v;
        logic [31:0] got, mem_v;
        int a;
        ref_v = di_ref_pkg::di_pixel(g, r, c, bs, dm);
        host_recv(b0); host_recv(b1); host_recv(b2); host_recv(b3);
        got = {b3, b2, b1, b0};
        a = 4 * (r * int'(NC) + c);
        mem_v = {board.u_sram.mem[a+3], board.u_sram.mem[a+2],
                 board.u_sram.mem[a+1], board.u_sram.mem[a]};
        check(64'(got) == ref_v, $sformatf("pixel %0d,%0d: got %0d expected %0d", r, c, got, ref_v));
        check(mem_v == got, $sformatf("pixel %0d,%0d in SRAM %0d", r, c, mem_v));
        if (got != 0) nonzero++;
      end
    repeat (10) @(posedge clk);
    check(!busy, "idle at the end");

    // rates
    check(adc_bad == 0, $sformatf("ADC clock period errors %0d", adc_bad));
    check(dac_bad_spacing == 0, $sformatf("DAC update spacing errors %0d", dac_bad_spacing));
    check(bit_time_bad == 0, $sformatf("serial bit time errors %0d", bit_time_bad));
    check(pix_bad_gap == 0, $sformatf("pixel spacing errors %0d (expected %0d clocks)", pix_bad_gap, PIX_CLK));
    check(sw_bad == 0, $sformatf("conversions from the wrong receiver %0d", sw_bad));
    check(board.u_sram.errors == sram_err0, "SRAM protocol");

    // mechanisms
    $display("mechanisms: shots=%0d averaged=%0d bursts=%0d dac_writes=%0d switches=%0d bytes_in=%0d bytes_out=%0d uploads=%0d pixel_writes=%0d sram_reads=%0d nonzero_pixels=%0d frame_errors=%0d",
             shots, avg_shots, board.bursts, board.dac_writes, sw_changes, bytes_in, bytes_out,
             uploads, board.u_sram.writes / 4, board.u_sram.reads, nonzero, frame_errs);
    check(shots == int'(2 * NCH * NAVG), "shots fired");
    check(avg_shots == int'(2 * NCH * (NAVG - 1)), "shots averaged");
    check(board.bursts == shots, "bursts");
    check(board.dac_writes == shots * int'(LUT_LEN + 1), $sformatf("DAC writes %0d", board.dac_writes));
    check(sw_changes > 0, "receiver switching happened");
    check(bytes_in > 0, "serial input happened");
    check(bytes_out == int'(4 + 2 * NCH * REC * 2 + 1 + 4 * NR * NC), $sformatf("serial output %0d", bytes_out));
    check(uploads > 0, "data set upload happened");
    check(board.u_sram.writes == int'(4 * NR * NC), "pixel writes happened");
    check(board.u_sram.reads == int'(4 * NR * NC), "SRAM reads happened");
    check(nonzero > 0, "the defect shows in the map");
    check(frame_errs > 0, "framing error detection happened");
    check(infos > 0, "system information sent");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #5ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
