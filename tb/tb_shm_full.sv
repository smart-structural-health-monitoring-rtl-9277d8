// tb_shm_full -- full-size test of the monitoring system with every
// parameter at its default (8 receivers, 10 averages, 6000-sample records
// at 10 Msps, 230400 baud, 600-sample decimated traces, 600-sample window,
// 180 x 400 pixel map on a 360 mm x 400 mm pipe section).
//
// 1. Acquisition: CMD_ACQ for receiver 3 over the serial link; all 6000
//    averaged samples are checked against the conversions logged by the
//    board model; the shot count, burst length (667 + 1 DAC writes) and
//    shot spacing (6007 ticks, the first shot
//    starting at any tick phase) are checked.
// 2. A synthetic data set is uploaded through the ld_* port: in both
//    conditions every receiver sees the direct arrival (a 5-cycle Hanning
//    burst at 75 kHz, 1 Msps, 128 us after excitation); in the damaged
//    condition each receiver also sees a smaller echo from a point defect
//    at x = 90 mm, z = 200 mm, starting at the sample where the engine's
//    window for that pixel opens.
// 3. CMD_RUN; the map must be complete (RSP_DONE) after 72 000 pixels of
//    5553 clocks each (within 0.1 %). Every pixel is compared through the
//    SRAM contents with the reference model. The brightest pixel must lie
//    within 10 mm of the defect around the pipe, and the defect pixel must
//    reach at least 90 % of the brightest value (windows that open early
//    still hold the whole echo, so the map is a streak along z).
// Reading the map back over the serial link (288 KB, about 12.5 s at
// 230400 baud) is left to the reduced-size test.
// All sizes are the paper's or the design defaults; the data set is
// synthetic.
module tb_shm_full;
  import shm_pkg::*;

  localparam int unsigned BIT_CLK  = (CLK_HZ + BAUD / 2) / BAUD;
  localparam int unsigned TICK_CLK = CLK_HZ / FS_HZ;
  localparam int unsigned LUT_LEN  = (N_CYCLES * FS_HZ + F_EXC_HZ / 2) / F_EXC_HZ;
  localparam int unsigned PIX_CLK  = N_CH * (WINDOW + 28 / 2 + 5) + WINDOW + 1;
  localparam int unsigned NPIX     = DI_ROWS * DI_COLS;
  localparam int unsigned DSAW     = $clog2(N_CH * TRACE_LEN);
  localparam int unsigned ACQ_CH   = 3;
  localparam int          DEF_ROW  = 45;    // x = 90 mm
  localparam int          DEF_COL  = 200;   // z = 200 mm

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        uart_rxd = 1'b1, uart_txd, uart_err;
  logic [11:0] dac_db;
  logic        dac_cs_n, dac_wr_n, adc_clk;
  logic [9:0]  adc_d;
  logic [2:0]  sw_sel;
  logic [18:0] sram_a;
  logic [7:0]  sram_dq_o, sram_dq_i;
  logic        sram_dq_oe, sram_ce_n, sram_oe_n, sram_we_n;
  logic        ld_we = 1'b0, ld_bank = 1'b0;
  logic [DSAW-1:0] ld_addr = '0;
  logic [15:0] ld_data = '0;
  logic        busy;
  logic        cond = 1'b1;

  int checks = 0, failures = 0;
  int sram_err0 = 0;

  shm_top dut (.*);

  board_model #(.ADC_LAT(ADC_LAT), .MAX_CONV(1 << 17)) board (
    .clk, .rst_n, .cond, .dac_db, .dac_cs_n, .dac_wr_n, .adc_clk, .adc_d, .sw_sel,
    .sram_a, .sram_dq_o, .sram_dq_i, .sram_dq_oe, .sram_ce_n, .sram_oe_n, .sram_we_n
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
  task automatic host_send(input logic [7:0] b);
    logic [9:0] fr;
    fr = {1'b1, b, 1'b0};
    for (int i = 0; i < 10; i++) begin
      uart_rxd = fr[i];
      repeat (BIT_CLK) @(posedge clk);
    end
  endtask

  initial forever begin
    logic [7:0] b;
    @(negedge uart_txd);
    repeat (BIT_CLK / 2) @(posedge clk);
    for (int i = 0; i < 8; i++) begin
      repeat (BIT_CLK) @(posedge clk);
      b[i] = uart_txd;
    end
    repeat (BIT_CLK) @(posedge clk);
    if (rst_n) rxq.push_back(b);
  end

  task automatic host_recv(output logic [7:0] b);
    while (rxq.size() == 0) @(posedge clk);
    b = rxq.pop_front();
  endtask

  // shots
  int shots = 0, avg_shots = 0;
  longint shot_t [16];
  always @(posedge clk) if (rst_n && dut.shot_start) begin
    if (shots < 16) shot_t[shots] = $time / 10;
    shots++;
    if (!dut.shot_first) avg_shots++;
  end

  // ---- synthetic data set ------------------------------------------------------
  function automatic real burst(int n);
    real t, pi;
    int  len;
    pi  = 3.14159265358979;
    len = int'(real'(N_CYCLES) * real'(FS_DEC_HZ) / real'(F_EXC_HZ));
    if (n < 0 || n >= len) return 0.0;
    t = real'(n) / real'(FS_DEC_HZ);
    return 0.5 * (1.0 - $cos(2.0 * pi * real'(n) / real'(len))) * $sin(2.0 * pi * real'(F_EXC_HZ) * t);
  endfunction

  // window start of receiver m for a pixel, same fixed point as the engine
  function automatic int win_start(int row, int col, int m);
    longint k, x, z, xr, d2, d16;
    k   = longint'($floor(65536.0 * real'(FS_DEC_HZ) / (1000.0 * real'(C_MPS)) + 0.5));
    x   = row * DX_MM;
    z   = col * DZ_MM;
    xr  = (m * CIRC_MM) / N_CH;
    d2  = (x - xr) * (x - xr) + (z - RING_MM) * (z - RING_MM);
    d16 = longint'($floor($sqrt(256.0 * real'(d2))));
    return int'(((16 * z + d16) * k + (1 << 19)) >> 20);
  endfunction

  int bs [], dm [];

  initial begin
    di_ref_pkg::geom_t g;
    logic [7:0] b0, b1;
    longint t_run, t_done, best_v;
    int best_r, best_c, nonzero, bad;

    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (20) @(posedge clk);
    sram_err0 = board.u_sram.errors;   // pins are undefined before reset

    // 1: one full-size acquisition
    host_send(CMD_ACQ | 8'(ACQ_CH));
    bad = 0;
    for (int n = 0; n < int'(REC_SAMPLES); n++) begin
      int sum, got;
      host_recv(b0);
      host_recv(b1);
      got = int'({b1, b0});
      sum = 0;
      for (int s = 0; s < int'(N_AVG); s++)
        sum += int'(board.conv_log[board.shot_label[s] + n]);
      if (got != sum / int'(N_AVG)) begin
        bad++;
        if (bad < 5) $display("sample %0d: got %0d expected %0d", n, got, sum / int'(N_AVG));
      end
    end
    check(bad == 0, $sformatf("%0d of %0d averaged samples wrong", bad, REC_SAMPLES));
    check(shots == int'(N_AVG) && avg_shots == int'(N_AVG) - 1,
          $sformatf("shots %0d averaged %0d", shots, avg_shots));
    check(board.bursts == int'(N_AVG), $sformatf("bursts %0d", board.bursts));
    check(board.dac_writes == int'(N_AVG * (LUT_LEN + 1)), $sformatf("DAC writes %0d", board.dac_writes));
    check(int'(sw_sel) == int'(ACQ_CH), "receiver routed");
    for (int s = 1; s < int'(N_AVG); s++)
      check(s == 1 ? (shot_t[s] - shot_t[s-1] >  longint'((REC_SAMPLES + ADC_LAT) * TICK_CLK) &&
                      shot_t[s] - shot_t[s-1] <  longint'((REC_SAMPLES + ADC_LAT + 2) * TICK_CLK))
                   : shot_t[s] - shot_t[s-1] == longint'((REC_SAMPLES + ADC_LAT + 1) * TICK_CLK),
            $sformatf("shot spacing %0d", shot_t[s] - shot_t[s-1]));

    // 2: synthetic data set with a point defect
    bs = new[N_CH * TRACE_LEN];
    dm = new[N_CH * TRACE_LEN];
    for (int m = 0; m < int'(N_CH); m++) begin
      int sn;
      sn = win_start(DEF_ROW, DEF_COL, m);
      for (int n = 0; n < int'(TRACE_LEN); n++) begin
        bs[m * TRACE_LEN + n] = 512 + int'($floor(100.0 * burst(n - 128) + 0.5));
        dm[m * TRACE_LEN + n] = bs[m * TRACE_LEN + n] + int'($floor(40.0 * burst(n - sn) + 0.5));
      end
    end
    for (int c = 0; c < 2; c++)
      for (int i = 0; i < int'(N_CH * TRACE_LEN); i++) begin
        @(negedge clk);
        ld_we   = 1'b1;
        ld_bank = 1'(c);
        ld_addr = DSAW'(i);
        ld_data = 16'(c == 0 ? bs[i] : dm[i]);
      end
    @(negedge clk) ld_we = 1'b0;

    // 3: compute the map
    host_send(CMD_RUN);
    t_run = $time / 10;
    host_recv(b0);
    t_done = $time / 10;
    check(b0 == RSP_DONE, $sformatf("run answer %02x", b0));
    $display("map time %0d clocks (%0d per pixel)", t_done - t_run, (t_done - t_run) / NPIX);
    check(t_done - t_run >= longint'(NPIX) * PIX_CLK &&
          t_done - t_run <= longint'(NPIX) * PIX_CLK + longint'(NPIX) * PIX_CLK / 1000,
          $sformatf("map time %0d, expected about %0d", t_done - t_run, longint'(NPIX) * PIX_CLK));
    check(board.u_sram.writes == int'(4 * NPIX), $sformatf("SRAM byte writes %0d", board.u_sram.writes));
    check(board.u_sram.errors == sram_err0, "SRAM protocol");

    g = '{n_ch: N_CH, trace_len: TRACE_LEN, window: WINDOW, dx: DX_MM, dz: DZ_MM,
          circ: CIRC_MM, ring: RING_MM, fs_dec: FS_DEC_HZ, c_mps: C_MPS};
    bad = 0;
    nonzero = 0;
    best_v = -1;
    best_r = 0;
    best_c = 0;
    for (int r = 0; r < int'(DI_ROWS); r++)
      for (int c = 0; c < int'(DI_COLS); c++) begin
        longint unsigned ref_v;
        logic [31:0] mem_v;
        int a;
        ref_v = di_ref_pkg::di_pixel(g, r, c, bs, dm);
        a = 4 * (r * int'(DI_COLS) + c);
        mem_v = {board.u_sram.mem[a+3], board.u_sram.mem[a+2],
                 board.u_sram.mem[a+1], board.u_sram.mem[a]};
        if (64'(mem_v) != ref_v) begin
          bad++;
          if (bad < 5) $display("pixel %0d,%0d: %0d expected %0d", r, c, mem_v, ref_v);
        end
        if (mem_v != 0) nonzero++;
        if (longint'(mem_v) > best_v) begin
          best_v = longint'(mem_v);
          best_r = r;
          best_c = c;
        end
      end
    $display("brightest pixel row %0d col %0d (x %0d mm, z %0d mm) DI %0d; nonzero %0d",
             best_r, best_c, best_r * DX_MM, best_c * DZ_MM, best_v, nonzero);
    check(bad == 0, $sformatf("%0d of %0d pixels differ from the reference", bad, NPIX));
    check(nonzero > 0, "map not empty");
    begin
      int a;
      longint def_v;
      a = 4 * (DEF_ROW * int'(DI_COLS) + DEF_COL);
      def_v = longint'({board.u_sram.mem[a+3], board.u_sram.mem[a+2],
                        board.u_sram.mem[a+1], board.u_sram.mem[a]});
      $display("defect pixel DI %0d (%0d %% of the brightest)", def_v, def_v * 100 / best_v);
      check((best_r - DEF_ROW) * int'(DX_MM) <= 10 && (DEF_ROW - best_r) * int'(DX_MM) <= 10,
            "defect located within 10 mm around the pipe");
      check(def_v * 10 >= best_v * 9, "defect pixel near the peak");
    end
    check(!busy, "idle at the end");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #6000ms;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1);
    $finish;
  end
endmodule
