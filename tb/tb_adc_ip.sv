// tb_adc_ip -- self-checking test of the acquisition and averaging block.
//
// An ADC model with an ADC_LAT-clock pipeline converts, on each rising edge
// of adc_clk, a test signal g(k, channel) where k numbers the sample ticks
// since reset; shots start at random times, so the averaged shots differ. The test runs N_AVG shots on each of two
// channels (first = 1 only on the first shot), checks the switch select,
// the shot length in sample ticks (REC_SAMPLES + ADC_LAT + 1) and every
// averaged word against the average worked out here.
// Sizes are reduced (N_AVG 3, 50-sample record); the averaging and 10 Msps
// rate follow the paper, the latency model is this design's assumption.
module tb_adc_ip;
  localparam int unsigned CLK_HZ = 100_000_000, FS_HZ = 10_000_000;
  localparam int unsigned DIV = CLK_HZ / FS_HZ;
  localparam int unsigned N_CH = 8, N_AVG = 3, REC = 50, DEPTH = 64, LAT = 2;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic [2:0]  ch_sel = '0;
  logic        start = 1'b0, first = 1'b0;
  logic        busy, done, sample_tick, adc_clk;
  logic [5:0]  rd_addr = '0;
  logic [15:0] rd_avg;
  logic [9:0]  adc_d;
  logic [2:0]  sw_sel;
  int checks = 0, failures = 0;

  adc_ip #(.CLK_HZ(CLK_HZ), .FS_HZ(FS_HZ), .N_CH(N_CH), .N_AVG(N_AVG),
           .REC_SAMPLES(REC), .ACQ_DEPTH(DEPTH), .ADC_LAT(LAT)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic int g(int n, int ch);
    return (n * 7 + ch * 101 + (n * n) % 13) % 1024;
  endfunction

  // Sample ticks are numbered from 0 after reset. The conversion made at the
  // rising adc_clk edge that ends tick k carries label k and converts
  // g(k, channel); the model outputs it ADC_LAT edges later.
  int  tick_abs = 0;
  logic waiting = 1'b0;
  int  shot_tick [N_AVG];     // first tick the DUT counts for each shot
  int  cur_shot = 0;
  logic [9:0] pipe [LAT + 1];
  initial for (int i = 0; i <= int'(LAT); i++) pipe[i] = '0;
  assign adc_d = pipe[LAT];
  int conv_n = 0;             // rising edges since reset = label
  always @(posedge adc_clk) if (rst_n) begin
    for (int i = LAT; i > 0; i--) pipe[i] <= pipe[i-1];
    pipe[0] <= 10'(g(conv_n, int'(sw_sel)));
    conv_n = conv_n + 1;
  end
  always @(posedge clk) begin
    if (start) waiting <= 1'b1;
    if (sample_tick && waiting) begin
      shot_tick[cur_shot] <= tick_abs;
      waiting <= 1'b0;
    end
    if (sample_tick) tick_abs <= tick_abs + 1;
  end

  initial begin
    int tk;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    for (int c = 0; c < 2; c++) begin
      int ch;
      ch = (c == 0) ? 5 : 2;
      for (int s = 0; s < int'(N_AVG); s++) begin
        // start right after a tick so that the next tick is index 0
        repeat ($urandom_range(12)) @(posedge clk);
        @(negedge clk);
        start = 1'b1; first = (s == 0); ch_sel = 3'(ch);
        cur_shot = s;
        @(negedge clk) start = 1'b0;
        tk = 0;
        while (!done) begin
          @(posedge clk);
          if (sample_tick) tk++;
        end
        check(tk == int'(REC + LAT + 1), $sformatf("shot length %0d ticks", tk));
        check(sw_sel == 3'(ch), "switch select");
        repeat (3) @(posedge clk);
      end
      for (int n = 0; n < int'(REC); n++) begin
        int sum;
        sum = 0;
        for (int s = 0; s < int'(N_AVG); s++) sum += g(shot_tick[s] + n, ch);
        @(negedge clk) rd_addr = 6'(n);
        @(posedge clk); #1;
        check(int'(rd_avg) == sum / int'(N_AVG),
              $sformatf("ch %0d sample %0d: got %0d expected %0d", ch, n, rd_avg, sum / int'(N_AVG)));
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
