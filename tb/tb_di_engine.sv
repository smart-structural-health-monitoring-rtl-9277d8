// tb_di_engine -- self-checking test of the DI map engine.
//
// A small geometry (4 receivers, 60-sample traces, 12-sample window,
// 6 x 10 pixels of 15 mm x 10 mm, 90 mm circumference, 100 mm ring
// separation) keeps the run short while windows still run past the trace
// ends. A two-bank memory model answers one clock after each address. Three
// maps are computed: random traces with pix_ready randomly held low, a
// defect-like case, and full-scale traces that make the DI saturate.
// Every pixel's address and value is compared with di_ref_pkg, and with
// pix_ready held high the clocks per pixel must equal
// N_CH * (WINDOW + SQ_W/2 + 5) + WINDOW + 1.
// The algorithm follows the paper; the reduced geometry and the fixed-point
// reference are this design's.
module tb_di_engine;
  import di_ref_pkg::*;

  localparam int unsigned N_CH = 4, TL = 60, W = 12, ROWS = 6, COLS = 10;
  localparam int unsigned DX = 15, DZ = 10, CIRC = 90, RING = 100;
  localparam int unsigned FS = 1_000_000, C = 3130;
  localparam int unsigned SQ_W = 24;           // from the engine's size rule
  localparam int unsigned PIX_CLK = N_CH * (W + SQ_W / 2 + 5) + W + 1;

  logic        clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic        busy, done, pix_valid, pix_ready;
  logic [7:0]  mem_addr;
  logic [15:0] bs_data, dm_data;
  logic [5:0]  pix_addr;
  logic [31:0] pix_data;
  int checks = 0, failures = 0;

  di_engine #(.N_CH(N_CH), .TRACE_LEN(TL), .WINDOW(W), .ROWS(ROWS), .COLS(COLS),
              .DX_MM(DX), .DZ_MM(DZ), .CIRC_MM(CIRC), .RING_MM(RING),
              .FS_DEC_HZ(FS), .C_MPS(C), .SAMPLE_W(16), .DI_W(32)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  int bs [], dm [];
  always @(posedge clk) begin
    bs_data <= 16'(bs[mem_addr]);
    dm_data <= 16'(dm[mem_addr]);
  end

  bit stall_en = 1'b0;
  always @(negedge clk) pix_ready = stall_en ? ($urandom_range(3) == 0) : 1'b1;

  geom_t g;
  int    sat_seen = 0;

  task automatic run_map(input string tag, input bit timing);
    int npix, last_t, cyc;
    longint unsigned e;
    npix = 0; cyc = 0; last_t = 0;
    @(negedge clk) start = 1'b1;
    @(negedge clk) start = 1'b0;
    while (!done) begin
      @(posedge clk);
      cyc++;
      if (pix_valid && pix_ready) begin
        int r, c;
        r = npix / COLS; c = npix % COLS;
        e = di_pixel(g, r, c, bs, dm);
        if (e == 64'hFFFF_FFFF) sat_seen++;
        check(int'(pix_addr) == npix, $sformatf("%s pixel %0d address %0d", tag, npix, pix_addr));
        check(64'(pix_data) == e, $sformatf("%s pixel (%0d,%0d): got %0d expected %0d",
                                           tag, r, c, pix_data, e));
        if (timing && npix > 0)
          check(cyc - last_t == int'(PIX_CLK), $sformatf("%s clocks per pixel %0d", tag, cyc - last_t));
        last_t = cyc;
        npix++;
      end
    end
    check(npix == int'(ROWS * COLS), $sformatf("%s pixel count %0d", tag, npix));
  endtask

  initial begin
    g = '{n_ch: N_CH, trace_len: TL, window: W, dx: DX, dz: DZ, circ: CIRC,
          ring: RING, fs_dec: FS, c_mps: C};
    bs = new[N_CH * TL];
    dm = new[N_CH * TL];
    repeat (5) @(posedge clk);
    rst_n = 1'b1;

    // 1: random traces, random back-pressure
    foreach (bs[i]) begin
      bs[i] = int'($urandom_range(1023)) - 512;
      dm[i] = int'($urandom_range(1023)) - 512;
    end
    stall_en = 1'b1;
    run_map("random", 1'b0);

    // 2: damage trace differs from baseline only in a few samples
    foreach (bs[i]) begin bs[i] = int'($urandom_range(200)) - 100; dm[i] = bs[i]; end
    for (int m = 0; m < int'(N_CH); m++) dm[m * TL + 20 + m] += 300;
    stall_en = 1'b0;
    run_map("defect", 1'b1);

    // 3: full-scale traces saturate the 32-bit DI
    foreach (bs[i]) begin bs[i] = 32767; dm[i] = -32768; end
    run_map("saturate", 1'b0);
    check(sat_seen > 0, "saturation exercised");
    check(oor_count > 0, "window past trace end exercised");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
