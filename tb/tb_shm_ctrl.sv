// tb_shm_ctrl -- self-checking test of the command sequencer.
//
// The sequencer's neighbours are modelled at their handshakes: a byte-level
// host (rx_valid strobes, tx_ready randomly low), an acquisition unit that
// ends each shot after a random delay and returns f(address) one clock
// after acq_rd_addr, a DI engine that offers ROWS*COLS random pixels, and a
// word memory with a 3-clock access. The test sends CMD_ACQ for two
// channels, two invalid bytes, CMD_INFO, CMD_RUN and CMD_READ, and checks the shot
// count and first-shot flag, the channel, every byte sent to the host, the
// words written to memory, the system information and the RSP_DONE reply.
// The command bytes and handshakes checked are this design's choices; the
// averaging and acquire / compute / store / send order follow the paper.
module tb_shm_ctrl;
  localparam int unsigned N_CH = 8, N_AVG = 3, REC = 10, DEPTH = 16;
  localparam int unsigned ROWS = 3, COLS = 4, NPIX = ROWS * COLS, MEM_AW = 8;

  logic        clk = 1'b0, rst_n = 1'b0;
  logic        rx_valid = 1'b0;
  logic [7:0]  rx_data = '0, tx_data;
  logic        tx_valid, tx_ready;
  logic [2:0]  ch_sel;
  logic        shot_start, shot_first, acq_done = 1'b0;
  logic [3:0]  acq_rd_addr;
  logic [15:0] acq_rd_avg;
  logic        eng_start, eng_done = 1'b0, pix_valid = 1'b0, pix_ready;
  logic [3:0]  pix_addr = '0;
  logic [31:0] pix_data = '0;
  logic        mem_req, mem_we, mem_ready, mem_rvalid;
  logic [MEM_AW-1:0] mem_addr;
  logic [31:0] mem_wdata, mem_rdata;
  logic        busy;
  int checks = 0, failures = 0;

  shm_ctrl #(.N_CH(N_CH), .N_AVG(N_AVG), .REC_SAMPLES(REC), .ACQ_DEPTH(DEPTH),
             .ROWS(ROWS), .COLS(COLS), .MEM_AW(MEM_AW)) dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL %s", what);
    end
  endtask

  function automatic logic [15:0] f(int a);
    return 16'(a * 1234 + 77);
  endfunction

  // host side
  logic [7:0] txq [$];
  always @(negedge clk) tx_ready = ($urandom_range(2) != 0);
  always @(posedge clk) if (tx_valid && tx_ready) txq.push_back(tx_data);

  task automatic host_send(input logic [7:0] b);
    @(negedge clk) begin rx_valid = 1'b1; rx_data = b; end
    @(negedge clk) rx_valid = 1'b0;
  endtask

  // acquisition model: done a random 20..40 clocks after each shot start
  int shots = 0, firsts = 0, bad_first = 0, acq_cnt = 0;
  always @(posedge clk) begin
    acq_rd_avg <= f(int'(acq_rd_addr));
    acq_done   <= 1'b0;
    if (shot_start) begin
      if (shot_first != (shots == 0)) bad_first++;
      if (shot_first) firsts++;
      shots++;
      acq_cnt <= int'($urandom_range(40, 20));
    end else if (acq_cnt > 0) begin
      acq_cnt <= acq_cnt - 1;
      if (acq_cnt == 1) acq_done <= 1'b1;
    end
  end

  // engine model: NPIX random pixels with random gaps, then done
  logic [31:0] pix [NPIX];
  int  eng_idx = 0, eng_gap = 0;
  logic eng_run = 1'b0;
  always @(posedge clk) begin
    eng_done <= 1'b0;
    if (!rst_n) begin
      pix_valid <= 1'b0;
    end else if (eng_start) begin
      pix_valid <= 1'b0;
      eng_run <= 1'b1;
      eng_idx <= 0;
      eng_gap <= 1;
    end else if (eng_run) begin
      if (pix_valid) begin
        if (pix_ready) begin
          pix_valid <= 1'b0;
          eng_idx   <= eng_idx + 1;
          eng_gap   <= int'($urandom_range(3)) + 1;
        end
      end else if (eng_idx == int'(NPIX)) begin
        eng_run  <= 1'b0;
        eng_done <= 1'b1;
      end else if (eng_gap > 1) begin
        eng_gap <= eng_gap - 1;
      end else begin
        pix[eng_idx] = $urandom;
        pix_valid <= 1'b1;
        pix_addr  <= 4'(eng_idx);
        pix_data  <= pix[eng_idx];
      end
    end
  end

  // word memory model, 3-clock access
  logic [31:0] wmem [1 << MEM_AW];
  int mem_busy = 0, wr_cnt = 0;
  logic pend_rd = 1'b0;
  logic [MEM_AW-1:0] pend_a;
  assign mem_ready = (mem_busy == 0);
  always @(posedge clk) begin
    mem_rvalid <= 1'b0;
    if (mem_busy > 0) begin
      mem_busy <= mem_busy - 1;
      if (mem_busy == 1 && pend_rd) begin
        mem_rvalid <= 1'b1;
        mem_rdata  <= wmem[pend_a];
        pend_rd    <= 1'b0;
      end
    end else if (rst_n && mem_req) begin
      mem_busy <= 3;
      if (mem_we) begin wmem[mem_addr] <= mem_wdata; wr_cnt++; end
      else begin pend_rd <= 1'b1; pend_a <= mem_addr; end
    end
  end

  initial begin
    int t;
    foreach (wmem[i]) wmem[i] = '0;
    repeat (5) @(posedge clk);
    rst_n = 1'b1;
    repeat (3) @(posedge clk);

    // acquisitions on channels 6 and 1
    for (int c = 0; c < 2; c++) begin
      int ch;
      ch = (c == 0) ? 6 : 1;
      shots = 0; firsts = 0; bad_first = 0; txq.delete();
      host_send(8'h10 | 8'(ch));
      @(negedge clk);
      check(busy, "busy during acquisition");
      t = 0;
      while (busy && t < 20000) begin @(posedge clk); t++; end
      check(ch_sel == 3'(ch), $sformatf("channel select %0d", ch_sel));
      check(shots == int'(N_AVG) && firsts == 1 && bad_first == 0,
            $sformatf("shots %0d, first flags %0d", shots, firsts));
      check(txq.size() == 2 * int'(REC), $sformatf("trace bytes %0d", txq.size()));
      for (int i = 0; i < int'(REC) && 2 * i + 1 < txq.size(); i++)
        check({txq[2*i+1], txq[2*i]} == f(i), $sformatf("trace sample %0d", i));
    end

    // invalid command bytes are ignored
    txq.delete();
    host_send(8'h18);          // channel 8 does not exist
    host_send(8'h77);
    repeat (20) @(posedge clk);
    check(!busy && txq.size() == 0 && shots == int'(N_AVG), "invalid bytes ignored");

    // system information
    txq.delete();
    host_send(8'h40);
    t = 0;
    while (busy && t < 20000) begin @(posedge clk); t++; end
    repeat (5) @(posedge clk);
    check(txq.size() == 4 && txq[0] == 8'(N_CH) && txq[1] == 8'(N_AVG) &&
          {txq[3], txq[2]} == 16'(REC), $sformatf("system information (%0d bytes)", txq.size()));

    // DI map run
    txq.delete();
    host_send(8'h20);
    t = 0;
    while (busy && t < 20000) begin @(posedge clk); t++; end
    repeat (30) @(posedge clk);
    check(wr_cnt == int'(NPIX), $sformatf("pixel writes %0d", wr_cnt));
    for (int i = 0; i < int'(NPIX); i++)
      check(wmem[i] == pix[i], $sformatf("pixel %0d in memory", i));
    check(txq.size() == 1 && txq[0] == 8'hA5, "RSP_DONE after run");

    // DI map read-back
    txq.delete();
    host_send(8'h30);
    @(negedge clk);
    t = 0;
    while (busy && t < 20000) begin @(posedge clk); t++; end
    repeat (5) @(posedge clk);
    check(txq.size() == 4 * int'(NPIX), $sformatf("read-back bytes %0d", txq.size()));
    for (int i = 0; i < int'(NPIX) && 4 * i + 3 < txq.size(); i++)
      check({txq[4*i+3], txq[4*i+2], txq[4*i+1], txq[4*i]} == pix[i],
            $sformatf("read-back pixel %0d", i));

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
