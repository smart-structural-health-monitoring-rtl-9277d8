// board_model -- behavioural model of the front-end board around the FPGA,
// for system testbenches only.
//
// DAC: latches dac_db on each rising wr_n edge (cs_n was low), counts
// writes and bursts; a burst starts with a write more than 3 update ticks
// after the previous one.
// ADC and analog path: on every rising adc_clk edge after reset the model
// converts
//   v = 512 + (dac - 2048) / 8 + 20 * channel + noise + defect
// where dac is the latched DAC code (the excitation leaking straight
// through, a stand-in for the transducer and pipe), noise is +3 / -3 on
// alternate shots, and defect, only when `cond` is 1, adds a small burst on
// channel 1 between 8 and 15 samples after the shot start. Each conversion
// is logged by its label (the count of rising edges since reset) and
// appears on adc_d ADC_LAT edges later. The label of the conversion made at
// the tick the burst starts on is logged per shot in shot_label[].
// SRAM: a byte-wide asynchronous SRAM (sram_model).
// The signal shapes are test stimuli of this design, not measured data;
// the DAC and SRAM bus behaviour follows the parts named in the paper.
module board_model #(
  parameter int unsigned ADC_LAT = 6,
  parameter int unsigned MAX_CONV = 1 << 20,
  parameter int unsigned MAX_SHOT = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        cond,
  input  logic [11:0] dac_db,
  input  logic        dac_cs_n,
  input  logic        dac_wr_n,
  input  logic        adc_clk,
  output logic [9:0]  adc_d,
  input  logic [2:0]  sw_sel,
  input  logic [18:0] sram_a,
  input  logic [7:0]  sram_dq_o,
  output logic [7:0]  sram_dq_i,
  input  logic        sram_dq_oe,
  input  logic        sram_ce_n,
  input  logic        sram_oe_n,
  input  logic        sram_we_n
);

  // ---- DAC ---------------------------------------------------------------
  logic [11:0] dac_code = 12'd2048;
  int          dac_writes = 0, bursts = 0, burst_len = 0, last_burst_len = 0;
  int          peak = 0, trough = 4095;
  longint      last_wr_t = -1000000;
  int          conv_n = 0;             // next conversion label
  int          shot_label [MAX_SHOT];
  logic        prev_wr = 1'b1, prev_cs = 1'b1;
  int          tick_clk = 10;          // clocks per update tick, measured below
  always @(posedge clk) begin
    if (rst_n && !prev_wr && dac_wr_n && !prev_cs) begin
      dac_code = dac_db;
      dac_writes++;
      if ($time - last_wr_t > 3 * tick_clk * 10) begin
        if (bursts < int'(MAX_SHOT)) shot_label[bursts] = conv_n - 1;
        bursts++;
        last_burst_len = burst_len;
        burst_len = 0;
      end
      burst_len++;
      if (int'(dac_db) > peak) peak = int'(dac_db);
      if (int'(dac_db) < trough) trough = int'(dac_db);
      last_wr_t = $time;
    end
    prev_wr <= dac_wr_n;
    prev_cs <= dac_cs_n;
  end

  // ---- ADC -----------------------------------------------------------------
  logic [9:0] pipe [ADC_LAT + 1];
  logic [9:0] conv_log [MAX_CONV];
  initial for (int i = 0; i <= int'(ADC_LAT); i++) pipe[i] = '0;
  assign adc_d = pipe[ADC_LAT];

  function automatic int analog(int ch, int label);
    int v, rel;
    v = 512 + (int'(dac_code) - 2048) / 8 + 20 * ch + ((bursts % 2 == 1) ? 3 : -3);
    rel = label - ((bursts > 0 && bursts <= int'(MAX_SHOT)) ? shot_label[bursts - 1] : 0);
    if (cond && ch == 1 && rel >= 8 && rel < 16) v += (rel % 2 == 0) ? 60 : -40;
    if (v < 0) v = 0;
    if (v > 1023) v = 1023;
    return v;
  endfunction

  always @(posedge adc_clk) if (rst_n) begin
    int v;
    v = analog(int'(sw_sel), conv_n);
    for (int i = ADC_LAT; i > 0; i--) pipe[i] <= pipe[i-1];
    pipe[0] <= 10'(v);
    if (conv_n < int'(MAX_CONV)) conv_log[conv_n] = 10'(v);
    conv_n = conv_n + 1;
  end

  // ---- SRAM ---------------------------------------------------------------
  sram_model #(.ADDR_W(19)) u_sram (
    .a(sram_a), .dq_o(sram_dq_o), .dq_i(sram_dq_i), .dq_oe(sram_dq_oe),
    .ce_n(sram_ce_n), .oe_n(sram_oe_n), .we_n(sram_we_n)
  );

endmodule
