// adc_ip -- receiver acquisition for one PZT channel at a time.
//
// The block clocks a MAX1426-type 10-bit parallel ADC at FS_HZ, routes the
// requested receiver channel to it through the on-board analog switch
// (sw_sel), and records one shot of REC_SAMPLES samples into a block-RAM
// acquisition buffer of ACQ_DEPTH words. Shots are averaged in place: the
// first shot of a measurement overwrites the buffer, every later shot is
// added to it by a read-modify-write, and the read port returns the running
// sum divided by N_AVG. The published system records channels in sequence
// through switches, averages 10 shots and keeps up to 800 us of data in
// block RAM; the in-place running sum, the divider by a constant on the
// read side and the handshake below are this design's choices.
//
// Timing. adc_clk is CLK_HZ/FS_HZ system clocks long, high for the first
// half. sample_tick pulses for one clock at the end of each ADC clock period
// and is shared with the DAC IP. sw_sel follows ch_sel while no shot runs,
// so the channel must be chosen before `start`. `start` (with `first`)
// begins a shot; tick 0 is the first tick after it. Buffer word i holds the
// conversion made at the rising adc_clk edge that ends tick i; the ADC
// delivers it ADC_LAT ticks later, so the block skips the first
// ADC_LAT + 1 words it sees. `done` pulses when the last sample is handled
// (its write lands one clock later); a shot takes REC_SAMPLES + ADC_LAT + 1
// ticks. While not busy, rd_addr selects a word and rd_avg returns its
// average one clock later.
module adc_ip #(
  parameter int unsigned CLK_HZ      = shm_pkg::CLK_HZ,
  parameter int unsigned FS_HZ       = shm_pkg::FS_HZ,
  parameter int unsigned ADC_W       = shm_pkg::ADC_W,
  parameter int unsigned SAMPLE_W    = shm_pkg::SAMPLE_W,
  parameter int unsigned N_CH        = shm_pkg::N_CH,
  parameter int unsigned N_AVG       = shm_pkg::N_AVG,
  parameter int unsigned REC_SAMPLES = shm_pkg::REC_SAMPLES,
  parameter int unsigned ACQ_DEPTH   = shm_pkg::ACQ_DEPTH,
  parameter int unsigned ADC_LAT     = shm_pkg::ADC_LAT,
  localparam int unsigned DIV        = CLK_HZ / FS_HZ,
  localparam int unsigned AW         = $clog2(ACQ_DEPTH),
  localparam int unsigned CW         = (N_CH > 1) ? $clog2(N_CH) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  // control
  input  logic [CW-1:0]       ch_sel,
  input  logic                start,
  input  logic                first,
  output logic                busy,
  output logic                done,
  output logic                sample_tick,
  // averaged trace read-out
  input  logic [AW-1:0]       rd_addr,
  output logic [SAMPLE_W-1:0] rd_avg,
  // board
  output logic                adc_clk,
  input  logic [ADC_W-1:0]    adc_d,
  output logic [CW-1:0]       sw_sel
);

  localparam int unsigned DW = $clog2(DIV);

  // ADC clock and sample tick
  logic [DW-1:0] div_cnt;
  always_ff @(posedge clk) begin
    if (!rst_n) div_cnt <= '0;
    else        div_cnt <= (div_cnt == DW'(DIV - 1)) ? '0 : div_cnt + 1'b1;
  end
  assign adc_clk     = (div_cnt < DW'(DIV / 2));
  assign sample_tick = (div_cnt == DW'(DIV - 1));

  // acquisition buffer
  logic                we;
  logic [AW-1:0]       waddr, raddr;
  logic [SAMPLE_W-1:0] wdata, rdata;

  bram #(.DEPTH(ACQ_DEPTH), .WIDTH(SAMPLE_W)) u_buf (
    .clk, .we, .waddr, .wdata, .raddr, .rdata
  );

  logic [$clog2(ADC_LAT + 2)-1:0] skip;
  logic [AW-1:0]                  idx;
  logic                           first_q;
  logic                           rmw;
  logic [ADC_W-1:0]               smp_q;

  assign raddr = busy ? idx : rd_addr;
  assign rd_avg = SAMPLE_W'(rdata / SAMPLE_W'(N_AVG));

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy    <= 1'b0;
      done    <= 1'b0;
      skip    <= '0;
      idx     <= '0;
      first_q <= 1'b0;
      rmw     <= 1'b0;
      smp_q   <= '0;
      we      <= 1'b0;
      waddr   <= '0;
      wdata   <= '0;
      sw_sel  <= '0;
    end else begin
      done <= 1'b0;
      we   <= 1'b0;
      if (!busy) sw_sel <= ch_sel;   // switch follows the request between shots
      rmw  <= 1'b0;
      if (start && !busy) begin
        busy    <= 1'b1;
        first_q <= first;
        skip    <= ($bits(skip))'(ADC_LAT + 1);
        idx     <= '0;
      end else if (busy) begin
        if (sample_tick) begin
          if (skip != 0) skip <= skip - 1'b1;
          else begin
            smp_q <= adc_d;       // raddr = idx is being read this cycle
            rmw   <= 1'b1;
          end
        end
        if (rmw) begin
          we    <= 1'b1;
          waddr <= idx;
          wdata <= (first_q ? '0 : rdata) + SAMPLE_W'(smp_q);
          if (idx == AW'(REC_SAMPLES - 1)) begin
            busy <= 1'b0;
            done <= 1'b1;
          end else begin
            idx <= idx + 1'b1;
          end
        end
      end
    end
  end

  a_start_idle: assert property (@(posedge clk) disable iff (!rst_n) start |-> !busy);
  initial assert (REC_SAMPLES <= ACQ_DEPTH && DIV >= 4);

endmodule
