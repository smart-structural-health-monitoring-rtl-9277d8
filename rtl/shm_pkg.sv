// shm_pkg -- constants and types shared by the pipe-monitoring FPGA design.
//
// The numbers follow the published system where it gives them: 8 receiver
// channels, a 10-bit ADC sampled at up to 10 Msps, a 12-bit DAC, a 5-cycle
// Hanning-windowed 75 kHz excitation, 10 averaged shots, 6000 samples per
// channel (600 us at 10 Msps), decimation by 10 for the stored data set, a
// 600-sample analysis window on the decimated traces, a T(0,1) group velocity of
// 3130 m/s, a 400 mm ring separation, a 360 mm unrolled circumference and a
// 230400 baud host link. The 100 MHz system clock, the DI map grid
// (180 x 400 pixels of 2 mm x 1 mm), the host command bytes and the word
// widths are choices of this design. With 600-sample traces the 600-sample
// window always reaches past the trace end; samples there count as zero, so
// each window runs from its start sample to the end of the trace, as the
// windows in the published method illustration do.
// A lint run on a single module reports the constants that module does not
// use; each module uses only part of this package.
package shm_pkg;

  // clocking
  localparam int unsigned CLK_HZ      = 100_000_000; // system clock (design choice)
  localparam int unsigned FS_HZ       = 10_000_000;  // ADC sample / DAC update rate

  // front end
  localparam int unsigned N_CH        = 8;     // receiver channels
  localparam int unsigned ADC_W       = 10;    // MAX1426 resolution
  localparam int unsigned DAC_W       = 12;    // DAC7821 resolution
  localparam int unsigned SAMPLE_W    = 16;    // stored sample / running-sum word
  localparam int unsigned N_AVG       = 10;    // shots averaged per channel
  localparam int unsigned REC_SAMPLES = 6000;  // samples recorded per shot
  localparam int unsigned ACQ_DEPTH   = 8000;  // acquisition buffer: 800 us at FS_HZ
  localparam int unsigned ADC_LAT     = 6;     // ADC pipeline latency in sample clocks
  localparam int unsigned F_EXC_HZ    = 75_000;
  localparam int unsigned N_CYCLES    = 5;

  // host link
  localparam int unsigned BAUD        = 230_400;

  // localization data set and DI map
  localparam int unsigned DECIM       = 10;
  localparam int unsigned TRACE_LEN   = REC_SAMPLES / DECIM;      // 600 samples per channel
  localparam int unsigned FS_DEC_HZ   = FS_HZ / DECIM;            // 1 Msps after decimation
  localparam int unsigned WINDOW      = 600;                      // decimated samples, to the trace end
  localparam int unsigned C_MPS       = 3130;                     // T(0,1) group velocity
  localparam int unsigned DI_ROWS     = 180;
  localparam int unsigned DI_COLS     = 400;
  localparam int unsigned DX_MM       = 2;                        // circumferential pitch
  localparam int unsigned DZ_MM       = 1;                        // axial pitch
  localparam int unsigned CIRC_MM     = 360;
  localparam int unsigned RING_MM     = 400;
  localparam int unsigned DI_W        = 32;

  // host command bytes (design choice)
  localparam logic [7:0] CMD_ACQ  = 8'h10;  // 8'h10 | channel: acquire and send a trace
  localparam logic [7:0] CMD_RUN  = 8'h20;  // compute the DI map into external memory
  localparam logic [7:0] CMD_READ = 8'h30;  // send the DI map to the host
  localparam logic [7:0] CMD_INFO = 8'h40;  // send system information (4 bytes)
  localparam logic [7:0] RSP_DONE = 8'hA5;  // sent when a DI map run has finished

  // samples per millimetre of path after decimation, unsigned Q16
  function automatic int unsigned k_q16(int unsigned fs_hz, int unsigned c_mps);
    return int'((64'(fs_hz) * 65536 + 64'(c_mps) * 500) / (64'(c_mps) * 1000));
  endfunction

endpackage
