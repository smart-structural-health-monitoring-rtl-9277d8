// shm_top -- FPGA design of the guided-wave pipe monitoring node.
//
// A ring of transmitter PZTs is driven with a Hanning-windowed tone burst
// through a 12-bit DAC; a ring of receiver PZTs 400 mm away is digitised one
// channel at a time by a 10-bit ADC, averaged over N_AVG shots and sent to
// the host. The host decimates baseline and damage traces and loads them
// into the two data-set block RAMs; the DI engine then forms the damage-index
// map of the unrolled pipe, which is kept in external SRAM and read back by
// the host. Blocks:
//   uart       host link, 230400 baud
//   shm_ctrl   command sequencer (the role of the soft processor in the
//              published system)
//   dac_ip     excitation burst from a look-up table to the DAC bus
//   adc_ip     ADC clock, channel switch, shot recording and averaging buffer
//   bram x2    decimated baseline and damage data set (N_CH x TRACE_LEN each)
//   di_engine  DI map computation
//   ext_mem_if 32-bit words on the 8-bit external SRAM
// The data-set write port (ld_*) stands in for the debugger upload path the
// published system uses for this step; word n of channel m sits at address
// m*TRACE_LEN + n, ld_bank 0 is the baseline bank, 1 the damage bank.
// The SRAM data bus is split into dq_o/dq_i/dq_oe for an external tri-state
// pad. All logic runs on one clock with a synchronous active-low reset.
module shm_top #(
  parameter int unsigned CLK_HZ      = shm_pkg::CLK_HZ,
  parameter int unsigned FS_HZ       = shm_pkg::FS_HZ,
  parameter int unsigned BAUD        = shm_pkg::BAUD,
  parameter int unsigned N_CH        = shm_pkg::N_CH,
  parameter int unsigned N_AVG       = shm_pkg::N_AVG,
  parameter int unsigned REC_SAMPLES = shm_pkg::REC_SAMPLES,
  parameter int unsigned ACQ_DEPTH   = shm_pkg::ACQ_DEPTH,
  parameter int unsigned ADC_LAT     = shm_pkg::ADC_LAT,
  parameter int unsigned F_EXC_HZ    = shm_pkg::F_EXC_HZ,
  parameter int unsigned N_CYCLES    = shm_pkg::N_CYCLES,
  parameter int unsigned DECIM       = shm_pkg::DECIM,
  parameter int unsigned TRACE_LEN   = shm_pkg::TRACE_LEN,
  parameter int unsigned WINDOW      = shm_pkg::WINDOW,
  parameter int unsigned ROWS        = shm_pkg::DI_ROWS,
  parameter int unsigned COLS        = shm_pkg::DI_COLS,
  parameter int unsigned DX_MM       = shm_pkg::DX_MM,
  parameter int unsigned DZ_MM       = shm_pkg::DZ_MM,
  parameter int unsigned CIRC_MM     = shm_pkg::CIRC_MM,
  parameter int unsigned RING_MM     = shm_pkg::RING_MM,
  parameter int unsigned C_MPS       = shm_pkg::C_MPS,
  localparam int unsigned SAMPLE_W   = shm_pkg::SAMPLE_W,
  localparam int unsigned ADC_W      = shm_pkg::ADC_W,
  localparam int unsigned DAC_W      = shm_pkg::DAC_W,
  localparam int unsigned DI_W       = shm_pkg::DI_W,
  localparam int unsigned SRAM_AW    = 19,
  localparam int unsigned CW         = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int unsigned DSAW       = $clog2(N_CH * TRACE_LEN)
) (
  input  logic                clk,
  input  logic                rst_n,
  // host UART
  input  logic                uart_rxd,
  output logic                uart_txd,
  output logic                uart_err,     // one-clock pulse per badly framed byte
  // DAC7821
  output logic [DAC_W-1:0]    dac_db,
  output logic                dac_cs_n,
  output logic                dac_wr_n,
  // MAX1426 and receiver switch
  output logic                adc_clk,
  input  logic [ADC_W-1:0]    adc_d,
  output logic [CW-1:0]       sw_sel,
  // external SRAM
  output logic [SRAM_AW-1:0]  sram_a,
  output logic [7:0]          sram_dq_o,
  input  logic [7:0]          sram_dq_i,
  output logic                sram_dq_oe,
  output logic                sram_ce_n,
  output logic                sram_oe_n,
  output logic                sram_we_n,
  // data-set upload
  input  logic                ld_we,
  input  logic                ld_bank,
  input  logic [DSAW-1:0]     ld_addr,
  input  logic [SAMPLE_W-1:0] ld_data,
  // status
  output logic                busy
);

  localparam int unsigned AW  = $clog2(ACQ_DEPTH);
  localparam int unsigned PAW = $clog2(ROWS * COLS);
  localparam int unsigned MAW = SRAM_AW - 2;

  // host link
  logic [7:0] tx_data, rx_data;
  logic       tx_valid, tx_ready, rx_valid, frame_err;

  uart #(.CLK_HZ(CLK_HZ), .BAUD(BAUD)) u_uart (
    .clk, .rst_n, .tx_data, .tx_valid, .tx_ready, .rx_data, .rx_valid, .frame_err,
    .rxd(uart_rxd), .txd(uart_txd)
  );

  // excitation and acquisition
  logic                shot_start, shot_first, acq_done, acq_busy, sample_tick;
  logic                dac_busy, dac_done;
  logic [CW-1:0]       ch_sel;
  logic [AW-1:0]       acq_rd_addr;
  logic [SAMPLE_W-1:0] acq_rd_avg;

  dac_ip #(.UPD_HZ(FS_HZ), .F_EXC_HZ(F_EXC_HZ), .N_CYCLES(N_CYCLES)) u_dac (
    .clk, .rst_n, .upd_tick(sample_tick), .start(shot_start),
    .busy(dac_busy), .done(dac_done), .dac_db, .dac_cs_n, .dac_wr_n
  );

  adc_ip #(
    .CLK_HZ(CLK_HZ), .FS_HZ(FS_HZ), .N_CH(N_CH), .N_AVG(N_AVG),
    .REC_SAMPLES(REC_SAMPLES), .ACQ_DEPTH(ACQ_DEPTH), .ADC_LAT(ADC_LAT)
  ) u_adc (
    .clk, .rst_n, .ch_sel, .start(shot_start), .first(shot_first),
    .busy(acq_busy), .done(acq_done), .sample_tick,
    .rd_addr(acq_rd_addr), .rd_avg(acq_rd_avg),
    .adc_clk, .adc_d, .sw_sel
  );

  // data set
  logic [DSAW-1:0]     ds_raddr;
  logic [SAMPLE_W-1:0] bs_data, dm_data;

  bram #(.DEPTH(N_CH * TRACE_LEN), .WIDTH(SAMPLE_W)) u_ds_base (
    .clk, .we(ld_we && !ld_bank), .waddr(ld_addr), .wdata(ld_data),
    .raddr(ds_raddr), .rdata(bs_data)
  );
  bram #(.DEPTH(N_CH * TRACE_LEN), .WIDTH(SAMPLE_W)) u_ds_dmg (
    .clk, .we(ld_we && ld_bank), .waddr(ld_addr), .wdata(ld_data),
    .raddr(ds_raddr), .rdata(dm_data)
  );

  // localization engine
  logic            eng_start, eng_busy, eng_done, pix_valid, pix_ready;
  logic [PAW-1:0]  pix_addr;
  logic [DI_W-1:0] pix_data;

  di_engine #(
    .N_CH(N_CH), .TRACE_LEN(TRACE_LEN), .WINDOW(WINDOW), .ROWS(ROWS), .COLS(COLS),
    .DX_MM(DX_MM), .DZ_MM(DZ_MM), .CIRC_MM(CIRC_MM), .RING_MM(RING_MM),
    .FS_DEC_HZ(FS_HZ / DECIM), .C_MPS(C_MPS)
  ) u_eng (
    .clk, .rst_n, .start(eng_start), .busy(eng_busy), .done(eng_done),
    .mem_addr(ds_raddr), .bs_data, .dm_data,
    .pix_valid, .pix_ready, .pix_addr, .pix_data
  );

  // external memory
  logic            mem_req, mem_we, mem_ready, mem_rvalid;
  logic [MAW-1:0]  mem_addr;
  logic [31:0]     mem_wdata, mem_rdata;

  ext_mem_if #(.ADDR_W(SRAM_AW)) u_emi (
    .clk, .rst_n, .req(mem_req), .we(mem_we), .addr(mem_addr), .wdata(mem_wdata),
    .ready(mem_ready), .rvalid(mem_rvalid), .rdata(mem_rdata),
    .sram_a, .sram_dq_o, .sram_dq_i, .sram_dq_oe, .sram_ce_n, .sram_oe_n, .sram_we_n
  );

  // sequencer
  logic ctrl_busy;

  shm_ctrl #(
    .N_CH(N_CH), .N_AVG(N_AVG), .REC_SAMPLES(REC_SAMPLES), .ACQ_DEPTH(ACQ_DEPTH),
    .ROWS(ROWS), .COLS(COLS), .MEM_AW(MAW)
  ) u_ctrl (
    .clk, .rst_n, .rx_valid, .rx_data, .tx_valid, .tx_data, .tx_ready,
    .ch_sel, .shot_start, .shot_first, .acq_done, .acq_rd_addr, .acq_rd_avg,
    .eng_start, .eng_done, .pix_valid, .pix_ready, .pix_addr, .pix_data,
    .mem_req, .mem_we, .mem_addr, .mem_wdata, .mem_ready, .mem_rvalid, .mem_rdata,
    .busy(ctrl_busy)
  );

  assign uart_err = frame_err;
  assign busy = ctrl_busy || eng_busy || acq_busy || dac_busy;

  // the DAC burst must end within the ADC record of the same shot
  a_dac_within_shot: assert property (@(posedge clk) disable iff (!rst_n)
                                      dac_done |-> acq_busy);
  // the DI map must fit in the external memory
  initial assert (ROWS * COLS <= (1 << MAW));

endmodule
