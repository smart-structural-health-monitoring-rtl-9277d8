// dac_ip -- excitation pulse generator for the transmitter PZT ring.
//
// On start it plays a 5-cycle Hanning-windowed sine burst,
//   H(t) = 0.5 (1 - cos(2 pi f t / N)) sin(2 pi f t),  0 <= t < N/f,
// onto the 12-bit parallel bus of a DAC7821, one code per update tick, and
// then writes mid-scale so the output returns to 0 V. As in the published
// system the burst is held in a look-up table; here the table is computed
// at elaboration from the formula (offset binary: code = MID + round((MID-1)
// * H)), so changing F_EXC_HZ, N_CYCLES or UPD_HZ rebuilds it. With the
// defaults (75 kHz, 5 cycles, 10 MS/s) the table has 667 entries.
//
// Interface and timing: `upd_tick` is a one-clock strobe at UPD_HZ shared
// with the ADC IP so that excitation and recording start on the same tick.
// `start` arms the block; burst sample k is put on dac_db at tick k after
// arming (k = 0 .. LUT_LEN-1) and the mid-scale code at tick LUT_LEN, after
// which `done` pulses. For each code, cs_n and wr_n are driven low for
// WR_CYC clocks starting one clock after dac_db changes and released while
// dac_db is still stable, so the DAC latches on the rising edge. The tick
// period must be at least WR_CYC + 2 clocks. Reset is synchronous and
// active low. The bus interface timing is
// this design's choice; the 12-bit width, burst shape and frequency are the
// paper's.
module dac_ip #(
  parameter int unsigned DAC_W    = shm_pkg::DAC_W,
  parameter int unsigned UPD_HZ   = shm_pkg::FS_HZ,
  parameter int unsigned F_EXC_HZ = shm_pkg::F_EXC_HZ,
  parameter int unsigned N_CYCLES = shm_pkg::N_CYCLES,
  parameter int unsigned WR_CYC   = 4,
  localparam int unsigned LUT_LEN = (N_CYCLES * UPD_HZ + F_EXC_HZ / 2) / F_EXC_HZ,
  localparam int unsigned IW      = $clog2(LUT_LEN + 1)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             upd_tick,
  input  logic             start,
  output logic             busy,
  output logic             done,
  output logic [DAC_W-1:0] dac_db,
  output logic             dac_cs_n,
  output logic             dac_wr_n
);

  localparam logic [DAC_W-1:0] MID = DAC_W'(1 << (DAC_W - 1));

  typedef logic [DAC_W-1:0] lut_t [LUT_LEN];

  function automatic lut_t build_lut();
    lut_t r;
    real  pi, t, h;
    pi = 3.14159265358979323846;
    for (int i = 0; i < int'(LUT_LEN); i++) begin
      t = real'(i) / real'(UPD_HZ);
      h = 0.5 * (1.0 - $cos(2.0 * pi * real'(F_EXC_HZ) * t / real'(N_CYCLES)))
              * $sin(2.0 * pi * real'(F_EXC_HZ) * t);
      h = h * real'((1 << (DAC_W - 1)) - 1);
      r[i] = DAC_W'((1 << (DAC_W - 1)) + $rtoi(h >= 0.0 ? h + 0.5 : h - 0.5));
    end
    return r;
  endfunction

  localparam lut_t LUT = build_lut();

  logic [IW-1:0] idx;       // next table entry to output
  logic          armed;     // waiting for first tick
  logic [3:0]    wr_cnt;    // cs/wr strobe sequencer
  logic          pending;   // a code was just placed on the bus

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      busy     <= 1'b0;
      armed    <= 1'b0;
      done     <= 1'b0;
      idx      <= '0;
      dac_db   <= MID;
      dac_cs_n <= 1'b1;
      dac_wr_n <= 1'b1;
      wr_cnt   <= '0;
      pending  <= 1'b0;
    end else begin
      done <= 1'b0;
      if (start && !busy) begin
        busy  <= 1'b1;
        armed <= 1'b1;
        idx   <= '0;
      end else if (busy && upd_tick) begin
        armed   <= 1'b0;
        pending <= 1'b1;
        if (idx < IW'(LUT_LEN)) begin
          dac_db <= LUT[idx[IW-1:0] < IW'(LUT_LEN) ? idx : '0];
          idx    <= idx + 1'b1;
        end else begin
          dac_db <= MID;
          busy   <= 1'b0;
          done   <= 1'b1;
        end
      end

      // write strobe: one clock after the bus changes, low for WR_CYC clocks
      if (pending) begin
        pending  <= 1'b0;
        dac_cs_n <= 1'b0;
        dac_wr_n <= 1'b0;
        wr_cnt   <= 4'(WR_CYC);
      end else if (wr_cnt != 0) begin
        wr_cnt <= wr_cnt - 1'b1;
        if (wr_cnt == 1) begin
          dac_cs_n <= 1'b1;
          dac_wr_n <= 1'b1;
        end
      end
    end
  end

  // the strobe must finish before the next code is placed on the bus
  property p_strobe_done_before_update;
    @(posedge clk) disable iff (!rst_n) (busy && upd_tick && !armed) |-> (wr_cnt == 0 && !pending);
  endproperty
  a_strobe: assert property (p_strobe_done_before_update);

endmodule
