// di_engine -- damage-index (DI) map generator for the unrolled pipe.
//
// The pipe between the transmitter ring (z = 0) and the receiver ring
// (z = RING_MM) is unrolled into a flat sheet CIRC_MM high. For every pixel
// (x, z) of a ROWS x COLS grid the engine
//   1. takes the distance to the transmitter ring as z (all transmitters fire
//      together) and to receiver m, at x_m = m * CIRC_MM / N_CH on z = RING_MM,
//      as d_m = sqrt((x - x_m)^2 + (z - RING_MM)^2) (no wrap-around);
//   2. turns the path into a start sample sn_m = (z + d_m) * FS / C;
//   3. adds, over all receivers, the difference baseline - damage of the
//      WINDOW samples starting at sn_m of that receiver's traces:
//      delta[k] = sum_m (bs_m[sn_m + k] - dm_m[sn_m + k]);
//   4. writes DI = sum_k delta[k]^2 as the pixel value.
// This is the common-source-method variant of the published system, which
// runs it as C code on a soft processor; here it is a sequencer with one
// sample pair per clock. Summing the differences equals the published order
// (sum each condition's windows, then subtract) because both are linear.
//
// Fixed-point arithmetic (this design's choice): positions are whole mm,
// the distance is floor(sqrt(256 d^2)) in 1/16 mm from a bit-serial square
// root, and sn = ((16 z + d16) * K + 2^19) >> 20 with
// K = round(65536 * FS_DEC_HZ / (1000 * C_MPS)) samples per mm in Q16
// (20938 for 1 Msps and 3130 m/s). Samples are signed SAMPLE_W-bit words;
// a window sample beyond the end of a trace counts as zero. DI saturates at
// DI_W bits.
//
// Interface: pulse start; the engine reads both data-set banks at the same
// address mem_addr = m * TRACE_LEN + n and expects bs_data / dm_data one
// clock later. Each finished pixel is offered as pix_addr = row * COLS + col
// with pix_data under pix_valid until pix_ready; pixels come out row by row,
// column fastest. done pulses after the last pixel is taken.
// Timing: pixel outputs are N_CH * (WINDOW + SQ_W/2 + 5) + WINDOW + 1
// clocks apart when pix_ready is high (SQ_W is the square-root input width,
// 28 with the defaults: 5553 clocks per pixel, 400 M clocks or 4.0 s at
// 100 MHz for the 72 000-pixel map).
module di_engine #(
  parameter int unsigned N_CH      = shm_pkg::N_CH,
  parameter int unsigned TRACE_LEN = shm_pkg::TRACE_LEN,
  parameter int unsigned WINDOW    = shm_pkg::WINDOW,
  parameter int unsigned ROWS      = shm_pkg::DI_ROWS,
  parameter int unsigned COLS      = shm_pkg::DI_COLS,
  parameter int unsigned DX_MM     = shm_pkg::DX_MM,
  parameter int unsigned DZ_MM     = shm_pkg::DZ_MM,
  parameter int unsigned CIRC_MM   = shm_pkg::CIRC_MM,
  parameter int unsigned RING_MM   = shm_pkg::RING_MM,
  parameter int unsigned FS_DEC_HZ = shm_pkg::FS_DEC_HZ,
  parameter int unsigned C_MPS     = shm_pkg::C_MPS,
  parameter int unsigned SAMPLE_W  = shm_pkg::SAMPLE_W,
  parameter int unsigned DI_W      = shm_pkg::DI_W,
  localparam int unsigned MAW      = $clog2(N_CH * TRACE_LEN),
  localparam int unsigned PAW      = $clog2(ROWS * COLS)
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       start,
  output logic                       busy,
  output logic                       done,
  // data-set banks (1-clock read latency)
  output logic [MAW-1:0]             mem_addr,
  input  logic [SAMPLE_W-1:0]        bs_data,
  input  logic [SAMPLE_W-1:0]        dm_data,
  // pixel output
  output logic                       pix_valid,
  input  logic                       pix_ready,
  output logic [PAW-1:0]             pix_addr,
  output logic [DI_W-1:0]            pix_data
);

  // ---- derived sizes -------------------------------------------------------
  localparam int unsigned XMAX  = ((ROWS - 1) * DX_MM > CIRC_MM) ? (ROWS - 1) * DX_MM : CIRC_MM;
  localparam int unsigned ZMAX  = ((COLS - 1) * DZ_MM > RING_MM) ? (COLS - 1) * DZ_MM : RING_MM;
  localparam int unsigned D2MAX = XMAX * XMAX + ZMAX * ZMAX;
  localparam int unsigned SQW0  = $clog2(D2MAX + 1) + 8;
  localparam int unsigned SQ_W  = SQW0 + (SQW0 % 2);          // square-root input width
  localparam int unsigned PW    = $clog2(XMAX + ZMAX + 1) + 1; // signed mm coordinate
  localparam int unsigned K_Q16 = shm_pkg::k_q16(FS_DEC_HZ, C_MPS);
  localparam int unsigned SNW   = $clog2(TRACE_LEN + WINDOW + 1);
  localparam int unsigned DW    = SAMPLE_W + 1 + $clog2(N_CH + 1); // delta word
  localparam int unsigned ACC_W = 2 * DW + $clog2(WINDOW + 1);
  localparam int unsigned KW    = $clog2(WINDOW + 1);
  localparam int unsigned CHW   = $clog2(N_CH + 1);
  localparam int unsigned RW    = $clog2(ROWS + 1);
  localparam int unsigned CW    = $clog2(COLS + 1);

  typedef enum logic [2:0] {S_IDLE, S_SQRT, S_WAIT, S_SN, S_READ, S_DRAIN, S_SUM, S_OUT} state_t;
  state_t state;

  // ---- pixel and channel counters ----------------------------------------
  logic [RW-1:0]  row;
  logic [CW-1:0]  col;
  logic [PW-1:0]  x_mm, z_mm, xr_mm;
  logic [PAW-1:0] pix_idx;
  logic [CHW-1:0] m;
  logic [MAW:0]   base;          // m * TRACE_LEN
  logic           first;         // first receiver of this pixel

  // receiver position x_m = m * CIRC_MM / N_CH
  assign xr_mm = PW'((32'(m) * CIRC_MM) / N_CH);

  // ---- distance and start sample -----------------------------------------
  logic signed [PW:0]   dx, dz;
  logic [SQ_W-9:0]      d2;            // d^2 < 2^(SQ_W-8) by the choice of SQ_W
  logic [SQ_W-1:0]      d2_q8;
  logic                 sq_start, sq_done, sq_busy;
  logic [SQ_W/2-1:0]    d16;
  logic [SNW-1:0]       sn;
  logic [SQ_W/2+PW+4:0] dsum;
  logic [SQ_W/2+PW+24:0] prod;

  assign dx    = $signed({1'b0, x_mm}) - $signed({1'b0, xr_mm});
  assign dz    = $signed({1'b0, z_mm}) - $signed((PW+1)'(RING_MM));
  assign d2    = dx * dx + dz * dz;
  assign d2_q8 = {d2, 8'b0};
  assign dsum  = ($bits(dsum))'({z_mm, 4'b0000}) + ($bits(dsum))'(d16);
  assign prod  = ($bits(prod))'(dsum) * ($bits(prod))'(K_Q16) + ($bits(prod))'(1 << 19);

  isqrt #(.IN_W(SQ_W)) u_sqrt (
    .clk, .rst_n, .start(sq_start), .x(d2_q8), .busy(sq_busy), .done(sq_done), .y(d16)
  );

  // ---- window read pipeline ----------------------------------------------
  logic [KW-1:0]                k;
  logic                         p_valid, p_inr;
  logic [KW-1:0]                p_k;
  logic signed [DW-1:0]         delta [WINDOW];
  logic signed [ACC_W-1:0]      acc;
  logic [SNW:0]                 n_rd;
  logic                         inr;

  assign n_rd     = ($bits(n_rd))'(sn) + ($bits(n_rd))'(k);
  assign inr      = (n_rd < ($bits(n_rd))'(TRACE_LEN));
  assign mem_addr = inr ? MAW'(base + ($bits(base))'(n_rd)) : '0;

  logic signed [SAMPLE_W:0] diff;
  assign diff = p_inr ? ($signed({bs_data[SAMPLE_W-1], bs_data}) -
                         $signed({dm_data[SAMPLE_W-1], dm_data})) : '0;

  logic signed [2*DW-1:0] sq;
  assign sq = delta[k < KW'(WINDOW) ? k : '0] * delta[k < KW'(WINDOW) ? k : '0];

  assign busy = (state != S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      done      <= 1'b0;
      row       <= '0;
      col       <= '0;
      x_mm      <= '0;
      z_mm      <= '0;
      pix_idx   <= '0;
      m         <= '0;
      base      <= '0;
      first     <= 1'b1;
      sq_start  <= 1'b0;
      sn        <= '0;
      k         <= '0;
      p_valid   <= 1'b0;
      p_inr     <= 1'b0;
      p_k       <= '0;
      acc       <= '0;
      pix_valid <= 1'b0;
      pix_addr  <= '0;
      pix_data  <= '0;
      for (int i = 0; i < int'(WINDOW); i++) delta[i] <= '0;
    end else begin
      done     <= 1'b0;
      sq_start <= 1'b0;
      p_valid  <= 1'b0;

      // accumulate returned sample pairs into the window sum
      if (p_valid)
        delta[p_k] <= (first ? '0 : delta[p_k]) + DW'(diff);

      unique case (state)
        S_IDLE: if (start) begin
          row <= '0; col <= '0; x_mm <= '0; z_mm <= '0; pix_idx <= '0;
          m <= '0; base <= '0; first <= 1'b1;
          state <= S_SQRT;
        end
        S_SQRT: begin
          sq_start <= 1'b1;
          state    <= S_WAIT;
        end
        S_WAIT: if (sq_done) state <= S_SN;
        S_SN: begin
          sn    <= SNW'(prod >> 20);
          k     <= '0;
          state <= S_READ;
        end
        S_READ: begin
          p_valid <= 1'b1;
          p_inr   <= inr;
          p_k     <= k;
          if (k == KW'(WINDOW - 1)) state <= S_DRAIN;
          else                      k <= k + 1'b1;
        end
        S_DRAIN: begin                 // last pair is accumulated this clock
          if (m == CHW'(N_CH - 1)) begin
            k     <= '0;
            acc   <= '0;
            state <= S_SUM;
          end else begin
            m     <= m + 1'b1;
            base  <= base + ($bits(base))'(TRACE_LEN);
            first <= 1'b0;
            state <= S_SQRT;
          end
        end
        S_SUM: begin
          acc <= acc + ACC_W'(sq);
          if (k == KW'(WINDOW - 1)) begin
            state     <= S_OUT;
            pix_valid <= 1'b1;
            pix_addr  <= pix_idx;
            // saturate to DI_W bits (acc + the last square)
            if ((acc + ACC_W'(sq)) >>> DI_W != 0) pix_data <= '1;
            else                                   pix_data <= DI_W'(acc + ACC_W'(sq));
          end else begin
            k <= k + 1'b1;
          end
        end
        S_OUT: if (pix_ready) begin
          pix_valid <= 1'b0;
          m <= '0; base <= '0; first <= 1'b1;
          pix_idx <= pix_idx + 1'b1;
          if (col == CW'(COLS - 1)) begin
            col  <= '0;
            z_mm <= '0;
            if (row == RW'(ROWS - 1)) begin
              done  <= 1'b1;
              state <= S_IDLE;
            end else begin
              row   <= row + 1'b1;
              x_mm  <= x_mm + PW'(DX_MM);
              state <= S_SQRT;
            end
          end else begin
            col   <= col + 1'b1;
            z_mm  <= z_mm + PW'(DZ_MM);
            state <= S_SQRT;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_sqrt_idle: assert property (@(posedge clk) disable iff (!rst_n) sq_start |-> !sq_busy);

  a_pix_hold: assert property (@(posedge clk) disable iff (!rst_n)
                               pix_valid && !pix_ready |=> pix_valid && $stable(pix_data));

endmodule
