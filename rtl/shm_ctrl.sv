// shm_ctrl -- sequencer of the monitoring system.
//
// In the published system a soft processor runs the schedule: it starts the
// DAC and ADC, controls data storage, runs the localization algorithm,
// stores the DI map in external memory and talks to the host over the UART.
// This block does the same work as a state machine driven by single-byte
// host commands (the command codes are this design's choice, see shm_pkg):
//
//   CMD_ACQ | ch  route receiver ch to the ADC, fire N_AVG shots (DAC burst
//                 and ADC record start on the same sample tick; the first shot
//                 overwrites the buffer, later ones add to it), then send the
//                 REC_SAMPLES averaged samples, 2 bytes each, low byte first.
//   CMD_RUN       run the DI engine; every pixel it produces is written to
//                 external memory at word address row*COLS+col; RSP_DONE is
//                 sent when the map is complete.
//   CMD_READ      send the ROWS*COLS pixels from external memory, 4 bytes
//                 each, low byte first.
//   CMD_INFO      send the system information: N_CH, N_AVG, then
//                 REC_SAMPLES as 2 bytes, low byte first (the published
//                 link carries "system information"; its content is this
//                 design's choice).
// Other bytes are ignored, as are bytes that arrive while a command runs.
//
// Timing: one shot lasts as long as the ADC record (REC_SAMPLES + ADC_LAT
// + 1 sample ticks); after the first shot of a command, shot starts are
// exactly that many ticks apart (60.07 us with the defaults).
// Byte output follows the UART's valid/ready handshake. During CMD_RUN the
// engine's pixel word goes to the memory port unchanged (mem_wdata is
// pix_data), so those output bits come straight from inputs.
module shm_ctrl #(
  parameter int unsigned N_CH        = shm_pkg::N_CH,
  parameter int unsigned N_AVG       = shm_pkg::N_AVG,
  parameter int unsigned REC_SAMPLES = shm_pkg::REC_SAMPLES,
  parameter int unsigned ACQ_DEPTH   = shm_pkg::ACQ_DEPTH,
  parameter int unsigned SAMPLE_W    = shm_pkg::SAMPLE_W,
  parameter int unsigned ROWS        = shm_pkg::DI_ROWS,
  parameter int unsigned COLS        = shm_pkg::DI_COLS,
  parameter int unsigned DI_W        = shm_pkg::DI_W,
  parameter int unsigned MEM_AW      = 17,                 // external memory word address
  localparam int unsigned CW         = (N_CH > 1) ? $clog2(N_CH) : 1,
  localparam int unsigned AW         = $clog2(ACQ_DEPTH),
  localparam int unsigned PAW        = $clog2(ROWS * COLS)
) (
  input  logic                clk,
  input  logic                rst_n,
  // host link
  input  logic                rx_valid,
  input  logic [7:0]          rx_data,
  output logic                tx_valid,
  output logic [7:0]          tx_data,
  input  logic                tx_ready,
  // excitation and acquisition
  output logic [CW-1:0]       ch_sel,
  output logic                shot_start,
  output logic                shot_first,
  input  logic                acq_done,
  output logic [AW-1:0]       acq_rd_addr,
  input  logic [SAMPLE_W-1:0] acq_rd_avg,
  // localization engine
  output logic                eng_start,
  input  logic                eng_done,
  input  logic                pix_valid,
  output logic                pix_ready,
  input  logic [PAW-1:0]      pix_addr,
  input  logic [DI_W-1:0]     pix_data,
  // external memory (word interface)
  output logic                mem_req,
  output logic                mem_we,
  output logic [MEM_AW-1:0]   mem_addr,
  output logic [31:0]         mem_wdata,
  input  logic                mem_ready,
  input  logic                mem_rvalid,
  input  logic [31:0]         mem_rdata,
  // status
  output logic                busy
);

  typedef enum logic [3:0] {
    S_IDLE, S_SHOT, S_SHOT_WAIT, S_TR_ADDR, S_TR_WAIT, S_TR_LOAD, S_SEND,
    S_RUN, S_RD_REQ, S_RD_WAIT
  } state_t;
  typedef enum logic [1:0] {M_ACQ, M_RUN, M_READ, M_INFO} mode_t;

  state_t state;
  mode_t  mode;

  logic [$clog2(N_AVG + 1)-1:0] shot;
  logic [AW:0]                  tr_idx;
  logic [PAW:0]                 rd_idx;
  logic [31:0]                  out_word;
  logic [2:0]                   out_left;
  logic                         run_mem;   // DI engine owns the memory port
  logic                         rd_req;

  assign busy = (state != S_IDLE);

  // DI engine pixels go straight to the memory port while running
  assign run_mem   = (state == S_RUN);
  assign mem_req   = run_mem ? pix_valid : rd_req;
  assign mem_we    = run_mem;
  assign mem_addr  = run_mem ? MEM_AW'(pix_addr) : MEM_AW'(rd_idx);
  assign mem_wdata = 32'(pix_data);
  assign pix_ready = run_mem && mem_ready;
  assign rd_req    = (state == S_RD_REQ);

  assign tx_valid  = (state == S_SEND);
  assign tx_data   = out_word[7:0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state       <= S_IDLE;
      mode        <= M_ACQ;
      ch_sel      <= '0;
      shot_start  <= 1'b0;
      shot_first  <= 1'b0;
      shot        <= '0;
      tr_idx      <= '0;
      rd_idx      <= '0;
      acq_rd_addr <= '0;
      out_word    <= '0;
      out_left    <= '0;
      eng_start   <= 1'b0;
    end else begin
      shot_start <= 1'b0;
      eng_start  <= 1'b0;
      unique case (state)
        S_IDLE: if (rx_valid) begin
          if (rx_data[7:4] == shm_pkg::CMD_ACQ[7:4] && 32'(rx_data[3:0]) < N_CH) begin
            mode   <= M_ACQ;
            ch_sel <= CW'(rx_data[3:0]);
            shot   <= '0;
            state  <= S_SHOT;
          end else if (rx_data == shm_pkg::CMD_RUN) begin
            mode      <= M_RUN;
            eng_start <= 1'b1;
            state     <= S_RUN;
          end else if (rx_data == shm_pkg::CMD_READ) begin
            mode   <= M_READ;
            rd_idx <= '0;
            state  <= S_RD_REQ;
          end else if (rx_data == shm_pkg::CMD_INFO) begin
            mode     <= M_INFO;
            out_word <= {16'(REC_SAMPLES), 8'(N_AVG), 8'(N_CH)};
            out_left <= 3'd4;
            state    <= S_SEND;
          end
        end

        // ---- acquisition: N_AVG shots, then the averaged trace -----------
        S_SHOT: begin
          shot_start <= 1'b1;
          shot_first <= (shot == 0);
          state      <= S_SHOT_WAIT;
        end
        S_SHOT_WAIT: if (acq_done) begin
          if (shot == ($bits(shot))'(N_AVG - 1)) begin
            tr_idx <= '0;
            state  <= S_TR_ADDR;
          end else begin
            shot  <= shot + 1'b1;
            state <= S_SHOT;
          end
        end
        S_TR_ADDR: begin
          acq_rd_addr <= AW'(tr_idx);
          state       <= S_TR_WAIT;
        end
        S_TR_WAIT: state <= S_TR_LOAD;  // block-RAM read latency
        S_TR_LOAD: begin              // averaged sample is on acq_rd_avg
          out_word <= 32'(acq_rd_avg);
          out_left <= 3'd2;
          state    <= S_SEND;
        end

        // ---- byte output ---------------------------------------------------
        S_SEND: if (tx_ready) begin
          out_word <= {8'h00, out_word[31:8]};
          out_left <= out_left - 1'b1;
          if (out_left == 3'd1) begin
            unique case (mode)
              M_ACQ: if (tr_idx == ($bits(tr_idx))'(REC_SAMPLES - 1)) state <= S_IDLE;
                     else begin
                       tr_idx <= tr_idx + 1'b1;
                       state  <= S_TR_ADDR;
                     end
              M_RUN, M_INFO: state <= S_IDLE;
              default: if (rd_idx == ($bits(rd_idx))'(ROWS * COLS - 1)) state <= S_IDLE;
                       else begin
                         rd_idx <= rd_idx + 1'b1;
                         state  <= S_RD_REQ;
                       end
            endcase
          end
        end

        // ---- DI map computation into external memory -----------------------
        S_RUN: if (eng_done) begin
          out_word <= 32'(shm_pkg::RSP_DONE);
          out_left <= 3'd1;
          state    <= S_SEND;
        end

        // ---- DI map read-back ------------------------------------------------
        S_RD_REQ:  if (mem_ready) state <= S_RD_WAIT;
        S_RD_WAIT: if (mem_rvalid) begin
          out_word <= mem_rdata;
          out_left <= 3'd4;
          state    <= S_SEND;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_one_mem_owner: assert property (@(posedge clk) disable iff (!rst_n)
                                    !(run_mem && rd_req));

endmodule
