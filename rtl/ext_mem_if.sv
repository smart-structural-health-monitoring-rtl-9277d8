// ext_mem_if -- word access to the on-board asynchronous SRAM.
//
// The DI map is too large for the FPGA's block RAM and is kept in the
// module's external 512 KB static RAM, which has an 8-bit data bus and a
// 19-bit byte address. This interface turns 32-bit word requests into four
// byte accesses, little-endian (byte b of word w at byte address 4w + b).
// The published system only names an external memory interface; the
// sequence below is this design's choice, sized for a 10 ns SRAM.
//
// Request side: present addr, we and wdata with req high; the request is
// taken when req and ready are both high. ready is low while the access
// runs; for a read, rvalid pulses with rdata when the fourth byte is in.
// Timing per byte: a write drives address and data for one clock, holds
// we_n low for WAIT_CYC + 1 clocks, and releases it with address and data
// still driven for one more clock (WAIT_CYC + 3 clocks). A read drives the
// address for one clock and holds oe_n low for WAIT_CYC + 1 clocks,
// sampling the bus on the last (WAIT_CYC + 2 clocks). A word write thus
// takes 20 clocks and a word read 16 with the default WAIT_CYC = 2.
// ce_n is low while a word access runs. The data bus is split into dq_o,
// dq_i and dq_oe; the tri-state pad lives outside the design.
module ext_mem_if #(
  parameter int unsigned ADDR_W   = 19,   // SRAM byte address width
  parameter int unsigned WAIT_CYC = 2,
  localparam int unsigned WA_W    = ADDR_W - 2
) (
  input  logic              clk,
  input  logic              rst_n,
  // word request
  input  logic              req,
  input  logic              we,
  input  logic [WA_W-1:0]   addr,
  input  logic [31:0]       wdata,
  output logic              ready,
  output logic              rvalid,
  output logic [31:0]       rdata,
  // SRAM pins
  output logic [ADDR_W-1:0] sram_a,
  output logic [7:0]        sram_dq_o,
  input  logic [7:0]        sram_dq_i,
  output logic              sram_dq_oe,
  output logic              sram_ce_n,
  output logic              sram_oe_n,
  output logic              sram_we_n
);

  typedef enum logic [1:0] {S_IDLE, S_SETUP, S_STROBE, S_HOLD} state_t;
  state_t state;

  logic              we_q;
  logic [WA_W-1:0]   wa_q;
  logic [31:0]       wd_q;
  logic [1:0]        byte_i;
  logic [3:0]        cnt;
  logic [1:0]        nxt_b;

  assign nxt_b = byte_i + 2'd1;

  assign ready = (state == S_IDLE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state      <= S_IDLE;
      we_q       <= 1'b0;
      wa_q       <= '0;
      wd_q       <= '0;
      byte_i     <= '0;
      cnt        <= '0;
      rvalid     <= 1'b0;
      rdata      <= '0;
      sram_a     <= '0;
      sram_dq_o  <= '0;
      sram_dq_oe <= 1'b0;
      sram_ce_n  <= 1'b1;
      sram_oe_n  <= 1'b1;
      sram_we_n  <= 1'b1;
    end else begin
      rvalid <= 1'b0;
      unique case (state)
        S_IDLE: if (req) begin
          we_q      <= we;
          wa_q      <= addr;
          wd_q      <= wdata;
          byte_i    <= '0;
          state     <= S_SETUP;
          sram_ce_n <= 1'b0;
          sram_a    <= {addr, 2'b00};
          sram_dq_o <= wdata[7:0];
          sram_dq_oe <= we;
        end
        S_SETUP: begin              // address (and data) settled
          state <= S_STROBE;
          cnt   <= 4'(WAIT_CYC);
          if (we_q) sram_we_n <= 1'b0;
          else      sram_oe_n <= 1'b0;
        end
        S_STROBE: begin
          if (cnt != 0) cnt <= cnt - 1'b1;
          else begin
            if (we_q) begin
              sram_we_n <= 1'b1;
              state     <= S_HOLD;
            end else begin
              sram_oe_n <= 1'b1;
              rdata     <= {sram_dq_i, rdata[31:8]};
              if (byte_i == 2'd3) begin
                rvalid    <= 1'b1;
                sram_ce_n <= 1'b1;
                state     <= S_IDLE;
              end else begin
                byte_i <= nxt_b;
                sram_a <= {wa_q, nxt_b};
                state  <= S_SETUP;
              end
            end
          end
        end
        S_HOLD: begin               // write data held past we_n rising
          if (byte_i == 2'd3) begin
            sram_ce_n  <= 1'b1;
            sram_dq_oe <= 1'b0;
            state      <= S_IDLE;
          end else begin
            byte_i    <= nxt_b;
            sram_a    <= {wa_q, nxt_b};
            sram_dq_o <= wd_q[8*nxt_b +: 8];
            state     <= S_SETUP;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_we_oe_exclusive: assert property (@(posedge clk) disable iff (!rst_n)
                                      !(!sram_we_n && !sram_oe_n));

endmodule
