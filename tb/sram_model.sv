// sram_model -- behavioural model of an asynchronous byte-wide SRAM
// (512 K x 8 on the target board), for testbenches only.
//
// A byte is written when we_n rises while ce_n is low, taking dq_o and
// checking that the controller drives the bus (dq_oe). While ce_n and oe_n
// are low the addressed byte is driven on dq_i (zero otherwise). Reading
// with the bus driven, or having we_n and oe_n low together, counts as a
// protocol error. Contents start at zero.
// The 512 KB size is the board's; the protocol checks are this design's.
module sram_model #(
  parameter int unsigned ADDR_W = 19
) (
  input  logic [ADDR_W-1:0] a,
  input  logic [7:0]        dq_o,
  output logic [7:0]        dq_i,
  input  logic              dq_oe,
  input  logic              ce_n,
  input  logic              oe_n,
  input  logic              we_n
);
  logic [7:0] mem [1 << ADDR_W];
  int         writes = 0, reads = 0, errors = 0;

  initial for (int i = 0; i < (1 << ADDR_W); i++) mem[i] = '0;

  always @(posedge we_n) if (!ce_n) begin
    if (!dq_oe) errors++;
    mem[a] = dq_o;
    writes++;
  end

  always @(negedge oe_n) if (!ce_n) reads++;

  always_comb dq_i = (!ce_n && !oe_n) ? mem[a] : 8'h00;

  always @(oe_n, we_n, dq_oe) if ((!oe_n && !we_n) || (!oe_n && dq_oe && !ce_n)) errors++;
endmodule
