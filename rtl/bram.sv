// bram -- simple dual-port block RAM with one write and one read port.
//
// Used for the ADC acquisition buffer and for the two banks (baseline and
// damage) of the decimated data set that the localization engine reads. The
// published system keeps both in on-chip block RAM; the port arrangement is a
// choice of this design. A write takes effect at the clock edge; a read
// returns the word at raddr one clock after raddr is presented (registered
// output, as a block RAM does). Reading and writing the same address in one
// cycle returns the old word. Contents are not reset.
module bram #(
  parameter int unsigned DEPTH = 4800,
  parameter int unsigned WIDTH = 16,
  localparam int unsigned AW   = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             we,
  input  logic [AW-1:0]    waddr,
  input  logic [WIDTH-1:0] wdata,
  input  logic [AW-1:0]    raddr,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[waddr] <= wdata;
    rdata <= mem[raddr];
  end

endmodule
