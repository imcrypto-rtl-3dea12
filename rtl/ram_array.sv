// ram_array: one 256x8 6T-SRAM array of a LUT fabric module.
//
// In the fabric each of the eight RAM arrays of a module holds a pre-computed
// table, 2*sbox(x) or 3*sbox(x) at row x, and is read with a state byte as the
// row address; the byte read out is one term of a MixColumns sum. The array
// itself is a plain single-port memory: an 8-bit row decoder, 8 bit columns
// and 8 sense amplifiers.
//
// Timing: write at the clock edge when we is high; a read (re high) presents
// the row on rdata after the next edge (the sense-amplifier output register).
// rdata holds its value while re is low. A write and a read in the same cycle
// are not used by the fabric; the read then returns the old contents.
//
// The 256x8 size is the paper's; the one-cycle synchronous read is this
// design's choice.
module ram_array #(
  parameter int unsigned DEPTH = 256,
  parameter int unsigned WIDTH = 8,
  localparam int unsigned AW = $clog2(DEPTH)
) (
  input  logic             clk,
  input  logic             we,
  input  logic             re,
  input  logic [AW-1:0]    addr,
  input  logic [WIDTH-1:0] wdata,
  output logic [WIDTH-1:0] rdata
);

  logic [WIDTH-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (we) mem[addr] <= wdata;
    if (re) rdata <= mem[addr];
  end

endmodule
