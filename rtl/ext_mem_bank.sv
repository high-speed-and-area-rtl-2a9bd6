// ext_mem_bank: one of the two dual-port memory banks that hold the image.
//
// A simple dual-port RAM: one write port and one read port, both on the
// same clock. A read returns the stored word one cycle after its address
// (registered output, dwt_pkg::MEM_RD_LAT). When the read and the write hit
// the same address in the same cycle, the read returns the word as it was
// before the write ("read before write").
//
// The paper models the bank as a vector (variable selector, two product
// terms, a write inserter that puts one word into the vector, and a read
// section that picks a word out of it); that is a word-addressed RAM, and
// it is written here as an array. The read-before-write behaviour follows
// the paper; the registered read and the width/depth are this design's
// choices (depth = half the pixels of an N x N image).
module ext_mem_bank #(
  parameter int unsigned W     = 16,
  parameter int unsigned DEPTH = 2048,     // words: N*N/2 for N = 64
  localparam int unsigned AW   = $clog2(DEPTH)
) (
  input  logic                clk,
  // write port
  input  logic                we,
  input  logic [AW-1:0]       waddr,
  input  logic signed [W-1:0] wdata,
  // read port
  input  logic                re,
  input  logic [AW-1:0]       raddr,
  output logic signed [W-1:0] rdata
);

  logic signed [W-1:0] mem [DEPTH];

  always_ff @(posedge clk) begin
    if (re) rdata <= mem[raddr];      // old contents on an address overlap
    if (we) mem[waddr] <= wdata;
  end

endmodule
