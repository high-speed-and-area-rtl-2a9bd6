// dwt_pkg: constants and small helpers shared by the 2-D DWT processor.
//
// The image is held in place in two memory banks. Pixel (row, col) of the
// N x N image lives in bank (row[0] ^ col[0]) - a checkerboard - at in-bank
// word address {row, col[msb:1]}. With that map the two pixels of an
// even/odd pair on any line (row or column) always sit in different banks,
// and a low-pass write and the high-pass write from the line before always
// go to different banks, so each bank needs only one read and one write port.
// The bank map, the latencies and the pass order are choices of this design.
package dwt_pkg;

  // Register stages between a sample pair entering the lifting filter and
  // its L/H pair leaving it.
  localparam int unsigned FILTER_LAT = 3;
  // Cycles from a read address to its data at a bank's output.
  localparam int unsigned MEM_RD_LAT = 1;
  // Cycles from a read address issued by the controller to the L/H result.
  localparam int unsigned PIPE_LAT   = FILTER_LAT + MEM_RD_LAT;

  // Direction of one 1-D pass over the active region. A vertical pass
  // treats every column as a line (L ends up in the top half, H in the
  // bottom half); a horizontal pass treats every row as a line.
  typedef enum logic {
    PASS_VERT  = 1'b0,
    PASS_HORIZ = 1'b1
  } pass_dir_e;

  // Bank that holds pixel (row, col): checkerboard on the coordinate LSBs.
  function automatic logic bank_of(input logic row_lsb, input logic col_lsb);
    return row_lsb ^ col_lsb;
  endfunction

endpackage
