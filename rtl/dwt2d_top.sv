// dwt2d_top: two-level 2-D DWT image transform with its two memory banks.
//
// The DWT processor and the pair of dual-port memory banks it works on.
// Load an N x N 8-bit grey-scale image through the host port (one pixel per
// cycle, any order), pulse start, wait for done, and read the W-bit
// coefficients back through the same port. The result is in place, in the
// Mallat layout: for LEVELS = 2 and N = 64, rows/cols 0..15 hold LL2,
// the rest of the 32 x 32 corner the level-2 detail bands, the rest of the
// image the level-1 detail bands. Within a band, the first letter is the
// vertical filter and the second the horizontal one: rows 0..N/2-1 are
// vertically low-pass, cols 0..N/2-1 horizontally low-pass.
//
// Timing: a run takes 2084 + 2084 + 532 + 532 = 5232 cycles at the
// defaults; host accesses are ignored while busy. host_rdata follows
// host_re by one cycle (host_rvalid).
module dwt2d_top
  import dwt_pkg::*;
#(
  parameter int unsigned N      = 64,
  parameter int unsigned LEVELS = 2,
  parameter int unsigned W      = 16,
  parameter int unsigned PIX_W  = 8,
  localparam int unsigned LN    = $clog2(N),
  localparam int unsigned AW    = 2*LN - 1,
  localparam int unsigned PW    = (2*LEVELS > 1) ? $clog2(2*LEVELS) : 1
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                start,
  output logic                busy,
  output logic                done,
  output logic [PW-1:0]       phase,
  input  logic                host_we,
  input  logic                host_re,
  input  logic [LN-1:0]       host_row,
  input  logic [LN-1:0]       host_col,
  input  logic [PIX_W-1:0]    host_wdata,
  output logic                host_rvalid,
  output logic signed [W-1:0] host_rdata
);

  logic [1:0]          bank_we, bank_re;
  logic [AW-1:0]       bank_waddr [2];
  logic [AW-1:0]       bank_raddr [2];
  logic signed [W-1:0] bank_wdata [2];
  logic signed [W-1:0] bank_rdata [2];

  dwt_processor #(.N(N), .LEVELS(LEVELS), .W(W), .PIX_W(PIX_W)) u_proc (
    .clk, .rst_n, .start, .busy, .done, .phase,
    .host_we, .host_re, .host_row, .host_col, .host_wdata,
    .host_rvalid, .host_rdata,
    .bank_we, .bank_waddr, .bank_wdata, .bank_re, .bank_raddr, .bank_rdata
  );

  for (genvar b = 0; b < 2; b++) begin : g_bank
    ext_mem_bank #(.W(W), .DEPTH(N*N/2)) u_bank (
      .clk,
      .we(bank_we[b]), .waddr(bank_waddr[b]), .wdata(bank_wdata[b]),
      .re(bank_re[b]), .raddr(bank_raddr[b]), .rdata(bank_rdata[b])
    );
  end

endmodule
