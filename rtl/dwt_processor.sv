// dwt_processor: the 2-D DWT engine that sits between the two memory banks.
//
// It holds the memory controller, the input (read) crossbar, the 5/3
// lifting filter, the H delay line and the output (write) crossbars. A
// start pulse runs all 2*LEVELS phases back to back; every phase reads the
// active region two pixels per cycle, filters it line by line and writes
// L and H in place, L to the first half of each line and H to the second
// half, so that after the run the banks hold the Mallat layout of
// coefficients (LL2, the level-2 detail bands, then the level-1 detail
// bands). One phase takes NL*NL/2 + NL/2 + PIPE_LAT cycles: 2084 and 532
// cycles for the default 64 x 64 levels, 5232 cycles for a whole run.
//
// Interface: start/busy/done; a host port that writes pixels (8-bit,
// unsigned) and reads coefficients (W-bit, two's complement) by (row, col)
// while idle, read data one cycle after host_re; and the two banks' read
// and write ports, with bank b holding pixel (row, col) when
// row[0]^col[0] == b at word {row, col[msb:1]}.
//
// The block structure (filter, controller, crossbars; external banks)
// follows the paper's block diagram; the host port is this design's
// stand-in for the image import of the paper's simulation model.
module dwt_processor
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
  // host port (used while idle)
  input  logic                host_we,
  input  logic                host_re,
  input  logic [LN-1:0]       host_row,
  input  logic [LN-1:0]       host_col,
  input  logic [PIX_W-1:0]    host_wdata,
  output logic                host_rvalid,
  output logic signed [W-1:0] host_rdata,
  // bank ports
  output logic [1:0]          bank_we,
  output logic [AW-1:0]       bank_waddr [2],
  output logic signed [W-1:0] bank_wdata [2],
  output logic [1:0]          bank_re,
  output logic [AW-1:0]       bank_raddr [2],
  input  logic signed [W-1:0] bank_rdata [2]
);

  localparam int unsigned DW = $clog2(N/2 + 1);

  pass_dir_e           dir;
  logic                rd_en, rd_even_bank;
  logic [AW-1:0]       rd_addr_even, rd_addr_odd;
  logic                f_valid, f_sol, f_eol;
  logic [DW-1:0]       h_len;
  logic                wl_en, wl_bank, wh_en, wh_bank;
  logic [AW-1:0]       wl_addr, wh_addr;
  logic signed [W-1:0] rd_even, rd_odd;
  logic                l_valid, l_sol, l_eol;
  logic signed [W-1:0] l_data, h_data, h_delayed;

  logic                host_bank;
  logic [AW-1:0]       host_addr;
  assign host_bank = bank_of(host_row[0], host_col[0]);
  assign host_addr = {host_row, host_col[LN-1:1]};

  mem_controller #(.N(N), .LEVELS(LEVELS)) u_ctl (
    .clk, .rst_n, .start, .busy, .done, .phase, .dir,
    .rd_en, .rd_addr_even, .rd_addr_odd, .rd_even_bank,
    .f_valid, .f_sol, .f_eol, .h_len,
    .wl_en, .wl_bank, .wl_addr, .wh_en, .wh_bank, .wh_addr
  );

  read_crossbar #(.W(W), .AW(AW)) u_rxbar (
    .clk, .rst_n, .busy,
    .rd_en, .rd_addr_even, .rd_addr_odd, .rd_even_bank, .rd_even, .rd_odd,
    .host_re, .host_bank, .host_addr, .host_rvalid, .host_rdata,
    .bank_re, .bank_raddr, .bank_rdata
  );

  dwt_filter #(.W(W)) u_filter (
    .clk, .rst_n,
    .in_valid(f_valid), .in_sol(f_sol), .in_eol(f_eol),
    .in_even(rd_even), .in_odd(rd_odd),
    .out_valid(l_valid), .out_sol(l_sol), .out_eol(l_eol),
    .out_l(l_data), .out_h(h_data)
  );

  h_delay #(.W(W), .DEPTH(N/2)) u_hdelay (
    .clk, .len(h_len), .din(h_data), .dout(h_delayed)
  );

  write_crossbar #(.W(W), .AW(AW), .PIX_W(PIX_W)) u_wxbar (
    .busy,
    .wl_en, .wl_bank, .wl_addr, .wl_data(l_data),
    .wh_en, .wh_bank, .wh_addr, .wh_data(h_delayed),
    .host_we, .host_bank, .host_addr, .host_wdata,
    .bank_we, .bank_waddr, .bank_wdata
  );

  // The counters, not the filter's valid, decide the writes; the two must
  // agree. sol/eol only frame the line inside the filter.
  a_write_aligned: assert property (@(posedge clk) disable iff (!rst_n)
    wl_en |-> l_valid);
  logic unused_framing;
  assign unused_framing = l_sol ^ l_eol ^ dir;

endmodule
