// mem_controller: counters, phase register and address generation.
//
// One run of the processor is 2*LEVELS phases. Phase p works on level
// p/2 (active region NL x NL with NL = N >> level, the top-left corner of
// the image) and makes one 1-D pass over it: even phases are vertical
// passes (each column is a line), odd phases horizontal passes (each row
// is a line). With the defaults there are four phases: vertical and
// horizontal at level 1 on 64 x 64, then the same on the 32 x 32 LL band.
//
// All control comes from two counters and the phase (state) register:
//  * the master counter cnt runs from the start of a phase; while cnt <
//    NL*NL/2 it issues one read pair per cycle: line li = cnt / (NL/2),
//    pair m = cnt % (NL/2), pixels at positions 2m and 2m+1 of that line.
//    In a horizontal pass the in-bank read address of both pixels is just
//    cnt (row-major, stride 1); in a vertical pass it is a recombination
//    of the counter bits.
//  * the write counter wcnt starts PIPE_LAT cycles after cnt, so that
//    wcnt = j is the index of the L/H pair leaving the filter. L(m) of
//    line j/(NL/2) is written to position m of that line. H is delayed by
//    NL/2 cycles (h_len), so at wcnt = j the H(m) of the previous line is
//    written to position NL/2 + m of that line. Over one line each bank
//    word address is hit by two consecutive writes to the two banks.
//  * a phase ends when the last H has been written (wcnt = NL*NL/2 +
//    NL/2 - 1); the next phase then starts reading data that is complete.
// Reset holds both counters at zero until a start pulse; start is ignored
// while a run is in progress. done pulses for one cycle after the last
// phase. The filter framing (f_valid/f_sol/f_eol) is registered so that it
// lines up with the read data, one cycle after the read address.
//
// Pixel (row, col) lives in bank row[0]^col[0] at word {row, col[msb:1]}
// (dwt_pkg). From the paper: two free-running counters, reset holding the
// counts at zero until start, a phase register, stride-1 reads, addresses
// built from counter bits, each write address used twice, H delayed by 32
// cycles so L and H go to opposite banks. The bank map, the pass order
// within the phases, the write-counter offset and the drain at the end of
// a phase are this design's choices.
module mem_controller
  import dwt_pkg::*;
#(
  parameter int unsigned N      = 64,      // image is N x N pixels
  parameter int unsigned LEVELS = 2,       // decomposition levels
  localparam int unsigned LN    = $clog2(N),
  localparam int unsigned AW    = 2*LN - 1,           // in-bank address
  localparam int unsigned NPH   = 2*LEVELS,
  localparam int unsigned PW    = (NPH > 1) ? $clog2(NPH) : 1,
  localparam int unsigned CW    = 2*LN + 1,           // counter width
  localparam int unsigned DW    = $clog2(N/2 + 1)     // h_len width
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          start,
  output logic          busy,
  output logic          done,
  output logic [PW-1:0] phase,
  output pass_dir_e     dir,
  // read side (to the read crossbar)
  output logic          rd_en,
  output logic [AW-1:0] rd_addr_even,
  output logic [AW-1:0] rd_addr_odd,
  output logic          rd_even_bank,   // bank holding the even pixel
  // filter framing, aligned with the read data
  output logic          f_valid,
  output logic          f_sol,
  output logic          f_eol,
  // H delay for the current phase
  output logic [DW-1:0] h_len,
  // write side (to the write crossbar)
  output logic          wl_en,
  output logic          wl_bank,
  output logic [AW-1:0] wl_addr,
  output logic          wh_en,
  output logic          wh_bank,
  output logic [AW-1:0] wh_addr
);

  logic          running;
  logic          wr_run;
  logic [CW-1:0] cnt;
  logic [CW-1:0] wcnt;

  // Geometry of the current phase.
  logic [LN-1:0] level;
  logic [LN-1:0] half_log;    // log2(NL/2)
  logic [CW-1:0] half;        // NL/2
  logic [CW-1:0] pairs;       // NL*NL/2 pairs per phase

  always_comb begin
    level    = LN'(phase >> 1);
    half_log = LN'(LN - 1) - level;
    half     = CW'(1) << half_log;
    pairs    = CW'(1) << (2*half_log + 1);
    dir      = pass_dir_e'(phase[0]);
    h_len    = DW'(half);
  end

  // Word address and bank of position pos on line ln of the current pass.
  function automatic logic [AW-1:0] word_of(input logic [LN-1:0] ln,
                                            input logic [LN-1:0] pos,
                                            input pass_dir_e d);
    logic [LN-1:0] row;
    logic [LN-2:0] col_hi;
    row    = (d == PASS_HORIZ) ? ln : pos;
    col_hi = (d == PASS_HORIZ) ? pos[LN-1:1] : ln[LN-1:1];
    return {row, col_hi};
  endfunction

  // Bank of position pos on line ln: the checkerboard is symmetric in row
  // and column, so only the two LSBs matter.
  function automatic logic bank_at(input logic ln_lsb, input logic pos_lsb);
    return bank_of(ln_lsb, pos_lsb);
  endfunction

  // Read address generation from the master counter.
  logic [LN-1:0] r_line, r_pair;
  always_comb begin
    r_line       = LN'(cnt >> half_log);
    r_pair       = LN'(cnt & (half - 1'b1));
    rd_en        = running && (cnt < pairs);
    rd_addr_even = word_of(r_line, LN'({r_pair, 1'b0}), dir);
    rd_addr_odd  = word_of(r_line, LN'({r_pair, 1'b1}), dir);
    rd_even_bank = bank_at(r_line[0], 1'b0);
  end

  // Write address generation from the write counter.
  logic [LN-1:0] w_line, w_pos, h_line;
  logic [CW-1:0] hcnt;
  always_comb begin
    w_line  = LN'(wcnt >> half_log);
    w_pos   = LN'(wcnt & (half - 1'b1));
    hcnt    = wcnt - half;
    h_line  = LN'(hcnt >> half_log);
    wl_en   = wr_run && (wcnt < pairs);
    wl_addr = word_of(w_line, w_pos, dir);
    wl_bank = bank_at(w_line[0], w_pos[0]);
    wh_en   = wr_run && (wcnt >= half) && (hcnt < pairs);
    wh_addr = word_of(h_line, LN'(half) | w_pos, dir);
    wh_bank = bank_at(h_line[0], w_pos[0]);  // NL/2 is even
  end

  logic phase_end;
  assign phase_end = wr_run && (wcnt == pairs + half - 1'b1);
  assign busy      = running;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      running <= 1'b0;
      wr_run  <= 1'b0;
      cnt     <= '0;
      wcnt    <= '0;
      phase   <= '0;
      done    <= 1'b0;
      f_valid <= 1'b0;
      f_sol   <= 1'b0;
      f_eol   <= 1'b0;
    end else begin
      done    <= 1'b0;
      f_valid <= rd_en;
      f_sol   <= rd_en && (r_pair == '0);
      f_eol   <= rd_en && (CW'(r_pair) == half - 1'b1);
      if (!running) begin
        cnt    <= '0;
        wcnt   <= '0;
        wr_run <= 1'b0;
        phase  <= '0;
        if (start) running <= 1'b1;
      end else if (phase_end) begin
        cnt    <= '0;
        wcnt   <= '0;
        wr_run <= 1'b0;
        if (phase == PW'(NPH - 1)) begin
          running <= 1'b0;
          done    <= 1'b1;
        end else begin
          phase <= phase + 1'b1;
        end
      end else begin
        cnt <= cnt + 1'b1;
        if (cnt == CW'(PIPE_LAT - 1)) wr_run <= 1'b1;
        if (wr_run) wcnt <= wcnt + 1'b1;
      end
    end
  end

  // The L write and the delayed H write never share a bank.
  a_opposite_banks: assert property (@(posedge clk) disable iff (!rst_n)
    (wl_en && wh_en) |-> (wl_bank != wh_bank));
  // The even and odd pixel of a pair sit in different banks.
  a_pair_banks: assert property (@(posedge clk) disable iff (!rst_n)
    rd_en |-> (bank_at(r_line[0], 1'b1) != rd_even_bank));

endmodule
