// mem_controller_tb: checks every address the controller issues.
//
// Runs the controller at its default size (64 x 64, two levels). Before
// start it must stay idle (counts held at zero). After start, for every
// cycle of every phase, it decodes the bank/word of each read and write
// back to a pixel (row, col) and compares it with the pixel expected from
// the pass order: pairs (2m, 2m+1) of line li read at cycle li*NL/2 + m;
// L(m) of line li written PIPE_LAT cycles later at position m; H(m) of
// line li written NL/2 cycles after that at position NL/2 + m. It also
// checks sol/eol/valid framing, h_len, the phase number and length
// (NL*NL/2 + NL/2 + PIPE_LAT cycles), the done pulse, that a start during
// a run is ignored, and that a second run behaves the same.
module mem_controller_tb;
  import dwt_pkg::*;

  localparam int N = 64, LEVELS = 2;
  localparam int LN = $clog2(N), AW = 2*LN - 1;
  localparam int NPH = 2*LEVELS;
  localparam int PW = $clog2(NPH), DW = $clog2(N/2 + 1);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done;
  logic [PW-1:0] phase;
  pass_dir_e dir;
  logic rd_en, rd_even_bank, f_valid, f_sol, f_eol;
  logic [AW-1:0] rd_addr_even, rd_addr_odd, wl_addr, wh_addr;
  logic [DW-1:0] h_len;
  logic wl_en, wl_bank, wh_en, wh_bank;
  int checks = 0, failures = 0;

  mem_controller #(.N(N), .LEVELS(LEVELS)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  // pixel (row, col) at position pos of line ln in a pass of direction d
  function automatic void pix(input int ln, input int pos, input int d,
                              output int row, output int col);
    row = d ? ln : pos;
    col = d ? pos : ln;
  endfunction

  // bank/word -> pixel
  function automatic void decode(input int bank, input int addr,
                                 output int row, output int col);
    row = addr >> (LN - 1);
    col = ((addr & ((1 << (LN - 1)) - 1)) << 1) | (bank ^ (row & 1));
  endfunction

  task automatic run_once(input bit poke_start);
    int total = 0;
    int prev_rd_en = 0, prev_sol = 0, prev_eol = 0;
    // start is sampled at the next rising edge
    @(negedge clk);
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    for (int p = 0; p < NPH; p++) begin
      int nl, half, pairs, len, d;
      nl = N >> (p / 2); half = nl / 2; pairs = nl * half;
      len = pairs + half + PIPE_LAT; d = p % 2;
      for (int k = 0; k < len; k++) begin
        int er, ec, gr, gc, eo_r, eo_c, j;
        if (k != 0 || p != 0) @(negedge clk);
        if (poke_start && p == 1 && k == 7) start = 1'b1;
        else start = 1'b0;
        total++;
        check(busy && phase == PW'(p) && dir == pass_dir_e'(d) && h_len == DW'(half) && !done,
              $sformatf("state p%0d k%0d busy %0b phase %0d", p, k, busy, phase));
        // framing of the data read one cycle ago
        check(f_valid == prev_rd_en && f_sol == prev_sol && f_eol == prev_eol,
              $sformatf("framing p%0d k%0d", p, k));
        // reads
        check(rd_en == (k < pairs), $sformatf("rd_en p%0d k%0d", p, k));
        prev_rd_en = (k < pairs);
        prev_sol   = (k < pairs) && (k % half == 0);
        prev_eol   = (k < pairs) && (k % half == half - 1);
        if (k < pairs) begin
          pix(k / half, 2 * (k % half), d, er, ec);
          decode(rd_even_bank, rd_addr_even, gr, gc);
          check(gr == er && gc == ec, $sformatf("rd even p%0d k%0d got (%0d,%0d) exp (%0d,%0d)", p, k, gr, gc, er, ec));
          pix(k / half, 2 * (k % half) + 1, d, eo_r, eo_c);
          decode(!rd_even_bank, rd_addr_odd, gr, gc);
          check(gr == eo_r && gc == eo_c, $sformatf("rd odd p%0d k%0d", p, k));
        end
        // writes
        j = k - PIPE_LAT;
        check(wl_en == (j >= 0 && j < pairs), $sformatf("wl_en p%0d k%0d", p, k));
        if (j >= 0 && j < pairs) begin
          pix(j / half, j % half, d, er, ec);
          decode(wl_bank, wl_addr, gr, gc);
          check(gr == er && gc == ec, $sformatf("L wr p%0d k%0d got (%0d,%0d) exp (%0d,%0d)", p, k, gr, gc, er, ec));
        end
        check(wh_en == (j >= half && j < pairs + half), $sformatf("wh_en p%0d k%0d", p, k));
        if (j >= half && j < pairs + half) begin
          pix(j / half - 1, half + j % half, d, er, ec);
          decode(wh_bank, wh_addr, gr, gc);
          check(gr == er && gc == ec, $sformatf("H wr p%0d k%0d got (%0d,%0d) exp (%0d,%0d)", p, k, gr, gc, er, ec));
          if (j < pairs) check(wh_bank != wl_bank, "opposite banks");
        end
      end
    end
    @(negedge clk);
    check(!busy && done, "done pulse after the last phase");
    @(negedge clk);
    check(!busy && !done && !rd_en && !wl_en && !wh_en, "idle after done");
    check(total == 2 * (2084 + 532), $sformatf("run length %0d", total));
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    // held idle until start
    repeat (20) begin
      @(negedge clk);
      check(!busy && !rd_en && !wl_en && !wh_en && !f_valid && phase == '0, "idle before start");
    end
    run_once(1'b1);
    repeat (5) @(negedge clk);
    run_once(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
