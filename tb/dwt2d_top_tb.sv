// dwt2d_top_tb: end-to-end test of the 2-D DWT at its default size.
//
// With every parameter at its default (64 x 64 image, two levels, 16-bit
// words) it loads an image through the host port, runs the transform and
// reads all 4096 coefficients back, comparing each with the software
// reference dwt_ref_pkg::dwt2d. Three images are used: random pixels, a
// smooth ramp and a 0/255 checkerboard (largest coefficients). During the
// first run it also pokes start and a host write while busy; both must be
// ignored. The run must take 5232 cycles from start to done.
//
// It counts each mechanism of the design as it happens and fails if one
// never does: each of the four phases, the symmetric extension at the
// start and at the end of a line, the cycles where the L write and the
// delayed H write go to the two banks at once, cycles where the engine
// reads both banks at once, host loads and host reads.
module dwt2d_top_tb;
  import dwt_pkg::*;
  import dwt_ref_pkg::*;

  localparam int N = 64, LEVELS = 2, W = 16;
  localparam int LN = $clog2(N);
  localparam int RUN_CYCLES = 5232;

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done;
  logic [1:0] phase;
  logic host_we = 1'b0, host_re = 1'b0;
  logic [LN-1:0] host_row = '0, host_col = '0;
  logic [7:0] host_wdata = '0;
  logic host_rvalid;
  logic signed [W-1:0] host_rdata;

  int checks = 0, failures = 0;
  int phase_seen [4];
  int n_sol_mirror = 0, n_eol_mirror = 0, n_dual_write = 0, n_dual_read = 0;
  int n_host_load = 0, n_host_read = 0, n_rbw = 0;

  dwt2d_top dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // mechanism counters
  always @(posedge clk) if (rst_n) begin
    if (busy) phase_seen[phase]++;
    if (dut.u_proc.u_filter.s2_valid && dut.u_proc.u_filter.s2_sol) n_sol_mirror++;
    if (dut.u_proc.u_filter.s1_valid && dut.u_proc.u_filter.s1_eol) n_eol_mirror++;
    if (busy && dut.u_proc.bank_we == 2'b11) n_dual_write++;
    if (busy && dut.u_proc.bank_re == 2'b11) n_dual_read++;
    if (!busy && host_we) n_host_load++;
    if (host_rvalid) n_host_read++;
    for (int b = 0; b < 2; b++)
      if (dut.u_proc.bank_we[b] && dut.u_proc.bank_re[b] &&
          dut.u_proc.bank_waddr[b] == dut.u_proc.bank_raddr[b]) n_rbw++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 20) $display("FAIL %s", what);
    end
  endtask

  task automatic run_image(input int kind, input bit poke);
    img_t img, ref_img;
    int cyc;
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++)
        case (kind)
          0: img[r][c] = $urandom_range(255);
          1: img[r][c] = (r * 3 + c * 2) % 256;
          default: img[r][c] = (((r ^ c) & 1) != 0) ? 255 : 0;
        endcase
    ref_img = img;
    dwt2d(ref_img, N, LEVELS);
    // load
    for (int r = 0; r < N; r++)
      for (int c = 0; c < N; c++) begin
        @(negedge clk);
        host_we = 1'b1; host_row = LN'(r); host_col = LN'(c); host_wdata = 8'(img[r][c]);
      end
    @(negedge clk);
    host_we = 1'b0;
    // run
    start = 1'b1;
    @(negedge clk);
    start = 1'b0;
    cyc = 0;
    while (!done) begin
      @(negedge clk);
      cyc++;
      if (poke && cyc == 100) begin
        start = 1'b1;                       // must be ignored
        host_we = 1'b1; host_row = '0; host_col = '0; host_wdata = 8'hAA;
      end else begin
        start = 1'b0;
        host_we = 1'b0;
      end
      if (cyc > 2 * RUN_CYCLES) break;
    end
    check(cyc == RUN_CYCLES, $sformatf("image %0d: run took %0d cycles, expected %0d", kind, cyc, RUN_CYCLES));
    @(negedge clk);
    check(!busy, "idle after done");
    // read back, one pixel per cycle, data one cycle after the address
    for (int i = 0; i <= N * N; i++) begin
      @(negedge clk);
      if (i > 0) begin
        int pr, pc;
        pr = (i - 1) / N; pc = (i - 1) % N;
        check(host_rvalid && host_rdata == W'(ref_img[pr][pc]),
              $sformatf("image %0d coef (%0d,%0d): got %0d exp %0d", kind, pr, pc, host_rdata, ref_img[pr][pc]));
      end
      host_re = (i < N * N);
      host_row = LN'(i / N); host_col = LN'(i % N);
    end
    host_re = 1'b0;
  endtask

  initial begin
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    repeat (3) @(negedge clk);
    run_image(0, 1'b1);
    run_image(1, 1'b0);
    run_image(2, 1'b0);
    repeat (2) @(negedge clk);
    $display("phases %0d %0d %0d %0d, sol mirror %0d, eol mirror %0d, dual writes %0d, dual reads %0d, loads %0d, host reads %0d, read-before-write overlaps %0d",
             phase_seen[0], phase_seen[1], phase_seen[2], phase_seen[3], n_sol_mirror,
             n_eol_mirror, n_dual_write, n_dual_read, n_host_load, n_host_read, n_rbw);
    for (int p = 0; p < 4; p++) check(phase_seen[p] > 0, $sformatf("phase %0d never ran", p));
    check(n_sol_mirror > 0, "no start-of-line extension");
    check(n_eol_mirror > 0, "no end-of-line extension");
    check(n_dual_write > 0, "L and H never written to both banks at once");
    check(n_dual_read > 0, "both banks never read at once");
    check(n_host_load == 3 * N * N, "host loads");
    check(n_host_read == 3 * N * N, "host reads");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
