// dwt_processor_tb: the DWT processor with two memory banks at a size
// other than the default (16 x 16, three levels), so that the address and
// phase logic is exercised down to 4 x 4 lines. Loads random images, runs
// the transform, checks the cycle count (sum over levels of
// 2 * (NL*NL/2 + NL/2 + PIPE_LAT)) and every coefficient against the
// software reference.
module dwt_processor_tb;
  import dwt_pkg::*;
  import dwt_ref_pkg::*;

  localparam int N = 16, LEVELS = 3, W = 16;
  localparam int LN = $clog2(N), AW = 2*LN - 1;
  localparam int PW = $clog2(2*LEVELS);

  logic clk = 1'b0, rst_n = 1'b0, start = 1'b0;
  logic busy, done;
  logic [PW-1:0] phase;
  logic host_we = 1'b0, host_re = 1'b0;
  logic [LN-1:0] host_row = '0, host_col = '0;
  logic [7:0] host_wdata = '0;
  logic host_rvalid;
  logic signed [W-1:0] host_rdata;
  logic [1:0] bank_we, bank_re;
  logic [AW-1:0] bank_waddr [2], bank_raddr [2];
  logic signed [W-1:0] bank_wdata [2], bank_rdata [2];
  int checks = 0, failures = 0;

  dwt_processor #(.N(N), .LEVELS(LEVELS), .W(W)) dut (.*);

  for (genvar b = 0; b < 2; b++) begin : g_bank
    ext_mem_bank #(.W(W), .DEPTH(N*N/2)) u_bank (
      .clk, .we(bank_we[b]), .waddr(bank_waddr[b]), .wdata(bank_wdata[b]),
      .re(bank_re[b]), .raddr(bank_raddr[b]), .rdata(bank_rdata[b]));
  end

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

  initial begin
    img_t img;
    int cyc, exp_cyc;
    exp_cyc = 0;
    for (int lv = 0; lv < LEVELS; lv++) begin
      int nl;
      nl = N >> lv;
      exp_cyc += 2 * (nl * nl / 2 + nl / 2 + PIPE_LAT);
    end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    for (int it = 0; it < 4; it++) begin
      for (int r = 0; r < N; r++)
        for (int c = 0; c < N; c++) begin
          img[r][c] = (it == 3) ? 255 * ((r + c) & 1) : $urandom_range(255);
          @(negedge clk);
          host_we = 1'b1; host_row = LN'(r); host_col = LN'(c); host_wdata = 8'(img[r][c]);
        end
      @(negedge clk);
      host_we = 1'b0;
      dwt2d(img, N, LEVELS);
      start = 1'b1;
      @(negedge clk);
      start = 1'b0;
      cyc = 0;
      while (!done && cyc < 4 * exp_cyc) begin
        @(negedge clk);
        cyc++;
      end
      check(cyc == exp_cyc, $sformatf("run took %0d cycles, expected %0d", cyc, exp_cyc));
      @(negedge clk);
      for (int i = 0; i <= N * N; i++) begin
        @(negedge clk);
        if (i > 0)
          check(host_rvalid && host_rdata == W'(img[(i-1)/N][(i-1)%N]),
                $sformatf("coef (%0d,%0d) got %0d exp %0d", (i-1)/N, (i-1)%N, host_rdata,
                          img[(i-1)/N][(i-1)%N]));
        host_re = (i < N * N);
        host_row = LN'(i / N); host_col = LN'(i % N);
      end
      host_re = 1'b0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
