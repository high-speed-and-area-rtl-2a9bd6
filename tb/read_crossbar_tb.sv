// read_crossbar_tb: checks address routing and data return of the read
// crossbar against two array models of the banks.
//
// While busy it issues random even/odd pairs (the two pixels in different
// banks, which bank holds the even one random) and checks, one cycle later,
// that rd_even/rd_odd are the addressed words in even/odd order. While idle
// it issues random host reads and checks host_rdata and host_rvalid.
module read_crossbar_tb;
  localparam int W = 16, AW = 6, DEPTH = 1 << AW;

  logic clk = 1'b0, rst_n = 1'b0;
  logic busy = 1'b0, rd_en = 1'b0, rd_even_bank = 1'b0, host_re = 1'b0, host_bank = 1'b0;
  logic [AW-1:0] rd_addr_even = '0, rd_addr_odd = '0, host_addr = '0;
  logic signed [W-1:0] rd_even, rd_odd, host_rdata;
  logic host_rvalid;
  logic [1:0] bank_re;
  logic [AW-1:0] bank_raddr [2];
  logic signed [W-1:0] bank_rdata [2];
  logic signed [W-1:0] mem [2][DEPTH];
  int checks = 0, failures = 0;

  read_crossbar #(.W(W), .AW(AW)) dut (.*);

  // two registered-read banks
  always_ff @(posedge clk)
    for (int b = 0; b < 2; b++) if (bank_re[b]) bank_rdata[b] <= mem[b][bank_raddr[b]];

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit pend_eng, pend_host;
    int e_even, e_odd, e_host;
    for (int b = 0; b < 2; b++) for (int a = 0; a < DEPTH; a++) mem[b][a] = W'($urandom);
    pend_eng = 0; pend_host = 0;
    repeat (2) @(negedge clk);
    rst_n = 1'b1;
    for (int t = 0; t < 4000; t++) begin
      @(negedge clk);
      if (pend_eng) begin
        checks++;
        if (rd_even != W'(e_even) || rd_odd != W'(e_odd)) begin
          failures++;
          if (failures < 10) $display("t %0d: even %0d/%0d odd %0d/%0d", t, rd_even, e_even, rd_odd, e_odd);
        end
      end
      checks++;
      if (host_rvalid != pend_host || (pend_host && host_rdata != W'(e_host))) begin
        failures++;
        if (failures < 10) $display("t %0d: host v%0b/%0b %0d/%0d", t, host_rvalid, pend_host, host_rdata, e_host);
      end
      busy         = (t / 50) % 2 == 0;
      rd_en        = busy && ($urandom_range(3) != 0);
      rd_even_bank = $urandom_range(1);
      rd_addr_even = AW'($urandom);
      rd_addr_odd  = AW'($urandom);
      host_re      = $urandom_range(1);
      host_bank    = $urandom_range(1);
      host_addr    = AW'($urandom);
      pend_eng  = rd_en;
      e_even    = mem[rd_even_bank][rd_addr_even];
      e_odd     = mem[!rd_even_bank][rd_addr_odd];
      pend_host = host_re && !busy;
      e_host    = mem[host_bank][host_addr];
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
