// ext_mem_bank_tb: checks the dual-port bank against an array model.
//
// Random writes and reads, with a good share of cycles where the read and
// the write hit the same address; such a read must return the old word
// (read before write). Read data is checked one cycle after the address.
module ext_mem_bank_tb;
  localparam int W = 16;
  localparam int DEPTH = 64;
  localparam int AW = $clog2(DEPTH);

  logic clk = 1'b0;
  logic we = 1'b0, re = 1'b0;
  logic [AW-1:0] waddr = '0, raddr = '0;
  logic signed [W-1:0] wdata = '0, rdata;
  int checks = 0, failures = 0, overlaps = 0;
  int model [DEPTH];
  bit pend = 1'b0;
  int pend_val;

  ext_mem_bank #(.W(W), .DEPTH(DEPTH)) dut (.*);

  always #5 clk = ~clk;

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    // fill the bank so that every word is known
    for (int a = 0; a < DEPTH; a++) begin
      @(negedge clk);
      we = 1'b1; waddr = AW'(a); wdata = W'($urandom); model[a] = int'(wdata);
    end
    for (int t = 0; t < 5000; t++) begin
      @(negedge clk);
      // check the word asked for in the previous cycle
      if (pend) begin
        checks++;
        if (rdata != W'(pend_val)) begin
          failures++;
          if (failures < 10) $display("t %0d: read %0d exp %0d", t, rdata, pend_val);
        end
      end
      we    = ($urandom_range(3) != 0);
      re    = ($urandom_range(3) != 0);
      waddr = AW'($urandom);
      raddr = ($urandom_range(2) == 0) ? waddr : AW'($urandom);
      wdata = W'($urandom);
      pend  = re;
      pend_val = model[raddr];          // old value: read before write
      if (re && we && raddr == waddr) overlaps++;
      if (we) model[waddr] = int'(wdata);
    end
    @(negedge clk);
    we = 1'b0; re = 1'b0;
    checks++;
    if (overlaps == 0) begin
      failures++;
      $display("no read/write overlap happened");
    end
    $display("overlaps %0d", overlaps);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
