// dwt_filter_tb: checks the lifting filter against the software 5/3 lift.
//
// Sends lines of random length (1..16 pairs) and random samples, back to
// back or with idle gaps between lines, and checks every L and H against
// dwt_ref_pkg::lift53, the sol/eol flags, and that each result appears
// exactly FILTER_LAT cycles after its input pair.
module dwt_filter_tb;
  import dwt_pkg::*;
  import dwt_ref_pkg::*;

  localparam int W = 16;

  logic clk = 1'b0;
  logic rst_n = 1'b0;
  logic in_valid = 1'b0, in_sol = 1'b0, in_eol = 1'b0;
  logic signed [W-1:0] in_even = '0, in_odd = '0;
  logic out_valid, out_sol, out_eol;
  logic signed [W-1:0] out_l, out_h;

  int checks = 0, failures = 0;
  // rising edges seen so far; written only by the checker
  longint cycle = 0;

  dwt_filter #(.W(W)) dut (.*);

  always #5 clk = ~clk;

  // expected results, queued in output order with their due cycle
  int exp_l[$], exp_h[$];
  longint exp_cyc[$];
  bit exp_sol[$], exp_eol[$];

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always @(posedge clk) begin
    cycle++;
    if (rst_n && out_valid) begin
      checks++;
      if (exp_l.size() == 0) begin
        failures++;
        $display("unexpected output at cycle %0d", cycle);
      end else begin
        int el, eh;
        longint ec;
        bit es, ee;
        el = exp_l.pop_front(); eh = exp_h.pop_front(); ec = exp_cyc.pop_front();
        es = exp_sol.pop_front(); ee = exp_eol.pop_front();
        if (out_l != W'(el) || out_h != W'(eh) || out_sol != es || out_eol != ee
            || cycle != ec) begin
          failures++;
          if (failures < 10)
            $display("mismatch cyc %0d (exp %0d): L %0d/%0d H %0d/%0d sol %0b/%0b eol %0b/%0b",
                     cycle, ec, out_l, el, out_h, eh, out_sol, es, out_eol, ee);
        end
      end
    end
  end

  initial begin
    line_t x, l, h;
    int len, gap;
    repeat (3) @(posedge clk);
    rst_n <= 1'b1;
    @(posedge clk);
    for (int ln = 0; ln < 400; ln++) begin
      len = 2 * (1 + $urandom_range(15));
      for (int i = 0; i < len; i++) begin
        case (ln % 4)
          0: x[i] = $urandom_range(255);                 // pixels
          1: x[i] = int'($urandom_range(4000)) - 2000;   // signed coefficients
          2: x[i] = (i % 2) ? 255 : 0;                   // worst-case edges
          default: x[i] = int'($urandom_range(65535 / 4)) - 8192;
        endcase
      end
      lift53(x, len, l, h);
      for (int p = 0; p < len/2; p++) begin
        @(negedge clk);
        in_valid = 1'b1;
        in_sol   = (p == 0);
        in_eol   = (p == len/2 - 1);
        in_even  = W'(x[2*p]);
        in_odd   = W'(x[2*p+1]);
        exp_l.push_back(l[p]); exp_h.push_back(h[p]);
        exp_sol.push_back(p == 0); exp_eol.push_back(p == len/2 - 1);
        // driven after a falling edge, the pair is sampled at the next
        // rising edge; its result is registered FILTER_LAT - 1 edges later
        // and seen by the checker at the edge after that
        exp_cyc.push_back(cycle + 1 + FILTER_LAT);
      end
      gap = $urandom_range(2);
      repeat (gap) begin
        @(negedge clk);
        in_valid = 1'b0; in_sol = 1'b0; in_eol = 1'b0;
        in_even  = W'($urandom); in_odd = W'($urandom);
      end
    end
    @(negedge clk);
    in_valid = 1'b0;
    repeat (10) @(posedge clk);
    checks++;
    if (exp_l.size() != 0) begin
      failures++;
      $display("%0d results never appeared", exp_l.size());
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

endmodule
