// h_delay_tb: checks that h_delay returns its input exactly len cycles
// later, for every len from 1 to DEPTH and for the two lengths the
// processor uses (N/2 and N/4).
module h_delay_tb;
  localparam int W = 16;
  localparam int DEPTH = 32;
  localparam int LW = $clog2(DEPTH + 1);

  logic clk = 1'b0;
  logic [LW-1:0] len;
  logic signed [W-1:0] din = '0, dout;
  int checks = 0, failures = 0;
  logic signed [W-1:0] hist [$];

  h_delay #(.W(W), .DEPTH(DEPTH)) dut (.clk, .len, .din, .dout);

  always #5 clk = ~clk;

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lens[$];
    for (int i = 1; i <= DEPTH; i++) lens.push_back(i);
    lens.push_back(32); lens.push_back(16); lens.push_back(32);
    foreach (lens[k]) begin
      len = LW'(lens[k]);
      hist.delete();
      for (int t = 0; t < 3 * DEPTH + 10; t++) begin
        din = W'($urandom);
        hist.push_back(din);
        @(posedge clk);
        #1;
        // hist[t] went in at this edge; dout now shows the value that went
        // in len edges ago, i.e. hist[t - len + 1]
        if (t >= lens[k]) begin
          checks++;
          if (dout !== hist[t - lens[k] + 1]) begin
            failures++;
            if (failures < 10)
              $display("len %0d t %0d: got %0d exp %0d", lens[k], t, dout,
                       hist[t - lens[k] + 1]);
          end
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
