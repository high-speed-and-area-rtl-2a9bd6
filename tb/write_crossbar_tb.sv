// write_crossbar_tb: checks the steering of L, H and host writes.
//
// Random engine writes (L and H in opposite banks, each enable random)
// while busy, random host writes while idle, and host writes presented
// while busy, which must be ignored. Expected bank port values are worked
// out here from the steering rule.
module write_crossbar_tb;
  localparam int W = 16, AW = 11, PIX_W = 8;

  logic busy;
  logic wl_en, wl_bank, wh_en, wh_bank, host_we, host_bank;
  logic [AW-1:0] wl_addr, wh_addr, host_addr;
  logic signed [W-1:0] wl_data, wh_data;
  logic [PIX_W-1:0] host_wdata;
  logic [1:0] bank_we;
  logic [AW-1:0] bank_waddr [2];
  logic signed [W-1:0] bank_wdata [2];
  int checks = 0, failures = 0;

  write_crossbar #(.W(W), .AW(AW), .PIX_W(PIX_W)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] e_we;
    logic [AW-1:0] e_addr [2];
    logic signed [W-1:0] e_data [2];
    for (int t = 0; t < 4000; t++) begin
      busy       = t[0] ^ t[3];
      wl_en      = $urandom_range(1);
      wh_en      = $urandom_range(1);
      wl_bank    = $urandom_range(1);
      wh_bank    = ~wl_bank;
      wl_addr    = AW'($urandom); wh_addr = AW'($urandom);
      wl_data    = W'($urandom);  wh_data = W'($urandom);
      host_we    = $urandom_range(1);
      host_bank  = $urandom_range(1);
      host_addr  = AW'($urandom);
      host_wdata = PIX_W'($urandom);
      e_we = '0;
      if (busy) begin
        if (wl_en) begin e_we[wl_bank] = 1'b1; e_addr[wl_bank] = wl_addr; e_data[wl_bank] = wl_data; end
        if (wh_en) begin e_we[wh_bank] = 1'b1; e_addr[wh_bank] = wh_addr; e_data[wh_bank] = wh_data; end
      end else if (host_we) begin
        e_we[host_bank] = 1'b1; e_addr[host_bank] = host_addr;
        e_data[host_bank] = W'(int'(host_wdata));   // zero-extended pixel
      end
      #1;
      checks++;
      if (bank_we != e_we) begin
        failures++;
        if (failures < 10) $display("t %0d: we %b exp %b", t, bank_we, e_we);
      end
      for (int b = 0; b < 2; b++) if (e_we[b]) begin
        checks++;
        if (bank_waddr[b] != e_addr[b] || bank_wdata[b] != e_data[b]) begin
          failures++;
          if (failures < 10)
            $display("t %0d bank %0d: addr %0d/%0d data %0d/%0d", t, b,
                     bank_waddr[b], e_addr[b], bank_wdata[b], e_data[b]);
        end
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
