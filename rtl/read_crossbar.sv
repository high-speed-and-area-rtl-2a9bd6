// read_crossbar: the input-side crossbar of the DWT processor.
//
// The controller asks for an even/odd pixel pair per cycle and says which
// bank holds the even pixel; the two pixels always sit in different banks.
// The crossbar sends each address to the bank that holds it and, one cycle
// later (the banks' read latency), swaps the two banks' read data back into
// even/odd order for the filter. When the processor is idle it instead
// serves the host read port: the host addresses a pixel by its bank and
// word, and the word comes back one cycle later on host_rdata.
//
// The paper names the crossbars and says they interleave pixels between
// the two banks; the routing rule, the host path and its priority (the
// engine wins while busy) are this design's choices.
module read_crossbar #(
  parameter int unsigned W  = 16,
  parameter int unsigned AW = 11
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                busy,
  // engine side
  input  logic                rd_en,
  input  logic [AW-1:0]       rd_addr_even,
  input  logic [AW-1:0]       rd_addr_odd,
  input  logic                rd_even_bank,
  output logic signed [W-1:0] rd_even,
  output logic signed [W-1:0] rd_odd,
  // host side
  input  logic                host_re,
  input  logic                host_bank,
  input  logic [AW-1:0]       host_addr,
  output logic                host_rvalid,
  output logic signed [W-1:0] host_rdata,
  // bank read ports
  output logic [1:0]          bank_re,
  output logic [AW-1:0]       bank_raddr [2],
  input  logic signed [W-1:0] bank_rdata [2]
);

  logic sel_q;        // bank of the even pixel, one cycle late
  logic host_bank_q;

  always_comb begin
    if (busy) begin
      bank_re       = {rd_en, rd_en};
      bank_raddr[0] = rd_even_bank ? rd_addr_odd  : rd_addr_even;
      bank_raddr[1] = rd_even_bank ? rd_addr_even : rd_addr_odd;
    end else begin
      bank_re       = {host_re & host_bank, host_re & ~host_bank};
      bank_raddr[0] = host_addr;
      bank_raddr[1] = host_addr;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      sel_q       <= 1'b0;
      host_bank_q <= 1'b0;
      host_rvalid <= 1'b0;
    end else begin
      sel_q       <= rd_even_bank;
      host_bank_q <= host_bank;
      host_rvalid <= host_re && !busy;
    end
  end

  assign rd_even    = sel_q ? bank_rdata[1] : bank_rdata[0];
  assign rd_odd     = sel_q ? bank_rdata[0] : bank_rdata[1];
  assign host_rdata = bank_rdata[host_bank_q];

endmodule
