// write_crossbar: the output-side crossbars of the DWT processor.
//
// While the processor runs, the controller gives one L write and one
// (delayed) H write per cycle, each with its bank and word address; the
// two are always in different banks, so the crossbar simply steers each
// onto the write port of its bank. While the processor is idle the host
// write port is steered instead: it loads a pixel (zero-extended to W
// bits) into the bank that holds it. Purely combinational.
//
// The paper states that the L and H outputs are distributed alternately to
// the two banks; the steering rule and the host load path are this
// design's choices.
module write_crossbar #(
  parameter int unsigned W     = 16,
  parameter int unsigned AW    = 11,
  parameter int unsigned PIX_W = 8
) (
  input  logic                busy,
  // engine side
  input  logic                wl_en,
  input  logic                wl_bank,
  input  logic [AW-1:0]       wl_addr,
  input  logic signed [W-1:0] wl_data,
  input  logic                wh_en,
  input  logic                wh_bank,
  input  logic [AW-1:0]       wh_addr,
  input  logic signed [W-1:0] wh_data,
  // host side
  input  logic                host_we,
  input  logic                host_bank,
  input  logic [AW-1:0]       host_addr,
  input  logic [PIX_W-1:0]    host_wdata,
  // bank write ports
  output logic [1:0]          bank_we,
  output logic [AW-1:0]       bank_waddr [2],
  output logic signed [W-1:0] bank_wdata [2]
);

  always_comb begin
    bank_we = '0;
    for (int b = 0; b < 2; b++) begin
      bank_waddr[b] = '0;
      bank_wdata[b] = '0;
    end
    if (busy) begin
      if (wl_en) begin
        bank_we[wl_bank]    = 1'b1;
        bank_waddr[wl_bank] = wl_addr;
        bank_wdata[wl_bank] = wl_data;
      end
      if (wh_en) begin
        bank_we[wh_bank]    = 1'b1;
        bank_waddr[wh_bank] = wh_addr;
        bank_wdata[wh_bank] = wh_data;
      end
    end else if (host_we) begin
      bank_we[host_bank]    = 1'b1;
      bank_waddr[host_bank] = host_addr;
      bank_wdata[host_bank] = W'({1'b0, host_wdata});
    end
  end

endmodule
