// pix_bank: one single-port pixel memory module (one read or one write per
// clock). Eight of these make one image memory. Read data is registered and
// appears one clock after a read; a write in the same clock takes priority
// and returns no data. This is a generic synchronous SRAM model written as
// an array; the paper names single-port memory modules but no macro.
module pix_bank
  import fusion_pkg::*;
#(
  parameter int DEPTH = 1036800,     // 3840 x 2160 / 8 pixels per bank
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  pix_t          wdata,
  output pix_t          rdata
);

  pix_t mem [DEPTH];

  always_ff @(posedge clk) begin
    if (en) begin
      if (we) mem[addr] <= wdata;
      else    rdata     <= mem[addr];
    end
  end

endmodule
