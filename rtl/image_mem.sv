// image_mem: memory for one source image, organised as eight single-port
// memory modules so that eight pixels are read per clock, the organisation
// the paper chooses ("8 single port memory modules to get 8 pixels/clock").
//
// Bank i holds the pixels whose column index is i modulo 8, so one address
// selects eight horizontally adjacent pixels: the image is stored in raster
// order as words of 8 pixels, address = row * (width/8) + column/8. How the
// image reaches the memory is not described in the paper; here a host
// writes whole 8-pixel words through the same single port, which is this
// design's choice. Capacity defaults to one 3840x2160 frame.
//
// Timing: one access per clock; read data one clock after a read.
module image_mem
  import fusion_pkg::*;
#(
  parameter int DEPTH = 1036800,
  localparam int AW = $clog2(DEPTH)
) (
  input  logic          clk,
  input  logic          en,
  input  logic          we,
  input  logic [AW-1:0] addr,
  input  pix_vec_t      wdata,
  output pix_vec_t      rdata
);

  for (genvar i = 0; i < N; i++) begin : g_bank
    pix_bank #(.DEPTH(DEPTH)) u_bank (
      .clk, .en, .we, .addr, .wdata(wdata[i]), .rdata(rdata[i]));
  end

endmodule
