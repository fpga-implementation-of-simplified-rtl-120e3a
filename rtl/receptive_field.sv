// receptive_field: image buffer and receptive-field window.
//
// Holds one IMG_W x IMG_W grey-level image, written a pixel at a time by the
// host, and returns the receptive-field (RF) value of any pixel
// combinationally. The paper implements the receptive field as a low-pass
// blurring filter; the kernel is not given, so this design uses the 3x3
// binomial kernel [1 2 1; 2 4 2; 1 2 1] / 16 with zero padding at the image
// border, which keeps RF in the pixel range 0..255.
// Interface: pix_we/pix_addr/pix_data write a pixel (raster order index);
// rd_idx selects the pixel whose blurred value appears on rf in the same cycle.
module receptive_field #(
  parameter int IMG_W = 28,
  parameter int PIX_W = snn_pkg::PIX_W,
  localparam int NPIX = IMG_W * IMG_W,
  localparam int AW   = $clog2(NPIX)
) (
  input  logic             clk,
  input  logic             pix_we,
  input  logic [AW-1:0]    pix_addr,
  input  logic [PIX_W-1:0] pix_data,
  input  logic [AW-1:0]    rd_idx,
  output logic [PIX_W-1:0] rf
);
  logic [PIX_W-1:0] img [NPIX];

  always_ff @(posedge clk)
    if (pix_we && int'(pix_addr) < NPIX) img[pix_addr] <= pix_data;

  always_comb begin
    int r, c, rr, cc, k;
    logic [PIX_W+4:0] acc;
    r   = int'(rd_idx) / IMG_W;
    c   = int'(rd_idx) % IMG_W;
    acc = '0;
    for (int dr = -1; dr <= 1; dr++)
      for (int dc = -1; dc <= 1; dc++) begin
        rr = r + dr;
        cc = c + dc;
        // binomial weights: 4 at the centre, 2 on edges, 1 on corners
        k  = (dr == 0 ? 2 : 1) * (dc == 0 ? 2 : 1);
        if (rr >= 0 && rr < IMG_W && cc >= 0 && cc < IMG_W)
          acc += (PIX_W+5)'(img[rr*IMG_W + cc]) * (PIX_W+5)'(k);
      end
    rf = PIX_W'(acc >> 4);
  end
endmodule
