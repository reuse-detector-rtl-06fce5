// rd_tag_compress: tag compression for the Reuse Detector buffer.
//
// The full sector tag (T_W bits) is cut into pieces of C_W bits, starting at
// bit 0; the last piece is padded with zeros. All pieces are XORed together
// to give the C_W-bit compressed tag. This is the compression scheme the
// Reuse Detector uses; several sectors share one compressed tag, so lookups
// may give false positives, which only cost SLLC writes, never correctness.
//
// Interface: tag in, ctag out. Purely combinational, no clock.
// Defaults: T_W = 31 (48-bit address, 64-byte blocks, 2-block sectors,
// 1024 sets: 48-6-1-10), C_W = 10 as in the evaluated Reuse Detector.
module rd_tag_compress #(
  parameter int unsigned T_W = 31,
  parameter int unsigned C_W = 10
) (
  input  logic [T_W-1:0] tag,
  output logic [C_W-1:0] ctag
);
  localparam int unsigned NPIECE = (T_W + C_W - 1) / C_W;

  logic [NPIECE*C_W-1:0] padded;

  always_comb begin
    padded = '0;
    padded[T_W-1:0] = tag;
    ctag = '0;
    for (int unsigned i = 0; i < NPIECE; i++)
      ctag ^= padded[i*C_W +: C_W];
  end

  initial assert (T_W > C_W) else $error("rd_tag_compress: T_W must exceed C_W");

endmodule
