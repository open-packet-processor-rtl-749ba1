// opp_sam: one Shift-and-Mask unit of the packet fields extractor.
//
// Shifts the extraction vector right by `offset` bits, so that the chosen field
// starts at bit 0, and ANDs the low OUT_W bits with `mask`. Offsets with masks
// (instead of offsets with lengths) let one unit pick a field of any width or a
// sparse set of bits. Purely combinational.
module opp_sam #(
  parameter int unsigned IN_W  = 376,
  parameter int unsigned OUT_W = 32,
  parameter int unsigned OFF_W = 9
) (
  input  logic [IN_W-1:0]  vec,
  input  logic [OFF_W-1:0] offset,
  input  logic [OUT_W-1:0] mask,
  output logic [OUT_W-1:0] field
);
  logic [IN_W-1:0] shifted;
  assign shifted = vec >> offset;
  assign field   = shifted[OUT_W-1:0] & mask;
endmodule
