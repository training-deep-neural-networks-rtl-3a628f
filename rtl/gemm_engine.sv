// gemm_engine -- reduced-precision GEMM engine with chunk-based accumulation.
//
// LANES dot-product lanes (dot_lane) run in lock step, each followed by its
// own chunk accumulation engine (chunk_acc). Every cycle with `in_valid`
// one element of a shared operand vector `x` is broadcast to all lanes and
// each lane l multiplies it with its own operand `y[l]`; after the element
// flagged `in_last` the engine has computed LANES dot products of length N,
// i.e. one row-times-LANES-columns slice of a GEMM. The same engine serves
// all three GEMMs of training (Forward: activation x weight, Backward:
// error x weight, Gradient: activation x error); which matrices are
// streamed is decided by whoever feeds it.
// `fp16_mode` selects FP16 operands for the layers that are kept in FP16
// (first-layer input images, last-layer GEMMs); it must stay constant over
// one dot product.
// Timing: one element per cycle, no stalls; `out_valid` pulses two cycles
// after the `in_last` element (one cycle in the lane, one in the chunk
// accumulator), and the next dot product may start right after `in_last`.
// The number of lanes is not given by the scheme; LANES = 8 is this
// design's choice. Chunk length CL = 64 is the scheme's setting.
module gemm_engine #(
  parameter int unsigned LANES = 8,
  parameter int unsigned CL    = fp8_pkg::CHUNK_LEN,
  parameter int unsigned EXT   = 16
) (
  input  logic           clk,
  input  logic           rst_n,
  input  logic           in_valid,
  input  logic           in_last,
  input  logic           fp16_mode,
  input  fp8_pkg::fp16_t x,
  input  fp8_pkg::fp16_t y         [LANES],
  output logic           out_valid,
  output fp8_pkg::fp16_t out_fp16  [LANES],
  output fp8_pkg::fp8_t  out_fp8   [LANES]
);
  import fp8_pkg::*;

  logic [LANES-1:0] ch_valid, ch_last, o_valid;
  fp16_t            ch_sum [LANES];

  for (genvar l = 0; l < LANES; l++) begin : g_lane
    dot_lane #(.CL(CL), .EXT(EXT)) u_lane (
      .clk, .rst_n, .in_valid, .in_last, .fp16_mode,
      .x, .y(y[l]),
      .ch_valid(ch_valid[l]), .ch_last(ch_last[l]), .ch_sum(ch_sum[l])
    );
    chunk_acc #(.EXT(EXT)) u_cacc (
      .clk, .rst_n,
      .in_valid(ch_valid[l]), .in_last(ch_last[l]), .in_sum(ch_sum[l]),
      .out_valid(o_valid[l]), .out_fp16(out_fp16[l]), .out_fp8(out_fp8[l])
    );
  end

  // all lanes see the same control stream, so their valids coincide
  assign out_valid = o_valid[0];

  always_ff @(posedge clk)
    if (rst_n) assert (o_valid == '0 || o_valid == '1)
      else $error("gemm_engine: lanes out of step");

endmodule
