// simd_engine: the 512-bit SIMD datapath of a Violet tile.
//
// Sixteen 32-bit lanes. The engine computes, in one cycle (purely
// combinational, the core registers the result):
//   SIMD_ADD  : d = a + b                     per int32 lane
//   SIMD_MUL  : d = a * b (low 32 bits)       per int32 lane
//   SIMD_MLA  : d = acc + a * b               per int32 lane
//   SIMD_DOT4 : d = acc + sum_{r<4} a8[4i+r] * b8[4i+r]   (wide accumulate)
//   SIMD_ZERO : d = 0
// SIMD_DOT4 is the paper's int8 -> int32 multiply-accumulate: with one
// operand coming from the transpose engine it turns a vector MAC into
// sixteen dot products of length four, i.e. 64 int8 MACs per cycle, or two
// int8 MACs for each 16-bit slice of the vector. The four-way reduction
// and 32-bit accumulation follow the paper. The FP16 multiply-accumulate
// the paper also names is not built here; only integer arithmetic is.
module simd_engine
  import violet_pkg::*;
(
  input  simd_op_e op,
  input  vec_t     a,    // first source (e.g. broadcast B values)
  input  vec_t     b,    // second source (VRF register or %tmm column)
  input  vec_t     acc,  // accumulator source
  output vec_t     d
);

  always_comb begin
    d = '0;
    for (int i = 0; i < ACC_LANES; i++) begin
      logic signed [31:0] la, lb, lc, r;
      logic signed [31:0] dot;
      la  = a[32*i +: 32];
      lb  = b[32*i +: 32];
      lc  = acc[32*i +: 32];
      dot = '0;
      for (int k = 0; k < DOT_R; k++) begin
        dot += 32'(signed'(a[32*i+8*k +: 8]) * signed'(b[32*i+8*k +: 8]));
      end
      unique case (op)
        SIMD_ADD:  r = la + lb;
        SIMD_MUL:  r = la * lb;
        SIMD_MLA:  r = lc + la * lb;
        SIMD_DOT4: r = lc + dot;
        default:   r = '0;
      endcase
      d[32*i +: 32] = r;
    end
  end

endmodule
