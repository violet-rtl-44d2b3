// tb_simd_engine: checks every SIMD operation on random operands against a
// reference computed lane by lane in the testbench (int32 add/mul/mla and
// the int8 four-way dot-product accumulate). The datapath is combinational,
// so each check applies inputs, waits one time step and compares.
module tb_simd_engine;
  import violet_pkg::*;
  int checks = 0, failures = 0;
  simd_op_e op;
  vec_t a, b, acc, d;

  simd_engine dut (.op, .a, .b, .acc, .d);

  function automatic vec_t ref_model(simd_op_e o, vec_t x, vec_t y, vec_t z);
    vec_t r;
    for (int i = 0; i < 16; i++) begin
      int s;
      int xa, ya, za;
      xa = int'(x[32*i +: 32]); ya = int'(y[32*i +: 32]); za = int'(z[32*i +: 32]);
      s = 0;
      for (int k = 0; k < 4; k++) begin
        byte xb, yb;
        xb = byte'(x[32*i+8*k +: 8]); yb = byte'(y[32*i+8*k +: 8]);
        s = s + int'(xb) * int'(yb);
      end
      case (o)
        SIMD_ADD:  r[32*i +: 32] = xa + ya;
        SIMD_MUL:  r[32*i +: 32] = xa * ya;
        SIMD_MLA:  r[32*i +: 32] = za + xa * ya;
        SIMD_DOT4: r[32*i +: 32] = za + s;
        default:   r[32*i +: 32] = 0;
      endcase
    end
    return r;
  endfunction

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    simd_op_e ops [5] = '{SIMD_ADD, SIMD_MUL, SIMD_MLA, SIMD_DOT4, SIMD_ZERO};
    for (int t = 0; t < 200; t++) begin
      for (int w = 0; w < 16; w++) begin
        a[32*w +: 32]   = $urandom;
        b[32*w +: 32]   = $urandom;
        acc[32*w +: 32] = $urandom;
      end
      if (t == 0) begin  // extreme int8 values
        a = {64{8'h80}}; b = {64{8'h80}}; acc = '0;
      end
      op = ops[t % 5];
      #1;
      checks++;
      if (d !== ref_model(op, a, b, acc)) begin
        failures++;
        if (failures < 5) $display("mismatch op=%s", op.name());
      end
    end
    // a known case: all bytes -1 times 2 => each lane 4 * -2 = -8 added to 100
    op = SIMD_DOT4; a = {64{8'hFF}}; b = {64{8'h02}}; acc = {16{32'd100}};
    #1; checks++;
    if (d !== {16{32'd92}}) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
