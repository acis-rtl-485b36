// tb_vector_pe: checks the vector PE of an SPU against a lane-by-lane model.
// Every operation (element-wise add, sub, mul, signed max/min, and, or, xor,
// multiply-accumulate, slide-up by 0..3 lanes, splat, lane sum, lane extract)
// is applied to random vectors, including values of both signs so that signed
// comparisons are exercised. The block is combinational: results are sampled
// one time step after the inputs change.
module tb_vector_pe;
  import acis_pkg::*;
  int checks = 0, failures = 0;

  vop_e       op;
  vec_t       a, b, c, y;
  word_t      s, ys;
  logic [4:0] amount;

  vector_pe dut (.*);

  initial begin
    #100000;
    failures++; $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  function automatic word_t rnd_word();
    case ($urandom_range(0, 2))
      0: return 32'($urandom_range(0, 20)) - 32'd10;
      1: return $urandom;
      default: return 32'($urandom_range(0, 1000));
    endcase
  endfunction

  initial begin
    vop_e ops [13] = '{V_ADD, V_SUB, V_MUL, V_MAX, V_MIN, V_AND, V_OR, V_XOR,
                       V_SLIDEUP, V_REDSUM, V_EXT, V_SPLAT, V_MAC};
    for (int it = 0; it < 400; it++) begin
      vec_t  ey;
      word_t eys;
      bit    vec_res;
      op = ops[it % 13];
      for (int l = 0; l < LANES; l++) begin a[l] = rnd_word(); b[l] = rnd_word(); c[l] = rnd_word(); end
      s = rnd_word();
      amount = 5'($urandom_range(0, LANES));
      if (op == V_EXT) amount = 5'($urandom_range(0, LANES - 1));
      ey = '0; eys = '0;
      vec_res = !(op inside {V_REDSUM, V_EXT});
      for (int l = 0; l < LANES; l++) begin
        case (op)
          V_ADD: ey[l] = a[l] + b[l];
          V_SUB: ey[l] = a[l] - b[l];
          V_MUL: ey[l] = a[l] * b[l];
          V_MAX: ey[l] = (int'(a[l]) > int'(b[l])) ? a[l] : b[l];
          V_MIN: ey[l] = (int'(a[l]) < int'(b[l])) ? a[l] : b[l];
          V_AND: ey[l] = a[l] & b[l];
          V_OR:  ey[l] = a[l] | b[l];
          V_XOR: ey[l] = a[l] ^ b[l];
          V_MAC: ey[l] = c[l] + a[l] * b[l];
          V_SLIDEUP: ey[l] = (l >= int'(amount)) ? a[l - int'(amount)] : '0;
          V_SPLAT: ey[l] = s;
          default: ;
        endcase
      end
      if (op == V_REDSUM) for (int l = 0; l < LANES; l++) eys += a[l];
      if (op == V_EXT) eys = a[amount];
      #1;
      checks++;
      if (vec_res ? (y !== ey) : (ys !== eys)) begin
        failures++;
        $display("FAIL %s: a=%h b=%h c=%h s=%h amount=%0d -> y=%h ys=%h", op.name(), a, b, c, s,
                 amount, y, ys);
      end
      #1;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
