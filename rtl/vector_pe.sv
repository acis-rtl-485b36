// vector_pe: the vector PE of an SPU, LANES processing elements side by side.
//
// Combinational. Element-wise operations (add, sub, mul, signed max/min, and,
// or, xor, multiply-accumulate) apply lane l of a to lane l of b in PE l. V_SLIDEUP moves a up by
// `amount` lanes with zero fill (the cross-lane step used for scans), V_SPLAT
// copies scalar s to every lane. Two scalar results are produced for the SPU's
// register file: the sum of all lanes of a (V_REDSUM) and lane `amount` of a
// (V_EXT). V_MAC adds a*b to c, the old value of the destination register
// (fused multiply-accumulate). The paper shows the PEs and says the SPUs have wide vector
// instruction support; the operation set is this design's choice.
module vector_pe
  import acis_pkg::*;
(
  input  vop_e        op,
  input  vec_t        a,
  input  vec_t        b,
  input  vec_t        c,
  input  word_t       s,
  input  logic [4:0]  amount,
  output vec_t        y,
  output word_t       ys
);
  always_comb begin
    y = '0;
    for (int l = 0; l < LANES; l++) begin
      unique case (op)
        V_ADD:   y[l] = a[l] + b[l];
        V_SUB:   y[l] = a[l] - b[l];
        V_MUL:   y[l] = a[l] * b[l];
        V_MAC:   y[l] = c[l] + a[l] * b[l];
        V_MAX:   y[l] = ($signed(a[l]) > $signed(b[l])) ? a[l] : b[l];
        V_MIN:   y[l] = ($signed(a[l]) < $signed(b[l])) ? a[l] : b[l];
        V_AND:   y[l] = a[l] & b[l];
        V_OR:    y[l] = a[l] | b[l];
        V_XOR:   y[l] = a[l] ^ b[l];
        V_SLIDEUP: y[l] = (l >= int'(amount)) ? a[l - int'(amount)] : '0;
        V_SPLAT: y[l] = s;
        default: y[l] = '0;
      endcase
    end
  end

  always_comb begin
    ys = '0;
    if (op == V_REDSUM) begin
      for (int l = 0; l < LANES; l++) ys += a[l];
    end else begin
      for (int l = 0; l < LANES; l++) if (int'(amount) == l) ys = a[l];
    end
  end
endmodule
