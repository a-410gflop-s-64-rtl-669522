// Integer processing unit (IPU) of one core complex.
//
// Executes the integer instruction classes the paper lists for baseband
// processing, on three 32-bit source operands (op_a, op_b, op_c as in the
// core complex drawing):
//   IPU_MUL   a*b (low 32 bits)
//   IPU_MAC   c + a*b
//   IPU_ADD2  2x16-bit SIMD add          (per half, wrapping)
//   IPU_SUB2  2x16-bit SIMD subtract     (per half, wrapping)
//   IPU_DOTP2 c + a.lo*b.lo + a.hi*b.hi  (signed 16-bit sum-of-dot-product)
//   IPU_CMUL  complex a*b
//   IPU_CMAC  complex c + a*b
//   IPU_ADD3  a + b + c                  (three-term addition)
// A complex value packs the real part in bits [15:0] and the imaginary part
// in bits [31:16], both signed Q1.15; products are shifted right by 15
// (truncation) and the parts wrap to 16 bits. The operation set follows the
// paper; encodings, the packing and the Q15 scaling are this design's
// choices. One operation per cycle, result registered: out_valid_o follows
// in_valid_i by one cycle.
module ipu (
  input  logic        clk_i,
  input  logic        rst_ni,
  input  logic        in_valid_i,
  input  logic [2:0]  op_i,
  input  logic [31:0] op_a_i,
  input  logic [31:0] op_b_i,
  input  logic [31:0] op_c_i,
  output logic        out_valid_o,
  output logic [31:0] result_o
);
  localparam logic [2:0] IPU_MUL = 3'd0, IPU_MAC = 3'd1, IPU_ADD2 = 3'd2,
                         IPU_SUB2 = 3'd3, IPU_DOTP2 = 3'd4, IPU_CMUL = 3'd5,
                         IPU_CMAC = 3'd6, IPU_ADD3 = 3'd7;

  logic signed [15:0] a_re, a_im, b_re, b_im, c_re, c_im;
  logic signed [31:0] rr, ii;
  logic [31:0]        res;

  always_comb begin
    a_re = op_a_i[15:0];  a_im = op_a_i[31:16];
    b_re = op_b_i[15:0];  b_im = op_b_i[31:16];
    c_re = op_c_i[15:0];  c_im = op_c_i[31:16];
    rr = (32'(a_re) * 32'(b_re) - 32'(a_im) * 32'(b_im)) >>> 15;
    ii = (32'(a_re) * 32'(b_im) + 32'(a_im) * 32'(b_re)) >>> 15;
    unique case (op_i)
      IPU_MUL:   res = op_a_i * op_b_i;
      IPU_MAC:   res = op_c_i + op_a_i * op_b_i;
      IPU_ADD2:  res = {op_a_i[31:16] + op_b_i[31:16], op_a_i[15:0] + op_b_i[15:0]};
      IPU_SUB2:  res = {op_a_i[31:16] - op_b_i[31:16], op_a_i[15:0] - op_b_i[15:0]};
      IPU_DOTP2: res = op_c_i + 32'(32'(a_re) * 32'(b_re)) + 32'(32'(a_im) * 32'(b_im));
      IPU_CMUL:  res = {ii[15:0], rr[15:0]};
      IPU_CMAC:  res = {c_im + ii[15:0], c_re + rr[15:0]};
      IPU_ADD3:  res = op_a_i + op_b_i + op_c_i;
    endcase
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      out_valid_o <= 1'b0;
      result_o    <= '0;
    end else begin
      out_valid_o <= in_valid_i;
      if (in_valid_i) result_o <= res;
    end
  end
endmodule
