// Tile-shared floating-point division and square-root unit.
//
// The cores of a Tile share one unit (the paper: one DIV-SQRT per Tile, used
// to speed up matrix inversion for MIMO detection). A round-robin arbiter
// picks one core's request whenever the unit is idle; the unit then works on
// it alone and returns the result to that core on rsp_valid_o[core] for one
// cycle (cores always take results). Operations: op=0 a/b, op=1 sqrt(a).
//
// Datapath (this design's choice, the paper gives none): IEEE-754 binary32,
// one quotient or root bit per cycle by restoring division / digit-by-digit
// square root on the 24-bit significands, then one rounding step to nearest
// even. Latency from acceptance to result is 29 cycles for a division and
// 28 for a square root; the unit is busy for that time. Subnormal inputs and results are flushed to zero;
// invalid operations return the canonical NaN 0x7fc00000; division by zero
// returns a signed infinity. Only binary32 is built: the paper also names
// 16-bit formats for the FP subsystem, whose formats it does not specify.
module fp_divsqrt #(
  parameter int unsigned NumCores = 4,
  localparam int unsigned IdxW = (NumCores > 1) ? $clog2(NumCores) : 1
) (
  input  logic                      clk_i,
  input  logic                      rst_ni,
  input  logic [NumCores-1:0]       req_valid_i,
  output logic [NumCores-1:0]       req_ready_o,
  input  logic [NumCores-1:0]       req_op_i,      // 0: div, 1: sqrt
  input  logic [NumCores-1:0][31:0] req_a_i,
  input  logic [NumCores-1:0][31:0] req_b_i,
  output logic [NumCores-1:0]       rsp_valid_o,
  output logic [31:0]               rsp_result_o
);
  localparam int unsigned Iter = 27;   // quotient bits (26 for the root)
  localparam logic [31:0] QNaN = 32'h7fc0_0000;

  typedef struct packed {
    logic        op;
    logic [31:0] a;
    logic [31:0] b;
  } ds_req_t;

  typedef enum logic [1:0] {S_IDLE, S_ITER, S_ROUND, S_DONE} state_e;

  ds_req_t [NumCores-1:0] reqs;
  ds_req_t                sel;
  logic                   sel_valid, sel_ready;
  logic [IdxW-1:0]        sel_idx;

  always_comb
    for (int unsigned c = 0; c < NumCores; c++)
      reqs[c] = '{op: req_op_i[c], a: req_a_i[c], b: req_b_i[c]};

  rr_arbiter #(.NumIn(NumCores), .payload_t(ds_req_t)) i_arb (
    .clk_i, .rst_ni,
    .in_valid_i (req_valid_i),
    .in_ready_o (req_ready_o),
    .in_data_i  (reqs),
    .out_valid_o(sel_valid),
    .out_ready_i(sel_ready),
    .out_data_o (sel),
    .out_idx_o  (sel_idx)
  );

  state_e          state_q;
  logic [IdxW-1:0] owner_q;
  logic            op_q, special_q, sign_q;
  logic [31:0]     special_val_q, result_q;
  logic signed [10:0] exp_q;
  logic [4:0]      cnt_q;
  logic [51:0]     rad_q;      // sqrt radicand, two bits consumed per step
  logic [29:0]     rem_q;      // partial remainder
  logic [26:0]     res_q;      // quotient / root bits
  logic [23:0]     divisor_q;

  assign sel_ready = (state_q == S_IDLE);

  // Operand decoding of the request being accepted.
  logic        sa, sb, za, zb, ia, ib, na, nb;
  logic [7:0]  ea, eb;
  logic [23:0] ma, mb;
  always_comb begin
    sa = sel.a[31]; sb = sel.b[31];
    ea = sel.a[30:23]; eb = sel.b[30:23];
    ma = {1'b1, sel.a[22:0]}; mb = {1'b1, sel.b[22:0]};
    za = (ea == 8'd0); zb = (eb == 8'd0);             // zero or subnormal
    ia = (ea == 8'hff) && (sel.a[22:0] == '0);
    ib = (eb == 8'hff) && (sel.b[22:0] == '0);
    na = (ea == 8'hff) && (sel.a[22:0] != '0);
    nb = (eb == 8'hff) && (sel.b[22:0] != '0);
  end

  // Root exponent: floor((ea - 127) / 2) + 127; an odd unbiased exponent
  // moves one factor of two into the radicand.
  logic signed [10:0] sq_unb, sq_exp;
  always_comb begin
    sq_unb = $signed({3'b000, ea}) - 11'sd127;
    sq_exp = (sq_unb >>> 1) + 11'sd127;
  end

  // One iteration step.
  logic [29:0] div_rem_n, sqrt_rem_n, sqrt_trial;
  logic        div_bit, sqrt_bit;
  always_comb begin
    div_bit   = (rem_q >= {6'd0, divisor_q});
    div_rem_n = (div_bit ? rem_q - {6'd0, divisor_q} : rem_q) << 1;
    sqrt_rem_n = {rem_q[27:0], rad_q[51:50]};
    sqrt_trial = {2'b00, res_q[25:0], 2'b01};   // (root << 2) | 1
    sqrt_bit   = (sqrt_rem_n >= sqrt_trial);
    if (sqrt_bit) sqrt_rem_n = sqrt_rem_n - sqrt_trial;
  end

  // Normalise and round (combinational on the final iteration state).
  logic [23:0] mant;
  logic        guard, sticky, rnd_up;
  logic [24:0] mant_r;
  logic signed [10:0] exp_n;
  logic [31:0] rounded;
  always_comb begin
    exp_n = exp_q;
    if (op_q) begin   // root: 26 bits, bit 25 always set
      mant   = res_q[25:2];
      guard  = res_q[1];
      sticky = res_q[0] | (rem_q != '0);
    end else if (res_q[26]) begin
      mant   = res_q[26:3];
      guard  = res_q[2];
      sticky = (res_q[1:0] != '0) | (rem_q != '0);
    end else begin
      mant   = res_q[25:2];
      guard  = res_q[1];
      sticky = res_q[0] | (rem_q != '0);
      exp_n  = exp_q - 11'sd1;
    end
    rnd_up = guard & (sticky | mant[0]);
    mant_r = {1'b0, mant} + 25'(rnd_up);
    if (mant_r[24]) begin
      mant_r = mant_r >> 1;
      exp_n  = exp_n + 11'sd1;
    end
    if (exp_n >= 11'sd255)     rounded = {sign_q, 8'hff, 23'd0};
    else if (exp_n <= 11'sd0)  rounded = {sign_q, 31'd0};
    else                       rounded = {sign_q, exp_n[7:0], mant_r[22:0]};
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      state_q <= S_IDLE;
      owner_q <= '0; op_q <= 1'b0; special_q <= 1'b0; sign_q <= 1'b0;
      special_val_q <= '0; result_q <= '0; exp_q <= '0; cnt_q <= '0;
      rad_q <= '0; rem_q <= '0; res_q <= '0; divisor_q <= '0;
    end else begin
      unique case (state_q)
        S_IDLE: if (sel_valid) begin
          owner_q   <= sel_idx;
          op_q      <= sel.op;
          res_q     <= '0;
          cnt_q     <= '0;
          special_q <= 1'b1;
          state_q   <= S_ITER;
          if (!sel.op) begin
            sign_q    <= sa ^ sb;
            divisor_q <= mb;
            rem_q     <= {6'd0, ma};
            exp_q     <= 11'(signed'({3'b0, ea})) - 11'(signed'({3'b0, eb})) + 11'sd127;
            if (na || nb || (za && zb) || (ia && ib)) special_val_q <= QNaN;
            else if (ia || zb)                        special_val_q <= {sa ^ sb, 8'hff, 23'd0};
            else if (za || ib)                        special_val_q <= {sa ^ sb, 31'd0};
            else                                      special_q     <= 1'b0;
          end else begin
            sign_q <= 1'b0;
            rem_q  <= '0;
            // unbiased exponent e = ea-127; odd e takes one more radicand bit
            exp_q  <= sq_exp;
            rad_q  <= ea[0] ? {ma, 28'd0} >> 1 : {ma, 28'd0};
            if (na || (sa && !za))  special_val_q <= QNaN;
            else if (za)            special_val_q <= {sa, 31'd0};
            else if (ia)            special_val_q <= {1'b0, 8'hff, 23'd0};
            else                    special_q     <= 1'b0;
          end
        end
        S_ITER: begin
          cnt_q <= cnt_q + 1'b1;
          if (!op_q) begin
            res_q <= {res_q[25:0], div_bit};
            rem_q <= div_rem_n;
            if (int'(cnt_q) == Iter - 1) state_q <= S_ROUND;
          end else begin
            res_q <= {res_q[25:0], sqrt_bit};
            rem_q <= sqrt_rem_n;
            rad_q <= rad_q << 2;
            if (int'(cnt_q) == Iter - 2) state_q <= S_ROUND;
          end
        end
        S_ROUND: begin
          result_q <= special_q ? special_val_q : rounded;
          state_q  <= S_DONE;
        end
        S_DONE: state_q <= S_IDLE;
        default: state_q <= S_IDLE;
      endcase
    end
  end

  always_comb begin
    rsp_valid_o = '0;
    rsp_valid_o[owner_q] = (state_q == S_DONE);
  end
  assign rsp_result_o = result_q;

endmodule
