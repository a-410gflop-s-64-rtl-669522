// Valid/ready crossbar with a round-robin arbiter on every output.
//
// Each input presents a payload and the index of the output it wants
// (in_sel_i). Every output arbitrates among the inputs that select it, so
// NumOut transfers can happen in one cycle when they target different outputs.
// The path is combinational (no register), which is what gives a core a
// one-cycle access to the banks of its own Tile; registers on longer paths
// are added by the Tile and the cluster. out_src_o tells which input won.
// This one module serves as the Tile's local and remote request/response
// crossbars and as the Group's 4x4 crossbars of the paper; the
// arbitration policy is this design's choice.
module xbar #(
  parameter int unsigned NumIn  = 4,
  parameter int unsigned NumOut = 4,
  parameter type         payload_t = logic [31:0],
  localparam int unsigned SelW = (NumOut > 1) ? $clog2(NumOut) : 1,
  localparam int unsigned SrcW = (NumIn  > 1) ? $clog2(NumIn)  : 1
) (
  input  logic                   clk_i,
  input  logic                   rst_ni,
  input  logic     [NumIn-1:0]   in_valid_i,
  output logic     [NumIn-1:0]   in_ready_o,
  input  payload_t [NumIn-1:0]   in_data_i,
  input  logic     [NumIn-1:0][SelW-1:0] in_sel_i,
  output logic     [NumOut-1:0]  out_valid_o,
  input  logic     [NumOut-1:0]  out_ready_i,
  output payload_t [NumOut-1:0]  out_data_o,
  output logic     [NumOut-1:0][SrcW-1:0] out_src_o
);

  logic [NumOut-1:0][NumIn-1:0] req, gnt;

  always_comb begin
    for (int unsigned o = 0; o < NumOut; o++)
      for (int unsigned i = 0; i < NumIn; i++)
        req[o][i] = in_valid_i[i] && (int'(in_sel_i[i]) == o);
  end

  for (genvar o = 0; o < NumOut; o++) begin : g_out
    rr_arbiter #(.NumIn(NumIn), .payload_t(payload_t)) i_arb (
      .clk_i, .rst_ni,
      .in_valid_i (req[o]),
      .in_ready_o (gnt[o]),
      .in_data_i  (in_data_i),
      .out_valid_o(out_valid_o[o]),
      .out_ready_i(out_ready_i[o]),
      .out_data_o (out_data_o[o]),
      .out_idx_o  (out_src_o[o])
    );
  end

  always_comb begin
    in_ready_o = '0;
    for (int unsigned o = 0; o < NumOut; o++) in_ready_o |= gnt[o];
  end

endmodule
