// Round-robin arbiter for valid/ready streams.
//
// NumIn requesters compete for one output. The grant goes to the first valid
// input at or after a rotating priority pointer; the pointer moves past the
// winner only when the output handshake completes, so a granted request that
// waits for out_ready keeps its grant (no request changes while waiting, as
// required by the valid/ready rule below). Arbitration and the data multiplexer
// are combinational: a request can pass in the same cycle it arrives.
// Used for every arbitration point of the L1 interconnect; the paper names
// the arbiters, round-robin is this design's choice.
module rr_arbiter #(
  parameter int unsigned NumIn = 4,
  parameter type         payload_t = logic [31:0],
  localparam int unsigned IdxW = (NumIn > 1) ? $clog2(NumIn) : 1
) (
  input  logic                  clk_i,
  input  logic                  rst_ni,
  input  logic     [NumIn-1:0]  in_valid_i,
  output logic     [NumIn-1:0]  in_ready_o,
  input  payload_t [NumIn-1:0]  in_data_i,
  output logic                  out_valid_o,
  input  logic                  out_ready_i,
  output payload_t              out_data_o,
  output logic     [IdxW-1:0]   out_idx_o
);

  logic [IdxW-1:0] ptr_q;
  logic [IdxW-1:0] gnt_idx;
  logic            found;

  always_comb begin
    gnt_idx = '0;
    found   = 1'b0;
    for (int unsigned k = 0; k < NumIn; k++) begin
      int unsigned i;
      i = (int'(ptr_q) + k) % NumIn;
      if (!found && in_valid_i[i]) begin
        found   = 1'b1;
        gnt_idx = IdxW'(i);
      end
    end
  end

  assign out_valid_o = found;
  assign out_data_o  = in_data_i[gnt_idx];
  assign out_idx_o   = gnt_idx;

  always_comb begin
    in_ready_o = '0;
    in_ready_o[gnt_idx] = found & out_ready_i;
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      ptr_q <= '0;
    end else if (found && out_ready_i) begin
      ptr_q <= (int'(gnt_idx) == NumIn - 1) ? '0 : gnt_idx + 1'b1;
    end
  end

endmodule
