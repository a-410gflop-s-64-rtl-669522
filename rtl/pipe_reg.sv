// One-stage valid/ready pipeline register with a registered ready.
//
// A word written in cycle n is offered at the output in cycle n+1, so every
// crossing adds exactly one cycle. The stage has two entries and its
// in_ready_o comes straight from a flip-flop (not from out_ready_i): ready
// chains stop here, and a stall on the output still lets one more word in,
// so throughput stays at one word per cycle. The Tile uses it on its remote
// request and response ports and the cluster on the links between Groups;
// together they give the 1, 3 and 5 cycle L1 access latencies of the paper
// (own Tile, own Group, other Group). The two-entry form is this design's
// choice.
module pipe_reg #(
  parameter type payload_t = logic [31:0]
) (
  input  logic     clk_i,
  input  logic     rst_ni,
  input  logic     in_valid_i,
  output logic     in_ready_o,
  input  payload_t in_data_i,
  output logic     out_valid_o,
  input  logic     out_ready_i,
  output payload_t out_data_o
);
  payload_t   [1:0] data_q;
  logic       rd_q, wr_q;          // read / write slot
  logic [1:0] cnt_q;
  logic       push, pop;

  assign in_ready_o  = (cnt_q != 2'd2);
  assign out_valid_o = (cnt_q != 2'd0);
  assign out_data_o  = data_q[rd_q];
  assign push        = in_valid_i && in_ready_o;
  assign pop         = out_valid_o && out_ready_i;

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      data_q <= '0;
      rd_q   <= 1'b0;
      wr_q   <= 1'b0;
      cnt_q  <= '0;
    end else begin
      if (push) begin
        data_q[wr_q] <= in_data_i;
        wr_q         <= ~wr_q;
      end
      if (pop) rd_q <= ~rd_q;
      cnt_q <= cnt_q + 2'(push) - 2'(pop);
    end
  end
endmodule
