// Self-checking testbench for xbar (and the rr_arbiter inside it).
// Four inputs send numbered words to random outputs under random output
// back-pressure. Every word must reach the output it selected, exactly once,
// with out_src naming its input, and the words of one input to one output
// must keep their order. Then: four inputs aimed at four different outputs
// must all pass in the same cycle, and two inputs that keep asking for the
// same output must be granted alternately (round robin).
module tb_xbar;
  localparam int unsigned NI = 4, NO = 4, N = 300;
  typedef logic [31:0] word_t;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [NI-1:0] in_valid, in_ready;
  word_t [NI-1:0] in_data;
  logic [NI-1:0][1:0] in_sel;
  logic [NO-1:0] out_valid, out_ready;
  word_t [NO-1:0] out_data;
  logic [NO-1:0][1:0] out_src;

  xbar #(.NumIn(NI), .NumOut(NO), .payload_t(word_t)) dut (
    .clk_i(clk), .rst_ni(rst_n), .in_valid_i(in_valid), .in_ready_o(in_ready), .in_data_i(in_data),
    .in_sel_i(in_sel), .out_valid_o(out_valid), .out_ready_i(out_ready), .out_data_o(out_data),
    .out_src_o(out_src));

  int checks = 0, failures = 0;
  int sent [NI];
  int next_seq [NI][NO];
  int received = 0;
  logic random_phase = 1;

  task automatic check(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    #100000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // Scoreboard on every output handshake.
  always @(posedge clk) if (rst_n && random_phase) begin
    for (int o = 0; o < NO; o++) if (out_valid[o] && out_ready[o]) begin
      int src, dst, seq;
      src = int'(out_data[o][31:24]); dst = int'(out_data[o][23:16]); seq = int'(out_data[o][15:0]);
      check(dst == o, "word reached its output");
      check(src == int'(out_src[o]), "out_src names the input");
      check(seq == next_seq[src][o], $sformatf("order in%0d->out%0d", src, o));
      next_seq[src][o] = seq + 1;
      received++;
    end
  end

  int seqs [NI][NO];
  initial begin
    in_valid = '0; out_ready = '0; in_data = '0; in_sel = '0;
    for (int i = 0; i < NI; i++) for (int o = 0; o < NO; o++) begin next_seq[i][o] = 0; seqs[i][o] = 0; end
    repeat (2) @(negedge clk);
    rst_n = 1;
    for (int i = 0; i < NI; i++) sent[i] = 0;
    // random phase: drive at negedge, advance on accepted words
    while (received < NI * N) begin
      for (int i = 0; i < NI; i++) if (!in_valid[i] && sent[i] < N && $urandom_range(3) != 0) begin
        int o = $urandom_range(NO - 1);
        in_valid[i] = 1; in_sel[i] = 2'(o);
        in_data[i] = {8'(i), 8'(o), 16'(seqs[i][o])};
        seqs[i][o]++; sent[i]++;
      end
      for (int o = 0; o < NO; o++) out_ready[o] = ($urandom_range(3) != 0);
      #4;   // sample the handshake just before the rising edge
      begin
        logic [NI-1:0] acc;
        acc = in_valid & in_ready;
        @(negedge clk);
        in_valid &= ~acc;
      end
    end
    check(received == NI * N, "all words delivered");
    random_phase = 0;
    // parallel transfers: input i -> output 3-i, all in one cycle
    out_ready = '1;
    for (int i = 0; i < NI; i++) begin in_valid[i] = 1; in_sel[i] = 2'(3 - i); in_data[i] = 32'(i); end
    #1;
    check(in_ready == '1 && out_valid == '1, "four transfers in one cycle");
    for (int o = 0; o < NO; o++) check(out_data[o] == 32'(3 - o), "parallel data");
    @(negedge clk);
    // round robin between inputs 1 and 2 on output 0
    in_valid = 4'b0110; in_sel = '0;
    begin
      int prev = -1;
      for (int n = 0; n < 8; n++) begin
        #1;
        check(int'(out_src[0]) != prev && (out_src[0] == 2'd1 || out_src[0] == 2'd2), "round-robin alternation");
        prev = int'(out_src[0]);
        @(negedge clk);
      end
    end
    in_valid = '0;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
