// tb_neuron_update: checks the per-neuron model selection. One record is
// built whose parameter field means different things to the two models;
// with the model bit at 0 the LIF interpretation must be used, with it at
// 1 the phenomenological one. Parameter bits and the model bit must pass
// through unchanged.
module tb_neuron_update;
  import odin_pkg::*;
  logic [NWORD_W-1:0] word, word_next;
  logic [NW-1:0] addr;
  logic syn_ev, syn_sign, time_ref, burst_end, spike, up, down;
  logic [2:0] weight;
  pkt_t pkt;
  int checks = 0, failures = 0;

  neuron_update dut (.*);

  task automatic check(input string what, input logic ok);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    lif_param_t lp;
    izh_param_t ip;
    izh_state_t is;
    addr = 8'd9; syn_sign = 0; time_ref = 0; burst_end = 0;
    for (int r = 0; r < 200; r++) begin
      word = {$urandom, $urandom, $urandom, $urandom};
      word[STATE_LSB +: STATE_W] = '0;
      syn_ev = 1; weight = 3'd5;
      lp = lif_param_t'(word[PARAM_W-1:0]);
      ip = izh_param_t'(word[PARAM_W-1:0]);
      // LIF: membrane 0 + 5 fires when thr <= 5.
      word[MODEL_BIT] = 1'b0;
      #1;
      check("lif spike", spike == (lp.thr <= 8'd5));
      check("lif vmem", word_next[STATE_LSB +: 8] == ((lp.thr <= 8'd5) ? 8'd0 : 8'd5));
      check("lif pass", word_next[PARAM_W-1:0] == word[PARAM_W-1:0] && word_next[127:125] == word[127:125]);
      // Phenomenological: accumulator gets +5, overflow at 2^min(depth,10).
      word[MODEL_BIT] = 1'b1;
      #1;
      is = izh_state_t'(word_next[STATE_LSB +: STATE_W]);
      check("izh acc", (5 >= (1 << ((ip.acc_depth > 10) ? 10 : ip.acc_depth)))
                       ? (is.acc == 11'(5 - (1 << ip.acc_depth))) : (is.acc == 11'd5));
      check("izh pass", word_next[PARAM_W-1:0] == word[PARAM_W-1:0] && word_next[125]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
