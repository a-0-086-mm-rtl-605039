// tb_sdsp_update: exhaustive check of the single-synapse SDSP update.
// Every combination of up, down, spk_pre, bistability and the 3-bit weight
// is applied and compared with a reference written from the rule: a
// pre-synaptic spike moves the weight +1 on 'up', -1 on 'down' (up wins),
// a bistability event moves it toward 7 from 4..6 and toward 0 from 1..3,
// all steps saturate at 0 and 7, and a pre-synaptic spike takes precedence
// over bistability.
module tb_sdsp_update;
  logic up, down, spk_pre, bistability;
  logic [2:0] w, w_next;
  int checks = 0, failures = 0;

  sdsp_update dut (.*);

  function automatic int ref_w(int u, int d, int s, int b, int wi);
    int r = wi;
    if (s) begin
      if (u) r = (wi < 7) ? wi + 1 : 7;
      else if (d) r = (wi > 0) ? wi - 1 : 0;
    end else if (b) begin
      if (wi >= 4) r = (wi < 7) ? wi + 1 : 7;
      else r = (wi > 0) ? wi - 1 : 0;
    end
    return r;
  endfunction

  initial begin
    for (int v = 0; v < 128; v++) begin
      {up, down, spk_pre, bistability, w} = 7'(v);
      #1;
      checks++;
      if (int'(w_next) != ref_w(up, down, spk_pre, bistability, int'(w))) begin
        failures++;
        $display("FAIL up=%0d down=%0d pre=%0d bist=%0d w=%0d -> %0d", up, down, spk_pre, bistability, w, w_next);
      end
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
