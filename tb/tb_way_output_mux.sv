// tb_way_output_mux: checks the gated way multiplexer.
//
// Drives random words on the four way inputs with each one-hot select and
// with no select, and checks that only the selected way's wire carries its
// word, the others stay at zero, and the output is the selected word.
module tb_way_output_mux;
  import holiswap_pkg::*;

  logic [WAYS-1:0]   sel;
  logic [WORD_W-1:0] way_data [WAYS];
  logic [WORD_W-1:0] gated    [WAYS];
  logic [WORD_W-1:0] dout;
  int checks = 0, failures = 0;

  way_output_mux dut (.sel, .way_data, .gated, .dout);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int n = 0; n < 200; n++) begin
      int s;
      for (int w = 0; w < WAYS; w++) way_data[w] = $urandom;
      s = n % (WAYS + 1);                    // WAYS means no way selected
      sel = (s == WAYS) ? '0 : WAYS'(1) << s;
      #1;
      for (int w = 0; w < WAYS; w++) begin
        checks++;
        if (gated[w] !== ((w == s) ? way_data[w] : 32'h0)) begin
          failures++;
          $display("FAIL wire %0d sel=%b gated=%h", w, sel, gated[w]);
        end
      end
      checks++;
      if (dout !== ((s == WAYS) ? 32'h0 : way_data[s])) begin
        failures++;
        $display("FAIL dout sel=%b dout=%h", sel, dout);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
