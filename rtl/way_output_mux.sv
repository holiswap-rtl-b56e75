// way_output_mux: output gating of the four subarrays and the way multiplexer.
//
// Each subarray drives its output word onto its own long wire to the way
// multiplexer next to way W0. A gate per way passes the word only when that
// way's select bit (the tag match of the accessed way) is high; the wires of
// the other ways are held at zero and do not toggle. The multiplexer is the
// OR of the gated wires, so with a one-hot or empty select it returns the
// selected word or zero. An assertion checks that the select is never
// multi-hot. Purely combinational.
//
// From the paper: the gating of the data lines by the tag comparison, so that
// unselected ways' output wires do not toggle, and the way multiplexer near
// W0. The paper uses tri-state buffers; this design gates with AND gates, the
// synthesizable equivalent (a floating tri-state wire would keep its old
// value instead of going to zero).
module way_output_mux
  import holiswap_pkg::*;
#(
  parameter int unsigned DATA_W = WORD_W
) (
  input  logic [WAYS-1:0]   sel,
  input  logic [DATA_W-1:0] way_data [WAYS],
  output logic [DATA_W-1:0] gated    [WAYS],  // the wire of each way
  output logic [DATA_W-1:0] dout
);
  always_comb begin
    dout = '0;
    for (int w = 0; w < WAYS; w++) begin
      gated[w] = sel[w] ? way_data[w] : '0;
      dout     = dout | gated[w];
    end
  end

  always_comb
    assert ($onehot0(sel)) else $error("way_output_mux: select %b is not one-hot", sel);
endmodule
