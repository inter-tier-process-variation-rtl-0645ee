// Crossbar: stage 3 of the three-stage router.
//
// A P x P crossbar of flits. Input i drives output `in_port[i]` when its
// flit is valid; the switch allocator guarantees that no two valid inputs
// name the same output (the router asserts it). An output with no
// input carries an all-zero (invalid) flit. Combinational; the router feeds
// it from its switch-traversal registers, so the whole stage takes one
// cycle. The flit width (32 data bits) is the paper's.
module crossbar
  import noc_pkg::*;
#(
  parameter int unsigned P = NUM_PORTS
) (
  input  flit_t [P-1:0]             in_flit,
  input  logic  [P-1:0][PORT_W-1:0] in_port,
  output flit_t [P-1:0]             out_flit
);
  always_comb begin
    for (int o = 0; o < int'(P); o++) begin
      out_flit[o] = '0;
      for (int i = 0; i < int'(P); i++) begin
        if (in_flit[i].valid && int'(in_port[i]) == o) out_flit[o] = in_flit[i];
      end
    end
  end

endmodule
