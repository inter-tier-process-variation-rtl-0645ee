// Inter-router link: a registered channel that carries flits downstream
// and credits back upstream.
//
// Each direction is a chain of LATENCY registers (LATENCY >= 1), so a flit
// put on `up_flit` in cycle c appears on `down_flit` in cycle c+LATENCY,
// and a credit on `down_credit` reaches `up_credit` after the same delay.
// With LATENCY = 1 the register is the link-traversal cycle that follows
// the router's crossbar stage. The paper models a link's delay as its
// Manhattan length times a per-unit delay that is larger for a tungsten
// (bottom-tier) wire than for a copper (top-tier) one; in a clocked design
// that shows up only as the number of register stages, which is left to
// the integrator. Every mesh link has length one and uses the default.
module noc_link
  import noc_pkg::*;
#(
  parameter int unsigned LATENCY = 1
) (
  input  logic    clk,
  input  logic    rst_n,
  input  flit_t   up_flit,
  output flit_t   down_flit,
  input  credit_t down_credit,
  output credit_t up_credit
);
  flit_t   fpipe [LATENCY];
  credit_t cpipe [LATENCY];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < int'(LATENCY); k++) begin
        fpipe[k] <= '0;
        cpipe[k] <= '0;
      end
    end else begin
      fpipe[0] <= up_flit;
      cpipe[0] <= down_credit;
      for (int k = 1; k < int'(LATENCY); k++) begin
        fpipe[k] <= fpipe[k-1];
        cpipe[k] <= cpipe[k-1];
      end
    end
  end

  assign down_flit = fpipe[LATENCY-1];
  assign up_credit = cpipe[LATENCY-1];

endmodule
