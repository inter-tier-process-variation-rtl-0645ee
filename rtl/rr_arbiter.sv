// Round-robin arbiter.
//
// Grants one of N requesters per cycle, combinationally. The search starts
// just after the requester granted last, so every requester that keeps
// requesting is served within N grants. The priority pointer moves only
// when `advance` is high in a cycle that has a grant, which lets a
// two-stage allocator keep a first-stage choice that lost in the second
// stage. Reset puts the highest priority on requester 0.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] gnt,
  output logic [$clog2(N > 1 ? N : 2)-1:0] gnt_idx,
  output logic         any
);
  localparam int unsigned IW = $clog2(N > 1 ? N : 2);

  logic [IW-1:0] ptr;   // index with the highest priority

  always_comb begin
    gnt     = '0;
    gnt_idx = '0;
    any     = 1'b0;
    for (int unsigned k = 0; k < N; k++) begin
      int unsigned idx;
      idx = (int'(ptr) + k) % N;
      if (!any && req[idx]) begin
        any          = 1'b1;
        gnt[idx]     = 1'b1;
        gnt_idx      = IW'(idx);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      ptr <= '0;
    end else if (advance && any) begin
      ptr <= (int'(gnt_idx) == N - 1) ? '0 : gnt_idx + 1'b1;
    end
  end

endmodule
