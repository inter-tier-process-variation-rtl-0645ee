// Random test of the VC allocator against a reference model of the output
// VC busy bits. Every cycle it checks: grants only to requesters, at most
// one grant per output port, the granted VC is the lowest free one, and a
// port with a free VC and a requester always grants. Random tail releases
// free VCs again. It also checks the round-robin fairness between two
// inputs competing for one port.
module tb_vc_allocator;
  import noc_pkg::*;
  localparam int P = NUM_PORTS;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [P-1:0][NUM_VCS-1:0]             req, gnt;
  logic [P-1:0][NUM_VCS-1:0][PORT_W-1:0] req_port;
  logic [P-1:0][NUM_VCS-1:0][VC_W-1:0]   gnt_vc;
  logic [P-1:0]                          rel_valid;
  logic [P-1:0][VC_W-1:0]                rel_vc;
  logic [P-1:0][NUM_VCS-1:0]             ovc_busy;

  vc_allocator #(.P(P)) dut (.clk, .rst_n, .req, .req_port, .gnt, .gnt_vc,
                             .rel_valid, .rel_vc, .ovc_busy);

  bit busy [P][NUM_VCS];

  task automatic check_cycle();
    for (int o = 0; o < P; o++) begin
      int ng, lowest, nreq;
      ng = 0; nreq = 0; lowest = -1;
      for (int v = NUM_VCS - 1; v >= 0; v--) if (!busy[o][v]) lowest = v;
      for (int i = 0; i < P; i++)
        for (int v = 0; v < NUM_VCS; v++)
          if (req[i][v] && int'(req_port[i][v]) == o) begin
            nreq++;
            if (gnt[i][v]) begin
              ng++;
              checks++;
              if (int'(gnt_vc[i][v]) != lowest) begin
                failures++; $display("FAIL port %0d vc %0d expected %0d", o, gnt_vc[i][v], lowest);
              end
            end
          end
      checks++;
      if (ng != ((nreq > 0 && lowest >= 0) ? 1 : 0)) begin
        failures++; $display("FAIL port %0d grants %0d reqs %0d free %0d", o, ng, nreq, lowest);
      end
    end
    for (int i = 0; i < P; i++)
      for (int v = 0; v < NUM_VCS; v++)
        if (gnt[i][v] && !req[i][v]) begin failures++; $display("FAIL grant without request"); end
  endtask

  task automatic update_model();
    for (int o = 0; o < P; o++)
      for (int v = 0; v < NUM_VCS; v++) begin
        bit a;
        a = 0;
        for (int i = 0; i < P; i++)
          for (int w = 0; w < NUM_VCS; w++)
            if (gnt[i][w] && int'(req_port[i][w]) == o && int'(gnt_vc[i][w]) == v) a = 1;
        if (a) busy[o][v] = 1;
        else if (rel_valid[o] && int'(rel_vc[o]) == v) busy[o][v] = 0;
      end
  endtask

  int wins [2];
  initial begin
    req = '0; req_port = '0; rel_valid = '0; rel_vc = '0;
    for (int o = 0; o < P; o++) for (int v = 0; v < NUM_VCS; v++) busy[o][v] = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int i = 0; i < P; i++)
        for (int v = 0; v < NUM_VCS; v++) begin
          req[i][v]      = ($urandom_range(3) == 0);
          req_port[i][v] = PORT_W'($urandom_range(P - 1));
        end
      for (int o = 0; o < P; o++) begin
        int v;
        v = int'($urandom_range(NUM_VCS - 1));
        rel_valid[o] = busy[o][v] && ($urandom_range(2) == 0);
        rel_vc[o]    = VC_W'(v);
      end
      #1;
      check_cycle();
      @(posedge clk);
      update_model();
    end
    // fairness: inputs 1 and 4 both want port 3; releases keep VCs free
    wins[0] = 0; wins[1] = 0;
    for (int t = 0; t < 40; t++) begin
      @(negedge clk);
      req = '0; rel_valid = '0;
      req[1][0] = 1; req_port[1][0] = 3'd3;
      req[4][2] = 1; req_port[4][2] = 3'd3;
      for (int v = 0; v < NUM_VCS; v++) if (busy[3][v]) begin rel_valid[3] = 1; rel_vc[3] = VC_W'(v); end
      #1;
      if (gnt[1][0]) wins[0]++;
      if (gnt[4][2]) wins[1]++;
      @(posedge clk);
      update_model();
    end
    checks++;
    if (wins[0] < 8 || wins[1] < 8) begin failures++; $display("FAIL fairness %0d %0d", wins[0], wins[1]); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
