// Random test of the separable switch allocator: every cycle the grants
// must be a subset of the requests, one-hot per input and at most one
// input per output. A lone requester is always served, and with all inputs
// asking for the same output every input is served within P cycles.
module tb_switch_allocator;
  import noc_pkg::*;
  localparam int P = NUM_PORTS;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [P-1:0][NUM_VCS-1:0]             req, gnt;
  logic [P-1:0][NUM_VCS-1:0][PORT_W-1:0] req_port;

  switch_allocator #(.P(P)) dut (.clk, .rst_n, .req, .req_port, .gnt);

  task automatic check_legal();
    int used [P];
    for (int o = 0; o < P; o++) used[o] = 0;
    for (int i = 0; i < P; i++) begin
      checks++;
      if (!$onehot0(gnt[i]) || (gnt[i] & ~req[i]) != '0) begin
        failures++; $display("FAIL input %0d grant %b req %b", i, gnt[i], req[i]);
      end
      for (int v = 0; v < NUM_VCS; v++) if (gnt[i][v]) used[req_port[i][v]]++;
    end
    for (int o = 0; o < P; o++) begin
      checks++;
      if (used[o] > 1) begin failures++; $display("FAIL output %0d used %0d times", o, used[o]); end
    end
  endtask

  int served [P];
  initial begin
    req = '0; req_port = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 2000; t++) begin
      @(negedge clk);
      for (int i = 0; i < P; i++)
        for (int v = 0; v < NUM_VCS; v++) begin
          req[i][v]      = ($urandom_range(2) == 0);
          req_port[i][v] = PORT_W'($urandom_range(P - 1));
        end
      #1;
      check_legal();
    end
    // a lone requester is always granted
    for (int t = 0; t < 50; t++) begin
      int i, v;
      @(negedge clk);
      req = '0;
      i = int'($urandom_range(P - 1)); v = int'($urandom_range(NUM_VCS - 1));
      req[i][v] = 1; req_port[i][v] = PORT_W'($urandom_range(P - 1));
      #1;
      checks++;
      if (!gnt[i][v]) begin failures++; $display("FAIL lone request %0d.%0d", i, v); end
    end
    // all inputs want output 2: each served once in P cycles
    for (int i = 0; i < P; i++) served[i] = 0;
    for (int t = 0; t < P; t++) begin
      @(negedge clk);
      req = '0;
      for (int i = 0; i < P; i++) begin req[i][1] = 1; req_port[i][1] = 3'd2; end
      #1;
      check_legal();
      for (int i = 0; i < P; i++) if (gnt[i][1]) served[i]++;
    end
    for (int i = 0; i < P; i++) begin
      checks++;
      if (served[i] != 1) begin failures++; $display("FAIL input %0d served %0d", i, served[i]); end
    end
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
