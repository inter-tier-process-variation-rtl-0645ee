// Sends random flits and credits through a three-stage link and checks
// that each comes out unchanged exactly LATENCY cycles later.
module tb_noc_link;
  import noc_pkg::*;
  localparam int LAT = 3;
  int checks = 0, failures = 0;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  flit_t   up_flit, down_flit;
  credit_t down_credit, up_credit;

  noc_link #(.LATENCY(LAT)) dut (.clk, .rst_n, .up_flit, .down_flit, .down_credit, .up_credit);

  flit_t   fhist [$];
  credit_t chist [$];

  initial begin
    up_flit = '0; down_credit = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int t = 0; t < 300; t++) begin
      @(negedge clk);
      if (t >= LAT) begin
        checks += 2;
        if (down_flit != fhist[t - LAT]) begin failures++; $display("FAIL flit t=%0d", t); end
        if (up_credit != chist[t - LAT]) begin failures++; $display("FAIL credit t=%0d", t); end
      end
      up_flit     = {1'b1, flit_type_e'($urandom_range(3)), VC_W'($urandom), 32'($urandom)};
      up_flit.valid = $urandom_range(1);
      down_credit = {1'($urandom_range(1)), VC_W'($urandom)};
      fhist.push_back(up_flit);
      chist.push_back(down_credit);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
