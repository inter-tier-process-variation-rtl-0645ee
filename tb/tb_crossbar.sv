// Drives the 7x7 crossbar with random permutations (some inputs idle) and
// checks that every output carries exactly the flit of the input that
// named it, and an invalid flit otherwise.
module tb_crossbar;
  import noc_pkg::*;
  localparam int P = NUM_PORTS;
  int checks = 0, failures = 0;

  flit_t [P-1:0]             in_flit, out_flit;
  logic  [P-1:0][PORT_W-1:0] in_port;

  crossbar #(.P(P)) dut (.in_flit, .in_port, .out_flit);

  int perm [P];
  initial begin
    for (int t = 0; t < 500; t++) begin
      for (int i = 0; i < P; i++) perm[i] = i;
      for (int i = P - 1; i > 0; i--) begin
        int j, tmp;
        j = int'($urandom_range(i));
        tmp = perm[i]; perm[i] = perm[j]; perm[j] = tmp;
      end
      for (int i = 0; i < P; i++) begin
        in_flit[i].valid = ($urandom_range(3) != 0);
        in_flit[i].ftype = flit_type_e'($urandom_range(3));
        in_flit[i].vc    = VC_W'($urandom_range(NUM_VCS - 1));
        in_flit[i].data  = $urandom;
        in_port[i]       = PORT_W'(perm[i]);
      end
      #1;
      for (int o = 0; o < P; o++) begin
        flit_t e;
        e = '0;
        for (int i = 0; i < P; i++) if (perm[i] == o && in_flit[i].valid) e = in_flit[i];
        checks++;
        if (out_flit[o] != e) begin failures++; $display("FAIL t=%0d o=%0d", t, o); end
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
