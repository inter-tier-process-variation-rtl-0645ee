// Input unit of one router port: a flit FIFO per virtual channel plus the
// virtual-channel state that the three router stages act on.
//
// A flit arriving on `in_flit` is written into the FIFO of the VC it
// carries (buffer write). Each VC is IDLE until a head flit reaches the
// front of its FIFO; the unit then computes the flit's output port with XYZ
// routing and requests an output VC (`va_req`, stage 1). When the VC
// allocator grants one (`va_gnt`, `va_gnt_vc`), the VC becomes ACTIVE and
// remembers the output port and output VC for the rest of the packet. An
// ACTIVE VC with a flit at its front requests the switch (`sa_req`,
// stage 2). When the switch allocator picks it (`pop`, one-hot), the front
// flit leaves on `pop_flit` with its VC field rewritten to the output VC,
// and a credit for that VC is returned upstream on `credit_out` in the same
// cycle. Popping a tail flit returns the VC to IDLE.
//
// Timing: a flit written at the end of cycle c is at the FIFO front in
// cycle c+1. The buffer depth is not given by the paper; BUF_DEPTH = 6 is
// this design's choice: it holds one whole six-flit packet and covers the
// five-cycle credit loop of a one-cycle link, so an uncontended packet
// streams without a bubble. The upstream credit counters must start at the
// same value. The VC count (4) is the paper's.
module input_unit
  import noc_pkg::*;
#(
  parameter int unsigned BUF_DEPTH = 6,
  parameter int unsigned MESH_X    = 4,
  parameter int unsigned MESH_Y    = 4,
  parameter int unsigned MESH_Z    = 4,
  parameter int unsigned MY_X      = 0,
  parameter int unsigned MY_Y      = 0,
  parameter int unsigned MY_Z      = 0
) (
  input  logic                              clk,
  input  logic                              rst_n,
  input  flit_t                             in_flit,
  output credit_t                           credit_out,
  // stage 1: VC allocation
  output logic [NUM_VCS-1:0]                va_req,
  output logic [NUM_VCS-1:0][PORT_W-1:0]    va_port,
  input  logic [NUM_VCS-1:0]                va_gnt,
  input  logic [NUM_VCS-1:0][VC_W-1:0]      va_gnt_vc,
  // stage 2: switch allocation
  output logic [NUM_VCS-1:0]                sa_req,
  output logic [NUM_VCS-1:0][PORT_W-1:0]    sa_port,
  output logic [NUM_VCS-1:0][VC_W-1:0]      sa_ovc,
  input  logic [NUM_VCS-1:0]                pop,
  output flit_t                             pop_flit,
  output logic [PORT_W-1:0]                 pop_port
);
  localparam int unsigned PW = $clog2(BUF_DEPTH > 1 ? BUF_DEPTH : 2);
  localparam int unsigned CW = $clog2(BUF_DEPTH + 1);

  typedef enum logic {VC_IDLE = 1'b0, VC_ACTIVE = 1'b1} vc_state_e;

  flit_t       mem   [NUM_VCS][BUF_DEPTH];
  logic [PW-1:0] rd_ptr [NUM_VCS];
  logic [PW-1:0] wr_ptr [NUM_VCS];
  logic [CW-1:0] count  [NUM_VCS];
  vc_state_e     state  [NUM_VCS];
  logic [PORT_W-1:0] out_port [NUM_VCS];
  logic [VC_W-1:0]   out_vc   [NUM_VCS];

  flit_t       front [NUM_VCS];
  port_e       route [NUM_VCS];

  for (genvar v = 0; v < NUM_VCS; v++) begin : g_vc
    assign front[v] = mem[v][rd_ptr[v]];

    route_xyz #(
      .MESH_X(MESH_X), .MESH_Y(MESH_Y),
      .MY_X(MY_X), .MY_Y(MY_Y), .MY_Z(MY_Z)
    ) u_route (
      .dest     (front[v].data[NODE_W-1:0]),
      .out_port (route[v])
    );

    always_comb begin
      va_req[v]  = (state[v] == VC_IDLE) && (count[v] != '0) && is_head(front[v].ftype);
      va_port[v] = route[v];
      sa_req[v]  = (state[v] == VC_ACTIVE) && (count[v] != '0);
      sa_port[v] = out_port[v];
      sa_ovc[v]  = out_vc[v];
    end

    wire wr = in_flit.valid && (in_flit.vc == VC_W'(v));

    always_ff @(posedge clk or negedge rst_n) begin
      if (!rst_n) begin
        rd_ptr[v]   <= '0;
        wr_ptr[v]   <= '0;
        count[v]    <= '0;
        state[v]    <= VC_IDLE;
        out_port[v] <= '0;
        out_vc[v]   <= '0;
      end else begin
        if (wr) begin
          mem[v][wr_ptr[v]] <= in_flit;
          wr_ptr[v] <= (int'(wr_ptr[v]) == BUF_DEPTH - 1) ? '0 : wr_ptr[v] + 1'b1;
        end
        if (pop[v]) begin
          rd_ptr[v] <= (int'(rd_ptr[v]) == BUF_DEPTH - 1) ? '0 : rd_ptr[v] + 1'b1;
        end
        count[v] <= count[v] + CW'(wr) - CW'(pop[v]);

        if (state[v] == VC_IDLE && va_req[v] && va_gnt[v]) begin
          state[v]    <= VC_ACTIVE;
          out_port[v] <= route[v];
          out_vc[v]   <= va_gnt_vc[v];
        end else if (pop[v] && is_tail(front[v].ftype)) begin
          state[v]    <= VC_IDLE;
        end
      end
    end

    // Credit-based flow control never lets the buffer overflow, and the
    // switch allocator only pops an ACTIVE, non-empty VC.
    a_no_overflow : assert property (@(posedge clk) disable iff (!rst_n)
      !(wr && !pop[v] && int'(count[v]) == BUF_DEPTH));
    a_pop_legal : assert property (@(posedge clk) disable iff (!rst_n)
      pop[v] |-> sa_req[v]);
    a_dest_in_mesh : assert property (@(posedge clk) disable iff (!rst_n)
      va_req[v] |-> int'(front[v].data[NODE_W-1:0]) < MESH_X * MESH_Y * MESH_Z);
    a_head_first : assert property (@(posedge clk) disable iff (!rst_n)
      (state[v] == VC_IDLE && count[v] != '0) |-> is_head(front[v].ftype));
  end

  always_comb begin
    pop_flit       = '0;
    pop_port       = '0;
    credit_out     = '0;
    for (int v = 0; v < NUM_VCS; v++) begin
      if (pop[v]) begin
        pop_flit       = front[v];
        pop_flit.valid = 1'b1;
        pop_flit.vc    = out_vc[v];
        pop_port       = out_port[v];
        credit_out.valid = 1'b1;
        credit_out.vc    = VC_W'(v);
      end
    end
  end

  a_pop_onehot : assert property (@(posedge clk) disable iff (!rst_n) $onehot0(pop));

endmodule
