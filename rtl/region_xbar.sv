// region_xbar: the crossbar between the central scheduler and the NT regions.
//
// Because a whole NT chain sits behind one region port, the crossbar needs
// only one port per region instead of one per NT. Downstream, the header
// message from the scheduler is steered to the region named in its `region`
// field (ready is that region's ready). Upstream, the regions' return ports
// are merged round-robin into the single return port of the scheduler, so no
// region can starve another. Purely combinational apart from the arbiter's
// pointer; both directions pass one message per cycle.
module region_xbar
  import snic_pkg::*;
#(
  parameter int N = NUM_REGIONS
) (
  input  logic     clk,
  input  logic     rst_n,
  // scheduler side
  input  logic     s_valid,
  output logic     s_ready,
  input  reg_msg_t s_m,
  output logic     r_valid,
  input  logic     r_ready,
  output ret_msg_t r_m,
  // region side
  output logic     [N-1:0] g_valid,
  input  logic     [N-1:0] g_ready,
  output reg_msg_t g_m,
  input  logic     [N-1:0] b_valid,
  output logic     [N-1:0] b_ready,
  input  ret_msg_t b_m [N]
);
  always_comb begin
    g_valid = '0;
    g_valid[s_m.region] = s_valid;
  end
  assign g_m     = s_m;
  assign s_ready = g_ready[s_m.region];

  logic [N-1:0] gnt;
  logic [$clog2(N)-1:0] gidx;
  rr_arb #(.N(N)) u_arb (.clk, .rst_n, .req(b_valid), .advance(r_ready), .grant(gnt), .grant_idx(gidx));
  assign r_valid = |b_valid;
  assign r_m     = b_m[gidx];
  assign b_ready = gnt & {N{r_ready}};
endmodule
