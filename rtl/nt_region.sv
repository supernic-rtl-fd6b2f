// nt_region: one NT region, the unit of partial reconfiguration.
//
// A region hosts one chain of up to CHAIN_LEN network tasks. Headers from
// the crossbar enter an input FIFO and then walk the chain position by
// position; each position is an nt_wrapper around an NT whose kind is fixed
// by KINDS (in the FPGA prototype the kind is whatever bitstream was loaded;
// here it is chosen at elaboration). A header leaves the region either after
// the last position (`done` = 1) or early, at a position whose NT it must
// run but holds no reserved credit (`done` = 0, `run` says what is left).
// All leaving headers are merged round-robin onto the single return port to
// the scheduler. `stop` (context switch) stops the region from taking new
// headers out of its FIFO; headers already in flight finish. `idle` is high when
// nothing is in flight, i.e. the region may be reconfigured. Credit returns
// and per-NT load counters are brought out per position.
module nt_region
  import snic_pkg::*;
#(
  parameter int REGION = 0,
  parameter chain_kinds_t KINDS = {CHAIN_LEN{NT_DUMMY}},
  parameter int DUMMY_LAT  = 10,
  parameter int FIFO_DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  cfg_wr_t  cfg,
  input  logic     stop,
  input  logic     in_valid,
  output logic     in_ready,
  input  reg_msg_t in_m,
  output logic     out_valid,
  input  logic     out_ready,
  output ret_msg_t out_m,
  output logic     idle,
  output logic [CHAIN_LEN-1:0] credit_ret,
  output logic [31:0] load [CHAIN_LEN]
);
  // chain links: link[p] feeds position p, link[CHAIN_LEN] leaves the chain
  logic     lv [CHAIN_LEN+1];
  logic     lr [CHAIN_LEN+1];
  reg_msg_t lm [CHAIN_LEN+1];

  logic [$clog2(FIFO_DEPTH+1)-1:0] fcnt;
  logic f_valid;
  sync_fifo #(.T(reg_msg_t), .DEPTH(FIFO_DEPTH)) u_fifo (
    .clk, .rst_n,
    .in_valid, .in_ready, .in_data(in_m),
    .out_valid(f_valid), .out_ready(lr[0] && !stop), .out_data(lm[0]), .count(fcnt)
  );
  assign lv[0] = f_valid && !stop;

  // returns: one exit per position plus the chain end
  logic     rv [CHAIN_LEN+1];
  logic     rr_ [CHAIN_LEN+1];
  ret_msg_t rm [CHAIN_LEN+1];

  for (genvar p = 0; p < CHAIN_LEN; p++) begin : g_pos
    logic  nt_iv, nt_ir, nt_ov, nt_or;
    desc_t nt_id, nt_od;

    nt_wrapper #(.POS(p)) u_wrap (
      .clk, .rst_n,
      .in_valid(lv[p]), .in_ready(lr[p]), .in_m(lm[p]),
      .out_valid(lv[p+1]), .out_ready(lr[p+1]), .out_m(lm[p+1]),
      .exit_valid(rv[p]), .exit_ready(rr_[p]), .exit_m(rm[p]),
      .nt_in_valid(nt_iv), .nt_in_ready(nt_ir), .nt_in_d(nt_id),
      .nt_out_valid(nt_ov), .nt_out_ready(nt_or), .nt_out_d(nt_od),
      .credit_ret(credit_ret[p]), .load(load[p]), .skipped()
    );

    localparam int ID = REGION * CHAIN_LEN + p;
    case (KINDS[p])
      NT_FW: begin : g_fw
        nt_firewall #(.NT_ID(ID)) u_nt (.clk, .rst_n, .cfg,
               .in_valid(nt_iv), .in_ready(nt_ir), .in_d(nt_id),
               .out_valid(nt_ov), .out_ready(nt_or), .out_d(nt_od));
      end
      NT_NAT: begin : g_nat
        nt_nat #(.NT_ID(ID)) u_nt (.clk, .rst_n, .cfg,
               .in_valid(nt_iv), .in_ready(nt_ir), .in_d(nt_id),
               .out_valid(nt_ov), .out_ready(nt_or), .out_d(nt_od));
      end
      NT_LB: begin : g_lb
        nt_lb #(.NT_ID(ID)) u_nt (.clk, .rst_n, .cfg,
               .in_valid(nt_iv), .in_ready(nt_ir), .in_d(nt_id),
               .out_valid(nt_ov), .out_ready(nt_or), .out_d(nt_od));
      end
      NT_KV: begin : g_kv
        nt_kvcache u_nt (.clk, .rst_n,
               .in_valid(nt_iv), .in_ready(nt_ir), .in_d(nt_id),
               .out_valid(nt_ov), .out_ready(nt_or), .out_d(nt_od), .hits(), .misses());
      end
      NT_GBN: begin : g_gbn
        nt_gbn u_nt (.clk, .rst_n,
               .in_valid(nt_iv), .in_ready(nt_ir), .in_d(nt_id),
               .out_valid(nt_ov), .out_ready(nt_or), .out_d(nt_od), .nacks());
      end
      default: begin : g_dummy
        dummy_nt #(.LATENCY(DUMMY_LAT)) u_nt (.clk, .rst_n,
               .in_valid(nt_iv), .in_ready(nt_ir), .in_d(nt_id),
               .out_valid(nt_ov), .out_ready(nt_or), .out_d(nt_od));
      end
    endcase
  end

  // chain end
  assign rv[CHAIN_LEN] = lv[CHAIN_LEN];
  assign rm[CHAIN_LEN] = '{d: lm[CHAIN_LEN].d, region: lm[CHAIN_LEN].region, done: 1'b1,
                           run: lm[CHAIN_LEN].run};
  assign lr[CHAIN_LEN] = rr_[CHAIN_LEN];

  // merge onto the return port
  logic [CHAIN_LEN:0] req, gnt;
  logic [$clog2(CHAIN_LEN+1)-1:0] gidx;
  for (genvar i = 0; i <= CHAIN_LEN; i++) begin : g_req
    assign req[i] = rv[i];
    assign rr_[i] = gnt[i] && out_ready;
  end
  rr_arb #(.N(CHAIN_LEN + 1)) u_arb (.clk, .rst_n, .req, .advance(out_ready), .grant(gnt), .grant_idx(gidx));
  assign out_valid = |req;
  assign out_m     = rm[gidx];

  // in-flight tracking for `idle`
  logic [15:0] in_flight;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) in_flight <= '0;
    else in_flight <= in_flight + 16'(lv[0] && lr[0]) - 16'(out_valid && out_ready);
  end
  assign idle = (in_flight == 0) && (fcnt == 0);
endmodule
