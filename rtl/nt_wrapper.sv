// nt_wrapper: the SuperNIC shell around one network task of a chain.
//
// Every NT is generated with this wrapper around it. For each header message
// arriving from the previous chain position the wrapper decides, from the
// message's `run` and `rsv` masks at bit POS:
//   run = 0            skip: the NT is not part of this packet's DAG; the
//                      message bypasses the NT through a one-entry register;
//   run = 1, rsv = 1   execute: the scheduler reserved a credit here; the
//                      descriptor enters the NT, and the rest of the message
//                      waits in a side FIFO (NTs keep packet order);
//   run = 1, rsv = 0   return: no credit was reserved, so the packet leaves
//                      the chain here, back to the scheduler (`exit_*`),
//                      which retries this NT when it has credits.
// When the NT hands a finished descriptor on, its run/rsv bits are cleared,
// a credit is returned to the scheduler (`credit_ret` pulse) and the count
// of executed packets (`load`, read by the control plane to monitor the
// NT's load) is incremented. NT output has priority over the bypass
// register on the output port. Interfaces are valid/ready; the NT is
// attached through the nt_* ports.
module nt_wrapper
  import snic_pkg::*;
#(
  parameter int POS        = 0,
  parameter int SIDE_DEPTH = 16
) (
  input  logic     clk,
  input  logic     rst_n,
  input  logic     in_valid,
  output logic     in_ready,
  input  reg_msg_t in_m,
  output logic     out_valid,
  input  logic     out_ready,
  output reg_msg_t out_m,
  output logic     exit_valid,
  input  logic     exit_ready,
  output ret_msg_t exit_m,
  // attached NT
  output logic     nt_in_valid,
  input  logic     nt_in_ready,
  output desc_t    nt_in_d,
  input  logic     nt_out_valid,
  output logic     nt_out_ready,
  input  desc_t    nt_out_d,
  // to the scheduler / control plane
  output logic     credit_ret,
  output logic [31:0] load,
  output logic [31:0] skipped
);
  logic do_skip, do_run, do_exit;
  assign do_skip = !in_m.run[POS];
  assign do_run  = in_m.run[POS] && in_m.rsv[POS];
  assign do_exit = in_m.run[POS] && !in_m.rsv[POS];

  // side FIFO carrying the message around the NT
  logic     side_in_ready, side_valid;
  reg_msg_t side_head;
  sync_fifo #(.T(reg_msg_t), .DEPTH(SIDE_DEPTH)) u_side (
    .clk, .rst_n,
    .in_valid(in_valid && do_run && nt_in_ready), .in_ready(side_in_ready), .in_data(in_m),
    .out_valid(side_valid), .out_ready(nt_out_valid && nt_out_ready), .out_data(side_head), .count()
  );

  logic     byp_v, ex_v;
  reg_msg_t byp;
  ret_msg_t ex;

  logic byp_free, ex_free, nt_sel;
  assign nt_sel   = nt_out_valid;                       // NT output has priority
  assign byp_free = !byp_v || (out_ready && !nt_sel);
  assign ex_free  = !ex_v || exit_ready;

  assign in_ready = do_skip ? byp_free :
                    do_run  ? (nt_in_ready && side_in_ready) : ex_free;

  assign nt_in_valid = in_valid && do_run && side_in_ready;
  assign nt_in_d     = in_m.d;

  always_comb begin
    out_valid = nt_out_valid || byp_v;
    if (nt_sel) begin
      out_m          = side_head;
      out_m.d        = nt_out_d;
      out_m.run[POS] = 1'b0;
      out_m.rsv[POS] = 1'b0;
    end else begin
      out_m = byp;
    end
  end
  assign nt_out_ready = out_ready;
  assign credit_ret   = nt_out_valid && nt_out_ready;
  assign exit_valid   = ex_v;
  assign exit_m       = ex;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      byp_v   <= 1'b0;
      byp     <= '0;
      ex_v    <= 1'b0;
      ex      <= '0;
      load    <= '0;
      skipped <= '0;
    end else begin
      if (out_ready && !nt_sel) byp_v <= 1'b0;
      if (in_valid && in_ready && do_skip) begin
        byp_v   <= 1'b1;
        byp     <= in_m;
        skipped <= skipped + 1;
      end
      if (exit_ready) ex_v <= 1'b0;
      if (in_valid && in_ready && do_exit) begin
        ex_v <= 1'b1;
        ex   <= '{d: in_m.d, region: in_m.region, done: 1'b0, run: in_m.run};
      end
      if (credit_ret) load <= load + 1;
    end
  end

  // the scheduler never sends a message for which no credit was reserved into an NT
  a_nt_only_reserved: assert property (@(posedge clk) disable iff (!rst_n)
      nt_in_valid |-> in_m.rsv[POS]);
endmodule
