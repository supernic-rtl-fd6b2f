// nt_nat: network address translation task (header only).
//
// A table of ENTRIES translations {valid, inside address, inside port,
// outside address, outside port}. A packet whose source address and port
// match an entry leaves with the outside address and port as its source;
// a packet whose destination matches the outside pair of an entry leaves
// with the inside pair as destination (the return direction). Others pass
// unchanged. The paper names a NAT NT without describing it; the table
// format is this design's choice. One register stage, valid/ready.
// Config: T_NT, addr = {NT_ID[5:0], 2*entry + half}, half 0:
// data = {valid[63], in_port[47:32], in_ip[31:0]}, half 1:
// data = {out_port[47:32], out_ip[31:0]}.
module nt_nat
  import snic_pkg::*;
#(
  parameter int ENTRIES = 8,
  parameter int NT_ID   = 0
) (
  input  logic    clk,
  input  logic    rst_n,
  input  cfg_wr_t cfg,
  input  logic    in_valid,
  output logic    in_ready,
  input  desc_t   in_d,
  output logic    out_valid,
  input  logic    out_ready,
  output desc_t   out_d
);
  typedef struct packed {
    logic        valid;
    logic [31:0] in_ip;
    logic [15:0] in_port;
    logic [31:0] out_ip;
    logic [15:0] out_port;
  } nat_t;
  nat_t tbl [ENTRIES];

  desc_t nd;
  always_comb begin
    nd = in_d;
    for (int i = 0; i < ENTRIES; i++) begin
      if (tbl[i].valid && in_d.sip == tbl[i].in_ip && in_d.sport == tbl[i].in_port) begin
        nd.sip   = tbl[i].out_ip;
        nd.sport = tbl[i].out_port;
      end
      if (tbl[i].valid && in_d.dip == tbl[i].out_ip && in_d.dport == tbl[i].out_port) begin
        nd.dip   = tbl[i].in_ip;
        nd.dport = tbl[i].in_port;
      end
    end
  end

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_d     <= '0;
      for (int i = 0; i < ENTRIES; i++) tbl[i] <= '0;
    end else begin
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) out_d <= nd;
      end
      if (cfg.valid && cfg.tgt == T_NT && int'(cfg.addr[15:10]) == NT_ID && int'(cfg.addr[9:1]) < ENTRIES) begin
        if (!cfg.addr[0]) begin
          tbl[cfg.addr[$clog2(ENTRIES):1]].valid   <= cfg.data[63];
          tbl[cfg.addr[$clog2(ENTRIES):1]].in_port <= cfg.data[47:32];
          tbl[cfg.addr[$clog2(ENTRIES):1]].in_ip   <= cfg.data[31:0];
        end else begin
          tbl[cfg.addr[$clog2(ENTRIES):1]].out_port <= cfg.data[47:32];
          tbl[cfg.addr[$clog2(ENTRIES):1]].out_ip   <= cfg.data[31:0];
        end
      end
    end
  end
endmodule
