// nt_lb: load-balancer network task (header only).
//
// Packets addressed to the virtual service address (VIP) are spread over
// up to BACKENDS real servers: a hash of the flow (source address and
// source port) selects a backend, so all packets of one flow reach the same
// server, and the destination address is rewritten to it. Packets to other
// addresses pass unchanged. The paper names a load-balancer NT without
// describing it; the hash (XOR-fold of source address and port, modulo the
// number of enabled backends) is this design's choice. One register stage.
// Config: T_NT, addr = {NT_ID[5:0], idx}: idx 0 -> data = {nback[39:32],
// vip[31:0]}; idx 1+b -> data[31:0] = address of backend b.
module nt_lb
  import snic_pkg::*;
#(
  parameter int BACKENDS = 4,
  parameter int NT_ID    = 0
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
  logic [31:0] vip;
  logic [7:0]  nback;
  logic [31:0] be [BACKENDS];

  logic [15:0] h;
  logic [7:0]  pick;
  assign h    = in_d.sip[31:16] ^ in_d.sip[15:0] ^ in_d.sport;
  assign pick = (nback == 0) ? 8'd0 : 8'((h[7:0] ^ h[15:8]) % nback);

  assign in_ready = !out_valid || out_ready;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_d     <= '0;
      vip       <= '0;
      nback     <= '0;
      for (int i = 0; i < BACKENDS; i++) be[i] <= '0;
    end else begin
      if (in_ready) begin
        out_valid <= in_valid;
        if (in_valid) begin
          out_d <= in_d;
          if (nback != 0 && in_d.dip == vip) out_d.dip <= be[pick[$clog2(BACKENDS)-1:0]];
        end
      end
      if (cfg.valid && cfg.tgt == T_NT && int'(cfg.addr[15:10]) == NT_ID) begin
        if (cfg.addr[9:0] == 0) begin
          vip   <= cfg.data[31:0];
          nback <= (int'(cfg.data[39:32]) > BACKENDS) ? 8'(BACKENDS) : cfg.data[39:32];
        end else if (int'(cfg.addr[9:0]) <= BACKENDS) begin
          be[int'(cfg.addr[9:0]) - 1] <= cfg.data[31:0];
        end
      end
    end
  end
endmodule
