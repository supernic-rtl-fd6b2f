// rr_arb: round-robin arbiter.
//
// Grants one of N requesters per cycle. The search starts just after the
// requester granted last, so every requester that keeps requesting is served
// within N grants. `grant` is one-hot and combinational; the priority pointer
// moves only when `advance` is high (the granted request was consumed).
module rr_arb #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant,
  output logic [$clog2(N)-1:0] grant_idx
);
  localparam int IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last;

  // scan from last+N down to last+1 so that the request closest after
  // `last` is the one kept
  always_comb begin
    grant     = '0;
    grant_idx = '0;
    for (int k = N; k >= 1; k--) begin
      if (req[(int'(last) + k) % N]) begin
        grant     = '0;
        grant[(int'(last) + k) % N] = 1'b1;
        grant_idx = IW'((int'(last) + k) % N);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) last <= IW'(N - 1);
    else if (advance && (req != '0)) last <= grant_idx;
  end
endmodule
