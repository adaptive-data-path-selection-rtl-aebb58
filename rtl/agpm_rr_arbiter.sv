// agpm_rr_arbiter: round-robin arbiter. grant is one-hot among the valid
// requesters, starting the search after the last one served; the pointer
// moves only when `advance` (the granted request was taken) is high.
// Combinational grant, pointer updated on the clock edge.
module agpm_rr_arbiter #(
  parameter int unsigned N = 20
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] valid,
  input  logic         advance,
  output logic [N-1:0] grant,
  output logic [$clog2(N > 1 ? N : 2)-1:0] grant_idx,
  output logic         any
);

  localparam int unsigned IW = $clog2(N > 1 ? N : 2);

  logic [IW-1:0] last_q;

  always_comb begin
    int unsigned k;
    grant     = '0;
    grant_idx = '0;
    any       = 1'b0;
    for (int unsigned j = 1; j <= N; j++) begin
      k = (32'(last_q) + j) % N;
      if (!any && valid[k]) begin
        any       = 1'b1;
        grant[k]  = 1'b1;
        grant_idx = IW'(k);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)              last_q <= IW'(N - 1);
    else if (advance && any) last_q <= grant_idx;
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(grant));

endmodule
