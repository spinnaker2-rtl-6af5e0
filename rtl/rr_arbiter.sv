// rr_arbiter -- round-robin arbiter.
//
// grant is one-hot among the raised req bits, searching upward from the bit
// after the last accepted grant.  The pointer advances only when the caller
// signals with `accept` that the granted transfer took place, so a stalled
// winner keeps its grant.  Purely combinational from req to grant.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         accept,
  output logic [N-1:0] grant
);
  logic [$clog2(N)-1:0] last;

  always_comb begin
    grant = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (32'(last) + k) % N;
      if (grant == '0 && req[idx]) grant[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= $clog2(N)'(N - 1);
    end else if (accept && grant != '0) begin
      for (int unsigned i = 0; i < N; i++)
        if (grant[i]) last <= $clog2(N)'(i);
    end
  end
endmodule
