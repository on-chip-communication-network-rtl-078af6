// rr_arbiter -- round-robin arbiter over N requesters.
//
// grant is one-hot (or zero when nothing is requested). The search starts at the
// requester after the last one granted, so every requester is served within N grants.
// The pointer moves only when advance is high (the grant was used). Used for the
// output-port switch allocation of the router.
module rr_arbiter #(
  parameter int N = 4
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         advance,
  output logic [N-1:0] grant
);

  localparam int IW = (N > 1) ? $clog2(N) : 1;

  logic [IW-1:0] last;

  always_comb begin
    int idx;
    grant = '0;
    for (int k = 1; k <= N; k++) begin
      idx = (int'(last) + k) % N;
      if (req[idx] && grant == '0) grant[idx] = 1'b1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last <= IW'(N - 1);
    end else if (advance && grant != '0) begin
      for (int i = 0; i < N; i++)
        if (grant[i]) last <= IW'(i);
    end
  end

endmodule
