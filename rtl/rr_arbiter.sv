// rr_arbiter: round-robin arbiter over N requesters.
//
// grant_idx names the first requester at or after the one following the last
// accepted grant; any is high when some request is present. The priority
// pointer moves only when the caller signals accept, so a grant that is held
// back (for example by a full buffer) stays with the same requester. Purely
// combinational grant, one register for the pointer.
module rr_arbiter #(
  parameter int unsigned N  = 4,
  parameter int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic [N-1:0]  req,
  input  logic          accept,
  output logic          any,
  output logic [IW-1:0] grant_idx
);
  logic [IW-1:0] ptr;

  always_comb begin
    any       = 1'b0;
    grant_idx = '0;
    for (int unsigned o = 0; o < N; o++) begin
      int unsigned i;
      i = (int'(ptr) + o) % N;
      if (!any && req[i]) begin
        any       = 1'b1;
        grant_idx = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) ptr <= '0;
    else if (accept && any) ptr <= (int'(grant_idx) == N - 1) ? '0 : grant_idx + 1'b1;
  end

endmodule
