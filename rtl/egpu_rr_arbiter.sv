// egpu_rr_arbiter: round-robin arbiter.
//
// Picks one of N requesters. The search starts just after the requester that
// was granted last, so every requester that keeps asking is served within N
// grants. The choice is combinational (gnt_o is one-hot, or zero when nobody
// asks); the pointer moves only when the caller signals with advance_i that the
// grant was used, so a grant can be held for a multi-cycle transaction.
module egpu_rr_arbiter #(
  parameter int unsigned N  = 4,
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1
) (
  input  logic          clk_i,
  input  logic          rst_ni,
  input  logic [N-1:0]  req_i,
  input  logic          advance_i,
  output logic [N-1:0]  gnt_o,
  output logic [IW-1:0] idx_o,
  output logic          valid_o
);

  logic [IW-1:0] last_q;

  always_comb begin
    gnt_o   = '0;
    idx_o   = '0;
    valid_o = 1'b0;
    for (int k = 1; k <= N; k++) begin
      int unsigned c;
      c = (int'(last_q) + k) % N;
      if (!valid_o && req_i[c]) begin
        valid_o  = 1'b1;
        idx_o    = IW'(c);
        gnt_o[c] = 1'b1;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni)                 last_q <= IW'(N - 1);
    else if (advance_i && valid_o) last_q <= idx_o;
  end

endmodule
