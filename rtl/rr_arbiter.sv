// rr_arbiter: combinational round-robin arbiter.
//
// Picks one of the active request lines in `req_i`, starting the search at
// the line after the one that won last. The one-hot `gnt_o` is valid in the
// same cycle. The priority pointer advances only when `advance_i` is high,
// i.e. when the downstream side actually accepted the winner, so a stalled
// winner keeps its grant until it is served.
module rr_arbiter #(
  parameter int unsigned N = 4
) (
  input  logic                 clk_i,
  input  logic                 rst_ni,
  input  logic [N-1:0]         req_i,
  input  logic                 advance_i,
  output logic [N-1:0]         gnt_o,
  output logic [$clog2(N)-1:0] idx_o
);
  localparam int unsigned IdxW = $clog2(N);

  logic [IdxW-1:0] prio_q;   // index with the highest priority this cycle

  always_comb begin
    gnt_o = '0;
    idx_o = '0;
    for (int unsigned k = 0; k < N; k++) begin
      logic [IdxW-1:0] j;
      j = IdxW'((int'(prio_q) + k) % N);
      if (req_i[j] && gnt_o == '0) begin
        gnt_o[j] = 1'b1;
        idx_o    = j;
      end
    end
  end

  always_ff @(posedge clk_i or negedge rst_ni) begin
    if (!rst_ni) begin
      prio_q <= '0;
    end else if (advance_i && |req_i) begin
      prio_q <= (int'(idx_o) == N - 1) ? '0 : idx_o + 1'b1;
    end
  end

  assert property (@(posedge clk_i) disable iff (!rst_ni) $onehot0(gnt_o));
  assert property (@(posedge clk_i) disable iff (!rst_ni) (|req_i) == (|gnt_o));

endmodule
