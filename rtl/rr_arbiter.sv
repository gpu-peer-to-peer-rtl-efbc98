// rr_arbiter: round-robin arbiter for one router output port.
//
// Among the requesting inputs it grants the first one after the last winner,
// so no input waits for more than N-1 other packets. A grant is held while
// `hold` is high (the granted packet is still crossing the switch) and the
// pointer moves past the winner when the grant is released.
//
// Interface: req is one bit per input; gnt is one-hot or zero and
// combinational from req and the stored state; a new grant is taken only
// when `hold` is low. The source design names an arbiter in its router; the
// round-robin policy is this design's choice.
module rr_arbiter #(
  parameter int unsigned N = 8
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [N-1:0] req,
  input  logic         hold,     // keep the present grant
  output logic [N-1:0] gnt
);
  localparam int unsigned IW = (N > 1) ? $clog2(N) : 1;
  logic [IW-1:0] last_q;         // last input that won
  logic [N-1:0]  locked_q;       // grant held across cycles
  logic [N-1:0]  pick;

  always_comb begin
    pick = '0;
    for (int unsigned k = 1; k <= N; k++) begin
      int unsigned idx;
      idx = (int'(last_q) + k) % N;
      if (pick == '0 && req[idx]) pick[idx] = 1'b1;
    end
  end

  assign gnt = (locked_q != '0) ? locked_q : pick;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      last_q   <= IW'(N-1);
      locked_q <= '0;
    end else if (hold) begin
      locked_q <= gnt;
    end else begin
      locked_q <= '0;
      for (int unsigned i = 0; i < N; i++)
        if (gnt[i]) last_q <= IW'(i);
    end
  end

  a_onehot: assert property (@(posedge clk) disable iff (!rst_n) $onehot0(gnt));
endmodule
