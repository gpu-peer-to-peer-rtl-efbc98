// tb_rr_arbiter: random requests against a round-robin reference, including
// grants held over several cycles.
module tb_rr_arbiter;
  localparam int N = 5;
  logic clk = 0, rst_n = 0, hold;
  logic [N-1:0] req, gnt;
  int checks = 0, failures = 0;
  int last = N - 1;
  logic [N-1:0] locked = '0;

  rr_arbiter #(.N(N)) dut (.*);
  always #5 clk = ~clk;

  function automatic logic [N-1:0] ref_pick(logic [N-1:0] r, int l);
    for (int k = 1; k <= N; k++) if (r[(l + k) % N]) return N'(1) << ((l + k) % N);
    return '0;
  endfunction

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    logic [N-1:0] exp;
    req = 0; hold = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 4000; cyc++) begin
      @(negedge clk);
      req  = N'($urandom);
      hold = ($urandom_range(3) == 0);
      #1;
      exp = (locked != 0) ? locked : ref_pick(req, last);
      checks++;
      if (gnt !== exp) begin failures++; $display("FAIL cyc %0d req %b gnt %b exp %b", cyc, req, gnt, exp); end
      @(posedge clk);
      if (hold) locked = exp;
      else begin
        locked = '0;
        for (int i = 0; i < N; i++) if (exp[i]) last = i;
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
