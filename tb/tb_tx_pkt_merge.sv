// tb_tx_pkt_merge: random headers (0..8 payload words) and payload words
// offered with random gaps; the output must be header then exactly len/16
// payload words in order, with `last` on the final flit.
module tb_tx_pkt_merge;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  logic hdr_valid, hdr_ready, data_valid, data_ready, out_valid, out_ready;
  pkt_hdr_t hdr;
  logic [FLIT_W-1:0] data;
  flit_t out_flit;
  int checks = 0, failures = 0;

  tx_pkt_merge dut (.*);
  always #5 clk = ~clk;

  pkt_hdr_t hq[$];
  logic [FLIT_W-1:0] dq[$];
  flit_t exp_q[$];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    for (int p = 0; p < 200; p++) begin
      pkt_hdr_t h; int n;
      n = $urandom_range(8);
      h = '0; h.len = LEN_W'(16 * n); h.dst_va = 64'(p) << 12; h.pid = 16'(p);
      hq.push_back(h);
      exp_q.push_back('{last: (n == 0), data: FLIT_W'(h)});
      for (int w = 0; w < n; w++) begin
        logic [FLIT_W-1:0] d;
        d = {32'(p), 32'(w), 64'($urandom)};
        dq.push_back(d);
        exp_q.push_back('{last: (w == n - 1), data: d});
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;
  end

  always @(negedge clk) begin
    hdr_valid  = rst_n && hq.size() != 0 && $urandom_range(3) != 0;
    hdr        = (hq.size() != 0) ? hq[0] : '0;
    data_valid = rst_n && dq.size() != 0 && $urandom_range(3) != 0;
    data       = (dq.size() != 0) ? dq[0] : '0;
    out_ready  = $urandom_range(4) != 0;
  end

  always @(posedge clk) if (rst_n) begin
    if (hdr_valid && hdr_ready) void'(hq.pop_front());
    if (data_valid && data_ready) void'(dq.pop_front());
    if (out_valid && out_ready) begin
      flit_t e;
      e = exp_q.pop_front();
      chk(out_flit == e, $sformatf("flit %h/%0d exp %h/%0d", out_flit.data, out_flit.last, e.data, e.last));
    end
    if (exp_q.size() == 0) begin
      chk(hq.size() == 0 && dq.size() == 0, "inputs consumed");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end
endmodule
