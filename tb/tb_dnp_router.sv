// tb_dnp_router: all eight inputs inject random packets (random destination
// node on the 4x2x1 torus, 0..6 payload flits) while outputs apply random
// back-pressure. Each delivered packet must leave on the port a reference
// dimension-order model picks, arrive whole and uninterrupted, and every
// packet sent must arrive exactly once. Contention for an output is counted
// and must occur.
module tb_dnp_router;
  import apenet_pkg::*;
  localparam int NPKT = 60;               // packets per input
  logic clk = 0, rst_n = 0;
  coord_t my_coord;
  flit_t in_flit[NPORTS], out_flit[NPORTS];
  logic in_valid[NPORTS], in_ready[NPORTS], out_valid[NPORTS], out_ready[NPORTS];
  int checks = 0, failures = 0;

  dnp_router dut (.*);
  always #5 clk = ~clk;

  flit_t q[NPORTS][$];
  int    sent = 0, received = 0, contention = 0;
  bit    in_pkt[NPORTS];
  int    cur_src[NPORTS], cur_seq[NPORTS], cur_words[NPORTS], cur_exp[NPORTS];
  bit    seen[NPORTS][NPKT];

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic port_e ref_port(coord_t d);
    int px, py;
    if (d.x != my_coord.x) begin
      px = (int'(d.x) - int'(my_coord.x) + 4) % 4;
      return (px <= 4 - px) ? P_XP : P_XM;
    end
    if (d.y != my_coord.y) begin
      py = (int'(d.y) - int'(my_coord.y) + 2) % 2;
      return (py <= 2 - py) ? P_YP : P_YM;
    end
    return P_LOC0;
  endfunction

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    my_coord = '{x: 4'd1, y: 4'd1, z: 4'd0};
    for (int i = 0; i < NPORTS; i++) begin
      in_valid[i] = 0; in_flit[i] = '0; out_ready[i] = 0; in_pkt[i] = 0;
      for (int s = 0; s < NPKT; s++) begin
        pkt_hdr_t h;
        int n;
        n = $urandom_range(6);
        h = '0;
        h.dst = '{x: 4'($urandom_range(3)), y: 4'($urandom_range(1)), z: 4'd0};
        h.len = LEN_W'(n * 16);
        h.rsvd = 23'((i << 20) | s);
        q[i].push_back('{last: (n == 0), data: FLIT_W'(h)});
        for (int w = 0; w < n; w++)
          q[i].push_back('{last: (w == n - 1), data: {8'(i), 16'(s), 88'd0, 16'(w)}});
        sent++;
      end
    end
    repeat (2) @(posedge clk); rst_n = 1;
  end

  // drivers and random output back-pressure
  always @(posedge clk) if (rst_n) begin
    for (int i = 0; i < NPORTS; i++) begin
      if (in_valid[i] && in_ready[i]) void'(q[i].pop_front());
      out_ready[i] <= ($urandom_range(9) < 7);
    end
  end
  always @(negedge clk) begin
    for (int i = 0; i < NPORTS; i++) begin
      in_valid[i] = rst_n && (q[i].size() != 0) && ($urandom_range(9) < 8);
      in_flit[i]  = (q[i].size() != 0) ? q[i][0] : '0;
    end
  end

  // contention: two header flits waiting for the same output
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NPORTS; o++) begin
      int n = 0;
      for (int i = 0; i < NPORTS; i++)
        if (in_valid[i] && !in_ready[i] && dut.route_cur[i] == port_e'(o)) n++;
      if (n > 0 && out_valid[o]) contention++;
    end
  end

  // monitors
  always @(posedge clk) if (rst_n) begin
    for (int o = 0; o < NPORTS; o++) begin
      if (out_valid[o] && out_ready[o]) begin
        if (!in_pkt[o]) begin
          pkt_hdr_t h;
          h = pkt_hdr_t'(out_flit[o].data);
          cur_src[o]   = int'(h.rsvd[22:20]);
          cur_seq[o]   = int'(h.rsvd[15:0]);
          cur_exp[o]   = int'(h.len) / 16;
          cur_words[o] = 0;
          chk(port_e'(o) == ref_port(h.dst), $sformatf("route: dst %p left on %0d", h.dst, o));
          chk(out_flit[o].last == (cur_exp[o] == 0), "header last flag");
          chk(!seen[cur_src[o]][cur_seq[o]], "duplicate packet");
          seen[cur_src[o]][cur_seq[o]] = 1;
          if (out_flit[o].last) received++; else in_pkt[o] = 1;
        end else begin
          chk(out_flit[o].data[127:120] == 8'(cur_src[o]) && out_flit[o].data[119:104] == 16'(cur_seq[o])
              && out_flit[o].data[15:0] == 16'(cur_words[o]), $sformatf("payload order on port %0d", o));
          cur_words[o]++;
          chk(out_flit[o].last == (cur_words[o] == cur_exp[o]), "payload last flag");
          if (out_flit[o].last) begin in_pkt[o] = 0; received++; end
        end
      end
    end
  end

  initial begin
    int idle = 0;
    wait (rst_n);
    while (idle < 50) begin
      @(posedge clk);
      idle = 0;
      for (int i = 0; i < NPORTS; i++) if (q[i].size() != 0) idle = -100000;
      if (idle == 0) repeat (50) @(posedge clk);
      if (idle == 0) idle = 50;
    end
    chk(received == sent, $sformatf("received %0d of %0d packets", received, sent));
    chk(contention > 0, "output contention never happened");
    $display("router: %0d packets, %0d contention cycles", received, contention);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
