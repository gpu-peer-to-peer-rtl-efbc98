// tb_gpu_p2p_tx: feeds transmit descriptors to the GPU read-request generator
// with a GPU model that answers each 128-byte read after 600 cycles (slower
// than the 1.8 us of a real GPU, so that the outstanding limit is reached)
// at one 16-byte word per cycle. Checks: one header per
// descriptor, in order and with its fields; read addresses contiguous and
// lengths min(128, rest); at least 16 cycles between requests and exactly 16
// when nothing throttles; no request while the data, header or request FIFO
// reports almost-full; never more than 32 x 128 bytes outstanding; and that both
// the outstanding limit and the almost-full flags did throttle the stream.
module tb_gpu_p2p_tx;
  import apenet_pkg::*;
  localparam int LAT = 600, INTERVAL = 16, MAXO = 32;
  logic clk = 0, rst_n = 0;
  logic desc_valid, desc_ready, hdr_valid, req_valid, hdr_af, data_af, req_af, data_word, busy, fc_stall;
  tx_desc_t desc;
  pkt_hdr_t hdr;
  rd_req_t  req;
  int checks = 0, failures = 0;

  gpu_p2p_tx dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  tx_desc_t descs[$], hdr_exp[$];
  longint   cycle = 0, last_req = -1000;
  int       ret_time[$];          // cycle at which each outstanding read starts returning
  int       ret_words[$];
  int       outstanding = 0,   // words requested, not yet returned
            n_req = 0, exact_gaps = 0, af_stalls = 0, cap_stalls = 0;
  longint   exp_addr; int exp_rem; int di = 0;
  bit       throttled_since;      // flow control held a request since the last one

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  // GPU model: returns words of the oldest read in order
  int cur_words = 0;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    data_word <= 1'b0;
    if (rst_n) begin
      if (cur_words == 0 && ret_time.size() != 0 && ret_time[0] <= cycle) begin
        void'(ret_time.pop_front());
        cur_words = ret_words.pop_front();
      end
      if (cur_words != 0) begin
        data_word <= 1'b1;
        cur_words--;
        outstanding--;
      end
    end
  end

  // request / header monitor
  always @(posedge clk) if (rst_n) begin
    if (fc_stall) begin
      throttled_since = 1;
      if (data_af || req_af) af_stalls++; else cap_stalls++;
    end
    if (hdr_valid) begin
      tx_desc_t d;
      d = hdr_exp.pop_front();
      chk(hdr.dst == d.dst && hdr.len == d.len && hdr.dst_va == d.dst_va && hdr.pid == d.pid, "header fields");
      chk(!hdr_af, "header pushed while header FIFO almost full");
    end
    if (req_valid) begin
      chk(!data_af && !req_af, "request while a FIFO is almost full");
      if (exp_rem == 0) begin
        tx_desc_t d;
        d = descs[di]; di++;
        exp_addr = longint'(d.src_addr); exp_rem = int'(d.len);
      end
      chk(req.addr == 64'(exp_addr), $sformatf("req addr %h exp %h", req.addr, exp_addr));
      chk(int'(req.len) == ((exp_rem > 128) ? 128 : exp_rem), "req len");
      chk(cycle - last_req >= INTERVAL, $sformatf("request gap %0d", cycle - last_req));
      if (!throttled_since && last_req >= 0) begin
        chk(cycle - last_req == INTERVAL, $sformatf("unthrottled gap %0d", cycle - last_req));
        exact_gaps++;
      end
      throttled_since = 0;
      exp_addr += int'(req.len); exp_rem -= int'(req.len);
      last_req = cycle;
      n_req++;
      outstanding += (int'(req.len) + 15) / 16;
      chk(outstanding <= MAXO * 8, "more than MAX_OUTSTANDING x 128 bytes outstanding");
      ret_time.push_back(int'(cycle) + LAT);
      ret_words.push_back((int'(req.len) + 15) / 16);
    end
  end

  initial begin
    int total = 0;
    desc_valid = 0; desc = '0; hdr_af = 0; data_af = 0; req_af = 0;
    exp_rem = 0; throttled_since = 1;
    for (int k = 0; k < 6; k++) begin
      tx_desc_t d;
      d.src_addr = 64'h0000_00d0_0000_0000 + 64'(k) * 64'h10000;
      d.len    = (k == 2) ? 13'd1008 : (k == 4) ? 13'd48 : 13'd4096;
      d.dst    = '{x: 4'(k), y: 4'd1, z: 4'd0};
      d.pid    = 16'(100 + k);
      d.dst_va = 64'h0000_0002_0000_0000 + 64'(k) * 64'h1000;
      descs.push_back(d);
      total += (int'(d.len) + 127) / 128;
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int k = 0; k < 6; k++) begin
      @(negedge clk);
      desc_valid = 1; desc = descs[k];
      // header FIFO almost full for a while before descriptor 3
      if (k == 3) begin
        hdr_af = 1;
        repeat (40) begin @(negedge clk); chk(!desc_ready, "descriptor taken while header FIFO almost full"); end
        hdr_af = 0;
      end
      do @(posedge clk); while (!desc_ready);
      hdr_exp.push_back(descs[k]);
      @(negedge clk); desc_valid = 0;
      if (k == 1) begin            // data FIFO almost full, then request FIFO
        repeat (100) @(negedge clk);
        data_af = 1; repeat (200) @(negedge clk); data_af = 0;
        req_af = 1;  repeat (100) @(negedge clk); req_af = 0;
      end
    end
    wait (n_req == total && outstanding == 0);
    repeat (10) @(posedge clk);
    chk(!busy, "busy after all data returned");
    chk(di == 6, "all descriptors read");
    chk(cap_stalls > 0, "outstanding limit never reached");
    chk(af_stalls > 0, "almost-full never throttled");
    chk(exact_gaps > 20, "too few unthrottled request gaps");
    $display("gpu_p2p_tx: %0d requests, %0d exact gaps, %0d cap stalls, %0d af stalls",
             n_req, exact_gaps, cap_stalls, af_stalls);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
