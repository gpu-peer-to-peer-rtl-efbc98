// tb_dnp_top: end-to-end run of the DNP at its default sizes, as node (0,0,0)
// of a 4x2x1 torus.
//
// Models around the DUT: a GPU that answers peer-to-peer reads after 360
// cycles (1.8 us at 200 MHz) with data that is a function of the address, a
// host memory that answers reads after 100 cycles, a PCIe write sink with
// random back-pressure (slow for the first part of the run, so the 32 KB GPU
// transmit buffer fills), and torus neighbours that inject packets and accept
// packets with random back-pressure. The firmware's part (buffer registration,
// page tables, descriptors) is done through the configuration ports.
//
// Traffic: GPU-to-GPU loop-back (64 KB in 4 KB packets, read from a GPU
// virtual source buffer whose two pages are mapped in reverse order, so one
// packet's reads straddle a page, and landing across two 64 KB GPU pages), host-to-host loop-back (1 KB packets across 4 KB host
// pages), GPU packets to a neighbour, packets arriving on the X- link for
// this node, for another node (pass-through) and for an unregistered address.
//
// Checks: every payload word written to host or GPU memory lands at the
// physical address the page tables give and carries the data read at the
// source; GPU writes always fall in the page the P2P window is on; packets
// leaving on X+ carry the right header and data; drop count. Mechanisms that
// must happen at least once: read-request flow-control stall, stall caused by
// almost-full of the transmit data FIFO, GPU source page walks (no fault),
// GPU window move, page-crossing re-translation, router output contention, pass-through routing, drop.
module tb_dnp_top;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  coord_t my_coord;
  flit_t link_in_flit[6], link_out_flit[6];
  logic  link_in_valid[6], link_in_ready[6], link_out_valid[6], link_out_ready[6];
  logic  gtx_desc_valid, gtx_desc_ready, gpu_rd_valid, gpu_rd_ready, gpu_data_valid;
  tx_desc_t gtx_desc, htx_desc;
  rd_req_t gpu_rd, host_rd;
  logic [127:0] gpu_data, host_data;
  logic  htx_desc_valid, htx_desc_ready, host_rd_valid, host_rd_ready, host_data_valid;
  logic  rx_wr_valid, rx_wr_ready;
  pcie_wr_t rx_wr;
  flit_t loc1_out_flit; logic loc1_out_valid, loc1_out_ready;
  logic reg_we, reg_valid, reg_is_gpu; logic [5:0] reg_idx; logic [63:0] reg_va;
  logic [31:0] reg_len; logic [15:0] reg_pid; logic [0:0] reg_gpu;
  logic htw_we, gtw_we; logic [14:0] htw_addr, host_root; logic [13:0] gtw_addr, gpu_root[1];
  logic [63:0] htw_data, gtw_data;
  logic gtx_fc_stall, gtx_busy, gtx_xlate_walk, gtx_xlate_fault, htx_busy, rx_pkt_done, rx_pkt_drop, rx_win_switch;
  int checks = 0, failures = 0;

  dnp_top dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [127:0] gpu_mem(logic [63:0] pa);  return {pa, ~pa}; endfunction
  function automatic logic [127:0] host_mem(logic [63:0] pa); return {pa ^ 64'h5a5a_0000_0000_0000, pa}; endfunction

  // ------------------------------------------------ page tables (reference + fill)
  int h_next = 1, g_next = 1;
  int h_base[string], g_base[string];
  logic [63:0] host_pa[longint], gpu_pa[longint];

  task automatic hw(int a, logic [63:0] d);
    @(negedge clk); htw_we = 1; htw_addr = 15'(a); htw_data = d; @(negedge clk); htw_we = 0;
  endtask
  task automatic gw(int a, logic [63:0] d);
    @(negedge clk); gtw_we = 1; gtw_addr = 14'(a); gtw_data = d; @(negedge clk); gtw_we = 0;
  endtask
  task automatic map(bit gpu, logic [63:0] va, logic [63:0] pa);
    int pl, lb, tsize, base, idx, nb;
    pl = gpu ? 16 : 12; lb = (64 - pl) / 4; tsize = 1 << lb; base = 0;
    if (gpu) gpu_pa[longint'(va >> 16)] = pa; else host_pa[longint'(va >> 12)] = pa;
    for (int l = 0; l < 3; l++) begin
      string key;
      key = $sformatf("%0d_%h", l, va >> (pl + lb * (3 - l)));
      idx = int'((va >> (pl + lb * (3 - l))) & ((64'd1 << lb) - 1));
      if (gpu ? g_base.exists(key) : h_base.exists(key)) nb = gpu ? g_base[key] : h_base[key];
      else if (gpu) begin nb = g_next * tsize; g_next++; g_base[key] = nb; gw(base + idx, 64'(nb << 1) | 1); end
      else          begin nb = h_next * tsize; h_next++; h_base[key] = nb; hw(base + idx, 64'(nb << 1) | 1); end
      base = nb;
    end
    idx = int'((va >> pl) & ((64'd1 << lb) - 1));
    if (gpu) gw(base + idx, ((pa >> pl) << pl) | 1); else hw(base + idx, ((pa >> pl) << pl) | 1);
  endtask

  function automatic logic [63:0] xlate(bit gpu, logic [63:0] va);
    return gpu ? (gpu_pa[longint'(va >> 16)] | (va & 64'hffff)) : (host_pa[longint'(va >> 12)] | (va & 64'hfff));
  endfunction

  // ------------------------------------------------ expected results
  logic [127:0] exp_wr[string];          // "kind_addr" -> data
  int exp_words = 0, got_words = 0;
  flit_t xp_q[$], xq_pass[$];            // expected flits on X+: GPU packets, pass-through
  bit    xp_in_pass = 0, xp_mid = 0;     // packet on X+ is the pass-through one / packet open
  int n_xp = 0;

  function automatic string wkey(bit gpu, logic [63:0] pa); return $sformatf("%0d_%h", gpu, pa); endfunction

  // ------------------------------------------------ GPU and host read models
  typedef struct { longint t; logic [63:0] a; int n; } rd_t;
  rd_t g_rd[$], h_rd[$];
  longint cycle = 0;
  int g_left = 0, h_left = 0; logic [63:0] g_addr, h_addr;

  always @(posedge clk) begin
    cycle <= cycle + 1;
    gpu_data_valid <= 0; host_data_valid <= 0;
    if (rst_n) begin
      if (gpu_rd_valid && gpu_rd_ready) g_rd.push_back('{cycle + 360, gpu_rd.addr, (int'(gpu_rd.len) + 15) / 16});
      if (host_rd_valid && host_rd_ready) h_rd.push_back('{cycle + 100, host_rd.addr, (int'(host_rd.len) + 15) / 16});
      if (g_left == 0 && g_rd.size() != 0 && g_rd[0].t <= cycle) begin
        rd_t r; r = g_rd.pop_front(); g_left = r.n; g_addr = r.a;
      end
      if (g_left != 0) begin
        gpu_data_valid <= 1; gpu_data <= gpu_mem(g_addr); g_addr += 16; g_left--;
      end
      if (h_left == 0 && h_rd.size() != 0 && h_rd[0].t <= cycle) begin
        rd_t r; r = h_rd.pop_front(); h_left = r.n; h_addr = r.a;
      end
      if (h_left != 0) begin
        host_data_valid <= 1; host_data <= host_mem(h_addr); h_addr += 16; h_left--;
      end
    end
  end

  // ------------------------------------------------ sinks, link driver, monitors
  int slow = 1;
  flit_t lq[$];                          // flits to inject on X-
  logic [63:0] win = '1;
  int n_txw = 0, n_txf = 0;
  int n_fc = 0, n_af = 0, n_win = 0, n_cross = 0, n_cont = 0, n_drop = 0, n_done = 0, n_pass = 0;
  logic [63:0] last_gpa = '1, last_hpa = '1;
  bit prev_data = 0;

  always @(negedge clk) begin
    rx_wr_ready   = slow ? ($urandom_range(9) == 0) : ($urandom_range(3) != 0);
    gpu_rd_ready  = $urandom_range(3) != 0;
    host_rd_ready = 1;
    loc1_out_ready = 1;
    for (int p = 0; p < 6; p++) begin
      link_out_ready[p] = $urandom_range(2) != 0;
      link_in_valid[p]  = 0;
      link_in_flit[p]   = '0;
    end
    link_in_valid[P_XM] = rst_n && lq.size() != 0 && $urandom_range(3) != 0;
    link_in_flit[P_XM]  = (lq.size() != 0) ? lq[0] : '0;
  end

  always @(posedge clk) if (rst_n) begin
    if (link_in_valid[P_XM] && link_in_ready[P_XM]) void'(lq.pop_front());
    n_fc   += int'(gtx_fc_stall);
    n_txw  += int'(gtx_xlate_walk);
    n_txf  += int'(gtx_xlate_fault);
    n_af   += int'(gtx_fc_stall && dut.g_dat_af);
    n_win  += int'(rx_win_switch);
    n_drop += int'(rx_pkt_drop);
    n_done += int'(rx_pkt_done);
    // translation started again in the middle of a packet
    if (dut.u_rx_rdma.st_q == dut.u_rx_rdma.S_XLATE && prev_data) n_cross++;
    prev_data = (dut.u_rx_rdma.st_q == dut.u_rx_rdma.S_DATA);
    if (dut.r_in_valid[P_LOC0] && dut.r_in_valid[P_LOC1] && !dut.r_in_ready[P_LOC0] &&
        dut.u_router.route_cur[P_LOC0] == dut.u_router.route_cur[P_LOC1]) n_cont++;
    chk(!loc1_out_valid, "routing chose the second local port");
    if (rx_wr_valid && rx_wr_ready) begin
      string k;
      if (rx_wr.kind == GPU_WINDOW) win = rx_wr.addr;
      else begin
        if (rx_wr.kind == WR_GPU)
          chk((rx_wr.addr >> 16) == (win >> 16), $sformatf("GPU write %h outside window %h", rx_wr.addr, win));
        k = wkey(rx_wr.kind == WR_GPU, rx_wr.addr);
        chk(exp_wr.exists(k), $sformatf("write to unexpected %s", k));
        if (exp_wr.exists(k)) begin
          chk(exp_wr[k] == rx_wr.data, $sformatf("data at %s", k));
          exp_wr.delete(k);
        end
        got_words++;
      end
    end
    if (link_out_valid[P_XP] && link_out_ready[P_XP]) begin
      flit_t e;
      // the two sources are ordered only within each; pick by the header
      if (!xp_mid) xp_in_pass = xq_pass.size() != 0 && link_out_flit[P_XP] == xq_pass[0];
      chk((xp_in_pass ? xq_pass.size() : xp_q.size()) != 0, "unexpected flit on X+");
      if ((xp_in_pass ? xq_pass.size() : xp_q.size()) != 0) begin
        e = xp_in_pass ? xq_pass.pop_front() : xp_q.pop_front();
        chk(link_out_flit[P_XP] == e, $sformatf("flit on X+: %h vs %h", link_out_flit[P_XP], e));
        if (e.last) n_xp++;
        xp_mid = !e.last;
      end
    end
    for (int p = 1; p < 6; p++) chk(!link_out_valid[p], $sformatf("traffic on link %0d", p));
  end

  // ------------------------------------------------ stimulus
  task automatic gtx(logic [63:0] src, int len, coord_t dst, logic [63:0] dva, int pid, bit local_);
    pkt_hdr_t h;
    @(negedge clk); gtx_desc_valid = 1;
    gtx_desc = '{src_addr: src, len: LEN_W'(len), dst: dst, pid: 16'(pid), dst_va: dva};
    do @(posedge clk); while (!gtx_desc_ready);
    @(negedge clk); gtx_desc_valid = 0;
  endtask

  localparam logic [63:0] SVA = 64'h0000_0002_0100_0000;
  localparam logic [63:0] GVA = 64'h0000_0002_0000_0000, HVA = 64'h0000_7f00_1234_0000;
  coord_t me, nb, far_;

  // expected results of one packet landing here
  // (a GPU source is a GPU virtual address, a host source a physical one)
  task automatic expect_local(bit gpu_dst, logic [63:0] dva, int len, bit gpu_src, logic [63:0] src);
    for (int w = 0; w < len / 16; w++) begin
      exp_wr[wkey(gpu_dst, xlate(gpu_dst, dva + 64'(16 * w)))] =
        gpu_src ? gpu_mem(xlate(1, src + 64'(16 * w))) : host_mem(src + 64'(16 * w));
      exp_words++;
    end
  endtask

  task automatic push_link(coord_t dst, logic [63:0] dva, int nw, int pid, bit to_xp);
    pkt_hdr_t h; flit_t f;
    h = '0; h.dst = dst; h.dst_va = dva; h.len = LEN_W'(16 * nw); h.pid = 16'(pid);
    f = '{last: (nw == 0), data: FLIT_W'(h)};
    lq.push_back(f); if (to_xp) xq_pass.push_back(f);
    for (int w = 0; w < nw; w++) begin
      f = '{last: (w == nw - 1), data: {64'hfeed_0000_0000_0000 + 64'(pid), 64'(w)}};
      lq.push_back(f); if (to_xp) xq_pass.push_back(f);
    end
  endtask

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    me = '{x: 0, y: 0, z: 0}; nb = '{x: 1, y: 0, z: 0}; far_ = '{x: 2, y: 1, z: 0};
    my_coord = me;
    gtx_desc_valid = 0; htx_desc_valid = 0; gtx_desc = '0; htx_desc = '0;
    reg_we = 0; htw_we = 0; gtw_we = 0; reg_idx = 0; reg_valid = 0; reg_va = 0; reg_len = 0;
    reg_pid = 0; reg_is_gpu = 0; reg_gpu = 0; htw_addr = 0; htw_data = 0; gtw_addr = 0; gtw_data = 0;
    host_root = 0; gpu_root[0] = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    // firmware: clear the four tables of each map, register buffers, map pages
    for (int a = 0; a < 4 * 8192; a++) begin @(negedge clk); htw_we = 1; htw_addr = 15'(a); htw_data = 0; end
    for (int a = 0; a < 4 * 4096; a++) begin @(negedge clk); gtw_we = 1; gtw_addr = 14'(a); gtw_data = 0; end
    @(negedge clk); htw_we = 0; gtw_we = 0;
    @(negedge clk); reg_we = 1; reg_idx = 0; reg_valid = 1; reg_va = HVA; reg_len = 65536; reg_pid = 3; reg_is_gpu = 0;
    @(negedge clk); reg_idx = 5; reg_va = GVA; reg_len = 4 << 16; reg_pid = 3; reg_is_gpu = 1; reg_gpu = 0;
    @(negedge clk); reg_we = 0;
    for (int p = 0; p < 16; p++) map(0, HVA + 64'(p * 4096), 64'h0000_0001_0000_0000 + 64'(((p * 7) % 16) * 4096));
    for (int p = 0; p < 4; p++)  map(1, GVA + 64'(p * 65536), 64'h0000_00e0_0000_0000 + 64'((3 - p) * 'h50000));
    // GPU source buffer: virtual SVA.., physical 0xd1_0000_0000.., pages in reverse order
    for (int p = 0; p < 2; p++)  map(1, SVA + 64'(p * 65536), 64'h0000_00d1_0000_0000 + 64'((1 - p) * 65536));

    fork
      // GPU transmit: 16 x 4 KB to this node, two packets to the neighbour
      begin
        for (int k = 0; k < 18; k++) begin
          logic [63:0] sva;
          sva = SVA + 64'h40 + 64'(k * 4096);    // 16 B aligned: packet 15 straddles a page
          if (k == 5 || k == 11) begin
            pkt_hdr_t h;
            h = '0; h.dst = nb; h.dst_va = 64'h1000 * k; h.len = 13'd2048; h.pid = 16'(k);
            xp_q.push_back('{last: 0, data: FLIT_W'(h)});
            for (int w = 0; w < 128; w++) xp_q.push_back('{last: (w == 127), data: gpu_mem(xlate(1, sva + 64'(16 * w)))});
            gtx(sva, 2048, nb, 64'h1000 * k, k, 0);
          end else begin
            expect_local(1, GVA + 64'h8000 + 64'((k - (k > 5) - (k > 11)) * 4096), 4096, 1, sva);
            gtx(sva, 4096, me, GVA + 64'h8000 + 64'((k - (k > 5) - (k > 11)) * 4096), 3, 1);
          end
        end
      end
      // host transmit: 8 x 1 KB to this node, crossing 4 KB host pages
      begin
        for (int k = 0; k < 8; k++) begin
          logic [63:0] src;
          src = 64'h0000_0005_0000_0000 + 64'(k * 1024);
          expect_local(0, HVA + 64'h900 + 64'(k * 1024), 1024, 0, src);
          @(negedge clk); htx_desc_valid = 1;
          htx_desc = '{src_addr: src, len: 13'd1024, dst: me, pid: 16'd3, dst_va: HVA + 64'h900 + 64'(k * 1024)};
          do @(posedge clk); while (!htx_desc_ready);
          @(negedge clk); htx_desc_valid = 0;
          repeat ($urandom_range(200)) @(negedge clk);
        end
      end
      // neighbours: packets for this node, a pass-through and an unregistered one
      begin
        for (int k = 0; k < 4; k++) begin
          for (int w = 0; w < 32; w++) begin
            exp_wr[wkey(0, xlate(0, HVA + 64'h6000 + 64'(k * 512 + 16 * w)))] = {64'hfeed_0000_0000_0000 + 64'(3), 64'(w)};
            exp_words++;
          end
          push_link(me, HVA + 64'h6000 + 64'(k * 512), 32, 3, 0);
        end
        push_link(far_, 64'h1234_0000, 16, 9, 1);
        push_link(me, 64'h0000_0009_0000_0000, 8, 3, 0);   // not registered
      end
    join
    // let the slow phase fill the transmit buffer, then speed up the sink
    wait (n_af > 0 || cycle > 200000);
    slow = 0;
    wait (exp_wr.size() == 0 && xp_q.size() == 0 && xq_pass.size() == 0 && lq.size() == 0 && !gtx_busy && !htx_busy);
    repeat (200) @(posedge clk);
    chk(got_words == exp_words, $sformatf("payload words written %0d exp %0d", got_words, exp_words));
    chk(n_xp == 3, $sformatf("packets out on X+ %0d", n_xp));
    chk(n_drop == 1, $sformatf("drops %0d", n_drop));
    chk(n_done == 16 + 8 + 4, $sformatf("packets delivered %0d", n_done));
    chk(n_fc > 0,    "flow-control stall never happened");
    chk(n_af > 0,    "TX data FIFO almost-full never throttled reads");
    chk(n_win > 0,   "GPU window never moved");
    chk(n_cross > 0, "no page-crossing re-translation");
    chk(n_cont > 0,  "no router output contention");
    chk(n_txw >= 2,  "GPU source pages never translated");
    chk(n_txf == 0,  "GPU source translation fault");
    $display("dnp_top: %0d words written, %0d on X+, fc stalls %0d (af %0d), window moves %0d, page crossings %0d, contention %0d, drops %0d, source walks %0d, cycles %0d",
             got_words, n_xp, n_fc, n_af, n_win, n_cross, n_cont, n_drop, n_txw, cycle);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
