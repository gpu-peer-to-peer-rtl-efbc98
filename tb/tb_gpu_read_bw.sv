// tb_gpu_read_bw: GPU memory read bandwidth at varying message sizes, the
// single-node measurement of the source design (packets flushed out of the
// core as soon as they leave, here through the X+ link with no
// back-pressure). The whole core runs at its default sizes. A GPU model
// answers each peer-to-peer read after 360 cycles (1.8 us at 200 MHz) and
// then delivers one 16-byte word per cycle.
//
// Each message of 4 KB .. 1 MB is sent as 4 KB packets to the neighbour on
// X+. The time from the first descriptor to the last flit out gives the
// bandwidth at an assumed 200 MHz clock. Checks: bandwidth does not fall as
// messages grow; the 1 MB message reaches 1.5-1.6 GB/s (the measured peak
// is 1.5 GB/s and the request pace allows 1.6 GB/s); 1 MB takes 640-700 us
// (663 us measured on the bus); a small message is slower than the peak
// (latency bound); every flit out has the right content; the first read
// request leaves within 12 cycles of the first descriptor (including the
// walk that translates its GPU virtual source page). Every source buffer is a
// GPU virtual address, mapped page by page.
module tb_gpu_read_bw;
  import apenet_pkg::*;
  localparam real CLK_MHZ = 200.0;
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

  function automatic logic [127:0] gpu_mem(logic [63:0] pa); return {~pa, pa}; endfunction

  // GPU model
  typedef struct { longint t; logic [63:0] a; int n; } rd_t;
  rd_t g_rd[$];
  longint cycle = 0, first_req = -1;
  int g_left = 0; logic [63:0] g_addr;
  always @(posedge clk) begin
    cycle <= cycle + 1;
    gpu_data_valid <= 0;
    if (rst_n) begin
      if (gpu_rd_valid && gpu_rd_ready) begin
        g_rd.push_back('{cycle + 360, gpu_rd.addr, (int'(gpu_rd.len) + 15) / 16});
        if (first_req < 0) first_req = cycle;
      end
      if (g_left == 0 && g_rd.size() != 0 && g_rd[0].t <= cycle) begin
        rd_t r; r = g_rd.pop_front(); g_left = r.n; g_addr = r.a;
      end
      if (g_left != 0) begin
        gpu_data_valid <= 1; gpu_data <= gpu_mem(g_addr); g_addr += 16; g_left--;
      end
    end
  end

  // GPU page table (the source buffers are GPU virtual addresses)
  int g_next = 1;
  int g_base[string];
  task automatic gw(int a, logic [63:0] d);
    @(negedge clk); gtw_we = 1; gtw_addr = 14'(a); gtw_data = d; @(negedge clk); gtw_we = 0;
  endtask
  task automatic map(logic [63:0] va, logic [63:0] pa);
    int base, idx, nb;
    base = 0;
    for (int l = 0; l < 3; l++) begin
      string key;
      key = $sformatf("%0d_%h", l, va >> (16 + 12 * (3 - l)));
      idx = int'((va >> (16 + 12 * (3 - l))) & 64'hfff);
      if (g_base.exists(key)) nb = g_base[key];
      else begin nb = g_next * 4096; g_next++; g_base[key] = nb; gw(base + idx, 64'(nb << 1) | 1); end
      base = nb;
    end
    idx = int'((va >> 16) & 64'hfff);
    gw(base + idx, ((pa >> 16) << 16) | 1);
  endtask

  // X+ sink: check content, count words
  flit_t xq[$];
  int words_out = 0;
  always @(posedge clk) if (rst_n) begin
    if (link_out_valid[P_XP]) begin
      flit_t e;
      e = xq.pop_front();
      chk(link_out_flit[P_XP] == e, "flit content on X+");
      words_out++;
    end
  end

  initial begin
    #200000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    int sizes[6] = '{4096, 8192, 32768, 131072, 524288, 1048576};
    real bw[6];
    my_coord = '{x: 0, y: 0, z: 0};
    gtx_desc_valid = 0; htx_desc_valid = 0; gtx_desc = '0; htx_desc = '0;
    reg_we = 0; htw_we = 0; gtw_we = 0; reg_idx = 0; reg_valid = 0; reg_va = 0; reg_len = 0;
    reg_pid = 0; reg_is_gpu = 0; reg_gpu = 0; htw_addr = 0; htw_data = 0; gtw_addr = 0; gtw_data = 0;
    host_root = 0; gpu_root[0] = 0; host_rd_ready = 1; gpu_rd_ready = 1; rx_wr_ready = 1; loc1_out_ready = 1;
    for (int p = 0; p < 6; p++) begin link_in_valid[p] = 0; link_in_flit[p] = '0; link_out_ready[p] = 1; end
    repeat (3) @(posedge clk); rst_n = 1;
    // source buffer s: virtual 0x7e00_0000_0000 + s * 16 MB, mapped page by page
    // onto physical 0xd2_0000_0000 + s * 16 MB
    for (int a = 0; a < 4 * 4096; a++) begin @(negedge clk); gtw_we = 1; gtw_addr = 14'(a); gtw_data = 0; end
    @(negedge clk); gtw_we = 0;
    for (int s = 0; s < 6; s++)
      for (int p = 0; p < (sizes[s] + 65535) / 65536; p++)
        map(64'h0000_7e00_0000_0000 + 64'(s) * 64'h0100_0000 + 64'(p) * 64'h1_0000,
            64'h0000_00d2_0000_0000 + 64'(s) * 64'h0100_0000 + 64'(p) * 64'h1_0000);
    for (int s = 0; s < 6; s++) begin
      longint t0, t1;
      int npk, exp_words;
      logic [63:0] base;
      npk = sizes[s] / 4096;
      base = 64'h0000_00d2_0000_0000 + 64'(s) * 64'h0100_0000;
      exp_words = words_out + npk * 257;
      first_req = -1;
      @(negedge clk);
      t0 = cycle;
      for (int k = 0; k < npk; k++) begin
        pkt_hdr_t h;
        h = '0; h.dst = '{x: 1, y: 0, z: 0}; h.len = 13'd4096; h.pid = 16'(s); h.dst_va = 64'(k) << 12;
        xq.push_back('{last: 0, data: FLIT_W'(h)});
        for (int w = 0; w < 256; w++) xq.push_back('{last: (w == 255), data: gpu_mem(base + 64'(k * 4096 + 16 * w))});
        gtx_desc_valid = 1;
        gtx_desc = '{src_addr: 64'h0000_7e00_0000_0000 + 64'(s) * 64'h0100_0000 + 64'(k * 4096), len: 13'd4096, dst: h.dst, pid: h.pid, dst_va: h.dst_va};
        do @(posedge clk); while (!gtx_desc_ready);
        @(negedge clk); gtx_desc_valid = 0;
      end
      wait (words_out == exp_words);
      t1 = cycle;
      bw[s] = real'(sizes[s]) * CLK_MHZ / real'(t1 - t0) / 1000.0;   // GB/s
      $display("message %8d B: %8d cycles, %6.3f GB/s", sizes[s], t1 - t0, bw[s]);
      if (s > 0) chk(bw[s] >= bw[s-1] * 0.99, $sformatf("bandwidth fell at %0d B", sizes[s]));
      if (s == 0) chk(first_req >= 0 && first_req - t0 <= 12, "first read request late");
      if (sizes[s] == 1048576) begin
        real us;
        us = real'(t1 - t0) / CLK_MHZ;
        chk(bw[s] >= 1.5 && bw[s] <= 1.61, $sformatf("1 MB bandwidth %f GB/s", bw[s]));
        chk(us >= 640.0 && us <= 700.0, $sformatf("1 MB took %f us", us));
      end
      repeat (50) @(posedge clk);
    end
    chk(bw[0] < 0.8 * bw[5], "small message not latency bound");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
