// tb_hsg_two_node: the halo exchange of the Heisenberg spin glass test on two
// nodes (lattice L=256): each node sends 6 messages of 128 KB from its GPU
// memory into GPU buffers of the other node and receives 6 from it, both
// directions at the same time.
//
// Two dnp_top instances at their default sizes sit at (0,0,0) and (1,0,0) of
// the 4x2x1 torus. Node 0's X+ link feeds node 1's X- input, and node 1's
// X- output feeds node 0's X+ input (dimension-ordered routing takes the
// short way in both directions). Each node has its own GPU model: a read is
// answered after 360 cycles (1.8 us at 200 MHz), then one 16-byte word per
// cycle, with content that depends on node and address. Each node's firmware
// registers six 128 KB receive buffers that start in the middle of a 64 KB
// GPU page, and maps the 13 pages they cover onto scattered physical pages;
// the send buffers are GPU virtual addresses too, on 12 scattered pages.
//
// Checks: every GPU write on each node lands at the physical address the
// page table gives for its virtual address and carries the sender's data;
// all 6 x 128 KB arrive on each side; each write falls in the page the GPU
// window was last moved to; no packet is dropped; no flit leaves on any
// other link or on local port 1; each node finishes 768 KB in under 560 us.
// The run prints the exchange time and per-direction bandwidth.
module tb_hsg_two_node;
  import apenet_pkg::*;
  localparam real CLK_MHZ = 200.0;
  localparam int  NMSG = 6, MSG = 131072, PKT = 4096;
  localparam logic [63:0] RVA = 64'h0000_7f00_0000_8000;   // first receive buffer
  localparam logic [63:0] RPA = 64'h0000_00e0_0000_0000;   // receive GPU memory
  localparam logic [63:0] SPA = 64'h0000_00d0_0000_0000;   // send GPU memory
  localparam logic [63:0] SVA = 64'h0000_7f00_0800_0000;   // send buffer, virtual

  // send buffer page p (64 KB) lies at physical page (7p mod 12)
  function automatic logic [63:0] src_pa(logic [63:0] va);
    logic [63:0] off;
    off = va - SVA;
    return SPA + 64'(((off >> 16) * 7) % 12) * 64'h1_0000 + (off & 64'hffff);
  endfunction

  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;
  longint cycle = 0;
  bit   fin [2];
  longint t_fin [2];
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  function automatic logic [127:0] gpu_mem(int node, logic [63:0] pa);
    return {~pa ^ (64'(node + 1) << 56), pa};
  endfunction

  // torus links between the two nodes
  flit_t x_flit [2];
  logic  x_valid[2], x_ready[2];

  for (genvar n = 0; n < 2; n++) begin : node
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

    dnp_top dut (.*);

    // link wiring: node 0 talks on X+, node 1 on X-
    localparam int OUTP = (n == 0) ? P_XP : P_XM;
    localparam int INP  = (n == 0) ? P_XP : P_XM;
    always_comb begin
      for (int p = 0; p < 6; p++) begin
        link_in_valid[p] = 0; link_in_flit[p] = '0; link_out_ready[p] = 1;
      end
      link_in_valid[INP]   = x_valid[1-n];
      link_in_flit[INP]    = x_flit[1-n];
      link_out_ready[OUTP] = x_ready[n];
    end
    assign x_valid[n] = link_out_valid[OUTP];
    assign x_flit[n]  = link_out_flit[OUTP];
    assign x_ready[1-n] = link_in_ready[INP];

    // GPU read model
    typedef struct { longint t; logic [63:0] a; int n; } rd_t;
    rd_t g_rd[$];
    int g_left = 0; logic [63:0] g_addr;
    always @(posedge clk) begin
      gpu_data_valid <= 0;
      if (rst_n) begin
        if (gpu_rd_valid && gpu_rd_ready) g_rd.push_back('{cycle + 360, gpu_rd.addr, (int'(gpu_rd.len) + 15) / 16});
        if (g_left == 0 && g_rd.size() != 0 && g_rd[0].t <= cycle) begin
          rd_t r; r = g_rd.pop_front(); g_left = r.n; g_addr = r.a;
        end
        if (g_left != 0) begin
          gpu_data_valid <= 1; gpu_data <= gpu_mem(n, g_addr); g_addr += 16; g_left--;
        end
      end
    end

    // page tables
    int g_next = 1;
    int g_base[string];
    logic [63:0] gpu_pa[longint];
    task automatic gw(int a, logic [63:0] d);
      @(negedge clk); gtw_we = 1; gtw_addr = 14'(a); gtw_data = d; @(negedge clk); gtw_we = 0;
    endtask
    task automatic map(logic [63:0] va, logic [63:0] pa);
      int base, idx, nb;
      base = 0;
      gpu_pa[longint'(va >> 16)] = pa;
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

    // receive checker
    logic [127:0] exp_wr[longint];
    logic [63:0] win = '1;
    int got = 0, n_done = 0, n_drop = 0, n_win = 0, n_stray = 0;
    always @(posedge clk) if (rst_n) begin
      n_done += int'(rx_pkt_done);
      n_drop += int'(rx_pkt_drop);
      n_win  += int'(rx_win_switch);
      for (int p = 0; p < 6; p++) if (p != OUTP && link_out_valid[p]) n_stray++;
      if (loc1_out_valid) n_stray++;
      if (rx_wr_valid && rx_wr_ready) begin
        if (rx_wr.kind == GPU_WINDOW) win = rx_wr.addr;
        else begin
          longint k;
          k = longint'(rx_wr.addr);
          chk(rx_wr.kind == WR_GPU, "write to host memory");
          chk((rx_wr.addr >> 16) == (win >> 16), $sformatf("node %0d: GPU write %h outside window %h", n, rx_wr.addr, win));
          if (exp_wr.exists(k)) begin
            chk(rx_wr.data == exp_wr[k], $sformatf("node %0d: data at %h: %h vs %h", n, rx_wr.addr, rx_wr.data, exp_wr[k]));
            exp_wr.delete(k);
          end else chk(0, $sformatf("node %0d: unexpected write at %h", n, rx_wr.addr));
          got++;
        end
      end
    end

    // firmware and traffic
    initial begin
      my_coord = '{x: 3'(n), y: 0, z: 0};
      gtx_desc_valid = 0; htx_desc_valid = 0; gtx_desc = '0; htx_desc = '0;
      reg_we = 0; htw_we = 0; gtw_we = 0; reg_idx = 0; reg_valid = 0; reg_va = 0; reg_len = 0;
      reg_pid = 0; reg_is_gpu = 0; reg_gpu = 0; htw_addr = 0; htw_data = 0; gtw_addr = 0; gtw_data = 0;
      host_root = 0; gpu_root[0] = 0; host_rd_ready = 1; gpu_rd_ready = 1; rx_wr_ready = 1;
      loc1_out_ready = 1; host_data_valid = 0; host_data = '0;
      wait (rst_n);
      for (int a = 0; a < 4 * 4096; a++) begin @(negedge clk); gtw_we = 1; gtw_addr = 14'(a); gtw_data = 0; end
      @(negedge clk); gtw_we = 0;
      for (int m = 0; m < NMSG; m++) begin
        @(negedge clk); reg_we = 1; reg_idx = 6'(m); reg_valid = 1; reg_va = RVA + 64'(m * MSG);
        reg_len = MSG; reg_pid = 7; reg_is_gpu = 1; reg_gpu = 0;
      end
      @(negedge clk); reg_we = 0;
      // 13 pages, scattered
      for (int p = 0; p < 13; p++) map((RVA & ~64'hffff) + 64'(p) * 64'h1_0000, RPA + 64'(((p * 5) % 13)) * 64'h1_0000);
      for (int p = 0; p < 12; p++) map(SVA + 64'(p) * 64'h1_0000, src_pa(SVA + 64'(p) * 64'h1_0000));
      // expected content: the other node's send buffer m lands in receive buffer m
      for (int m = 0; m < NMSG; m++)
        for (int o = 0; o < MSG; o += 16) begin
          logic [63:0] va, pa;
          va = RVA + 64'(m * MSG + o);
          pa = gpu_pa[longint'(va >> 16)] | (va & 64'hffff);
          exp_wr[longint'(pa)] = gpu_mem(1 - n, src_pa(SVA + 64'(m * MSG + o)));
        end
      ready_n[n] = 1;
      wait (ready_n[0] && ready_n[1]);
      @(negedge clk);
      t_start[n] = cycle;
      for (int m = 0; m < NMSG; m++)
        for (int k = 0; k < MSG / PKT; k++) begin
          gtx_desc_valid = 1;
          gtx_desc = '{src_addr: SVA + 64'(m * MSG + k * PKT), len: 13'(PKT), dst: '{x: 3'(1 - n), y: 0, z: 0},
                       pid: 16'd7, dst_va: RVA + 64'(m * MSG + k * PKT)};
          do @(posedge clk); while (!gtx_desc_ready);
          @(negedge clk); gtx_desc_valid = 0;
        end
      wait (got == NMSG * MSG / 16);
      t_fin[n] = cycle;
      win_moves[n] = n_win;
      fin[n] = 1;
    end
  end

  bit ready_n [2];
  longint t_start [2];
  int     win_moves [2];

  initial begin
    #20000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    fin = '{0, 0}; ready_n = '{0, 0};
    repeat (3) @(posedge clk); rst_n = 1;
    wait (fin[0] && fin[1]);
    repeat (20) @(posedge clk);
    chk(node[0].exp_wr.size() == 0 && node[1].exp_wr.size() == 0, "writes missing");
    chk(node[0].got == NMSG * MSG / 16 && node[1].got == NMSG * MSG / 16, "word count");
    chk(node[0].n_done == NMSG * MSG / PKT && node[1].n_done == NMSG * MSG / PKT, "packet count");
    chk(node[0].n_drop == 0 && node[1].n_drop == 0, "packets dropped");
    chk(node[0].n_stray == 0 && node[1].n_stray == 0, "flits on an unused port");
    chk(node[0].n_win > 0 && node[1].n_win > 0, "GPU window never moved");
    for (int n = 0; n < 2; n++) begin
      real us;
      us = real'(t_fin[n] - t_start[n]) / CLK_MHZ;
      $display("node %0d: received %0d KB in %0.1f us, %0.3f GB/s, %0d window moves", n,
               NMSG * MSG / 1024, us, real'(NMSG * MSG) / us / 1000.0, win_moves[n]);
      chk(us < 560.0, $sformatf("node %0d exchange took %f us", n, us));
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
