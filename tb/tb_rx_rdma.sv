// tb_rx_rdma: registers a host and a GPU receive buffer, fills HOST_V2P and
// GPU_V2P through their fill ports, then sends packets: host writes inside a
// page and across a 4 KB page boundary (two physical pages far apart), GPU
// writes that need the P2P window moved and ones that do not, a packet to an
// unregistered address, one to a registered but unmapped page, and a
// header-only packet. Every PCIe write is compared with a reference list built
// from the same mappings; drops, completions and window moves are counted.
module tb_rx_rdma;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, wr_valid, wr_ready;
  flit_t in_flit;
  pcie_wr_t wr;
  logic reg_we, reg_valid, reg_is_gpu; logic [5:0] reg_idx; logic [63:0] reg_va;
  logic [31:0] reg_len; logic [15:0] reg_pid; logic [0:0] reg_gpu;
  logic htw_we, gtw_we; logic [14:0] htw_addr, host_root; logic [13:0] gtw_addr; logic [13:0] gpu_root[1];
  logic [63:0] htw_data, gtw_data;
  logic pkt_done, pkt_drop, win_switch;
  int checks = 0, failures = 0;

  rx_rdma dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // ---- table building through the fill ports
  int h_next = 1, g_next = 1;               // next free table (index, x table size)
  int h_base[string], g_base[string];

  task automatic hw(int a, logic [63:0] d);
    @(negedge clk); htw_we = 1; htw_addr = 15'(a); htw_data = d; @(negedge clk); htw_we = 0;
  endtask
  task automatic gw(int a, logic [63:0] d);
    @(negedge clk); gtw_we = 1; gtw_addr = 14'(a); gtw_data = d; @(negedge clk); gtw_we = 0;
  endtask

  // page-table mapping: lb = index bits per level, pl = page log2
  task automatic map(bit gpu, logic [63:0] va, logic [63:0] pa);
    int pl, lb, tsize, base;
    pl = gpu ? 16 : 12; lb = (64 - pl) / 4; tsize = 1 << lb;
    base = 0;
    for (int l = 0; l < 3; l++) begin
      string key; int idx, nb;
      key = $sformatf("%0d_%h", l, va >> (pl + lb * (3 - l)));
      idx = int'((va >> (pl + lb * (3 - l))) & ((64'd1 << lb) - 1));
      if (gpu ? g_base.exists(key) : h_base.exists(key)) nb = gpu ? g_base[key] : h_base[key];
      else begin
        if (gpu) begin nb = g_next * tsize; g_next++; end
        else     begin nb = h_next * tsize; h_next++; end
        if (gpu) begin g_base[key] = nb; gw(base + idx, 64'(nb << 1) | 1); end
        else     begin h_base[key] = nb; hw(base + idx, 64'(nb << 1) | 1); end
      end
      base = nb;
    end
    begin
      int idx;
      idx = int'((va >> pl) & ((64'd1 << lb) - 1));
      if (gpu) gw(base + idx, ((pa >> pl) << pl) | 1);
      else     hw(base + idx, ((pa >> pl) << pl) | 1);
    end
  endtask

  // ---- packet stimulus and expected writes
  flit_t    fq[$];
  pcie_wr_t eq[$];
  int n_pkts = 0, exp_drop = 0, exp_win = 0;
  int got_done = 0, got_drop = 0, got_win = 0;
  logic [63:0] host_pa[longint], gpu_pa[longint];   // VA page -> PA page (reference)
  logic [63:0] win = '1;

  task automatic send(logic [63:0] va, int nw, int pid, int fate);   // fate 0 ok, 1 drop
    pkt_hdr_t h;
    h = '0; h.dst_va = va; h.len = LEN_W'(nw * 16); h.pid = 16'(pid);
    fq.push_back('{last: (nw == 0), data: FLIT_W'(h)});
    for (int w = 0; w < nw; w++) begin
      logic [127:0] d;
      logic [63:0] a;
      d = {32'(n_pkts), 32'(w), 64'($urandom)};
      fq.push_back('{last: (w == nw - 1), data: d});
      if (fate == 0) begin
        a = va + 64'(16 * w);
        if (va[63:32] == 32'h2) begin
          if (gpu_pa[longint'(a >> 16)] != win) begin
            win = gpu_pa[longint'(a >> 16)];
            eq.push_back('{kind: GPU_WINDOW, addr: win, data: '0});
            exp_win++;
          end
          eq.push_back('{kind: WR_GPU, addr: gpu_pa[longint'(a >> 16)] | (a & 64'hffff), data: d});
        end else
          eq.push_back('{kind: WR_HOST, addr: host_pa[longint'(a >> 12)] | (a & 64'hfff), data: d});
      end
    end
    if (fate == 1) exp_drop++;
    n_pkts++;
  endtask

  initial begin
    #50000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  always @(negedge clk) begin
    in_valid = rst_n && fq.size() != 0 && $urandom_range(4) != 0;
    in_flit  = (fq.size() != 0) ? fq[0] : '0;
    wr_ready = $urandom_range(3) != 0;
  end
  bit go = 0;
  always @(posedge clk) if (go) begin
    if (in_valid && in_ready) void'(fq.pop_front());
    if (wr_valid && wr_ready) begin
      pcie_wr_t e;
      chk(eq.size() != 0, "unexpected write");
      if (eq.size() != 0) begin
        e = eq.pop_front();
        chk(wr == e, $sformatf("write kind %s addr %h exp %s %h", wr.kind.name(), wr.addr, e.kind.name(), e.addr));
      end
    end
    got_done += int'(pkt_done);
    got_drop += int'(pkt_drop);
    got_win  += int'(win_switch);
  end

  initial begin
    logic [63:0] hva, gva;
    in_valid = 0; wr_ready = 0; reg_we = 0; htw_we = 0; gtw_we = 0;
    reg_idx = 0; reg_valid = 0; reg_va = 0; reg_len = 0; reg_pid = 0; reg_is_gpu = 0; reg_gpu = 0;
    htw_addr = 0; htw_data = 0; gtw_addr = 0; gtw_data = 0; host_root = 0; gpu_root[0] = 0;
    hva = 64'h0000_7f00_1234_0000; gva = 64'h0000_0002_0000_0000;
    repeat (2) @(posedge clk); rst_n = 1;
    // clear the table RAMs used here (4 tables per map)
    for (int a = 0; a < 4 * 8192; a++) begin htw_we = 1; htw_addr = 15'(a); htw_data = 0; @(negedge clk); end
    for (int a = 0; a < 4 * 4096; a++) begin gtw_we = 1; gtw_addr = 14'(a); gtw_data = 0; @(negedge clk); end
    htw_we = 0; gtw_we = 0;
    // buffers: host 64 KB and GPU 1 MB, process 5
    @(negedge clk); reg_we = 1; reg_idx = 0; reg_valid = 1; reg_va = hva; reg_len = 65536; reg_pid = 5; reg_is_gpu = 0;
    @(negedge clk); reg_idx = 2; reg_va = gva; reg_len = 1 << 20; reg_is_gpu = 1; reg_gpu = 0;
    @(negedge clk); reg_we = 0;
    // host pages 0..3 mapped scattered, page 8 left unmapped
    for (int p = 0; p < 4; p++) begin
      host_pa[longint'((hva >> 12) + p)] = 64'h0000_0001_0000_0000 + 64'((3 - p) * 'h5000);
      map(0, hva + 64'(p * 4096), host_pa[longint'((hva >> 12) + p)]);
    end
    for (int p = 0; p < 3; p++) begin
      gpu_pa[longint'((gva >> 16) + p)] = 64'h0000_00d0_0000_0000 + 64'(p * 'h30000);
      map(1, gva + 64'(p * 65536), gpu_pa[longint'((gva >> 16) + p)]);
    end
    send(hva + 64'h100, 16, 5, 0);              // host, inside one page
    send(hva + 64'h1f80, 16, 5, 0);             // host, crosses into the next page
    send(gva + 64'h40, 256, 5, 0);              // GPU, window moves
    send(gva + 64'h2000, 32, 5, 0);             // GPU, same page: no move
    send(gva + 64'hfff0, 4, 5, 0);              // GPU, crosses a 64 KB page
    send(64'h0000_0009_0000_0000, 8, 5, 1);     // not registered
    send(hva + 64'h100, 8, 6, 1);               // wrong process
    send(hva + 64'h8000, 8, 5, 1);              // registered, page not mapped
    send(hva + 64'h10, 0, 5, 2);                // header only
    send(hva + 64'h3ff0, 1, 5, 0);              // last word of the last mapped page
    go = 1;
    wait (fq.size() == 0 && eq.size() == 0);
    repeat (20) @(posedge clk);
    chk(got_drop == exp_drop, $sformatf("drops %0d exp %0d", got_drop, exp_drop));
    chk(got_done == n_pkts - exp_drop, $sformatf("completed %0d exp %0d", got_done, n_pkts - exp_drop));
    chk(got_win == exp_win, $sformatf("window moves %0d exp %0d", got_win, exp_win));
    $display("rx_rdma: %0d packets, %0d dropped, %0d window moves", n_pkts, got_drop, got_win);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
