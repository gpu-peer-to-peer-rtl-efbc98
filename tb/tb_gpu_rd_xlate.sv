// tb_gpu_rd_xlate: checks the transmit-side GPU source translation.
//
// A reference page map (64 KB pages) is written into the stage's table
// through the fill port. Random read requests (16..128 bytes, many crossing a
// page boundary, some on an unmapped page) are streamed in under random
// output back-pressure. The expected output is worked out here: each request
// is split at the page boundary and each piece carries the mapped physical
// address (page 0 for an unmapped page). Also checked: the number of page
// walks (one per change of page, plus one after a table write), fault pulses
// for the unmapped page, and the timing: a run of requests on the held page
// goes at one per 2 cycles, and a new page costs the 5-cycle walk.
module tb_gpu_rd_xlate;
  import apenet_pkg::*;
  logic clk = 0, rst_n = 0;
  logic in_valid, in_ready, out_valid, out_ready, tw_we, walk, fault;
  rd_req_t in_req, out_req;
  logic [13:0] tw_addr, root;
  logic [63:0] tw_data;
  int checks = 0, failures = 0;
  longint cycle = 0;

  gpu_rd_xlate dut (.*);
  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; if (failures < 20) $display("FAIL %s", what); end
  endtask

  // reference map and table fill
  localparam logic [63:0] VA0 = 64'h0000_7a00_0000_0000;
  int g_next = 1;
  int g_base[string];
  logic [63:0] pmap[longint];
  task automatic tw(int a, logic [63:0] d);
    @(negedge clk); tw_we = 1; tw_addr = 14'(a); tw_data = d; @(negedge clk); tw_we = 0;
  endtask
  task automatic map(logic [63:0] va, logic [63:0] pa);
    int base, idx, nb;
    base = 0;
    pmap[longint'(va >> 16)] = pa;
    for (int l = 0; l < 3; l++) begin
      string key;
      key = $sformatf("%0d_%h", l, va >> (16 + 12 * (3 - l)));
      idx = int'((va >> (16 + 12 * (3 - l))) & 64'hfff);
      if (g_base.exists(key)) nb = g_base[key];
      else begin nb = g_next * 4096; g_next++; g_base[key] = nb; tw(base + idx, 64'(nb << 1) | 1); end
      base = nb;
    end
    idx = int'((va >> 16) & 64'hfff);
    tw(base + idx, ((pa >> 16) << 16) | 1);
  endtask

  // expected output pieces
  rd_req_t exp_q[$];
  int n_out = 0, n_walk = 0, n_fault = 0, exp_walk = 0, exp_fault = 0;
  logic [63:0] last_page = '1;
  int rdy_pct = 100;

  always @(posedge clk) if (rst_n) begin
    n_walk  += int'(walk);
    n_fault += int'(fault);
    if (out_valid && out_ready) begin
      rd_req_t e;
      e = exp_q.pop_front();
      chk(out_req == e, $sformatf("piece %0d: %h/%0d, expected %h/%0d", n_out, out_req.addr, out_req.len, e.addr, e.len));
      n_out++;
    end
  end
  always @(negedge clk) out_ready = ($urandom_range(99) < rdy_pct);

  // reference: split at page boundaries, count walks and faults
  task automatic expect_req(logic [63:0] va, int len);
    while (len > 0) begin
      int room, n;
      logic [63:0] pg;
      room = 65536 - int'(va & 64'hffff);
      n = (len > room) ? room : len;
      pg = va >> 16;
      if (pg != last_page) begin
        exp_walk++;
        if (!pmap.exists(longint'(pg))) exp_fault++;
        last_page = pg;
      end
      exp_q.push_back('{addr: (pmap.exists(longint'(pg)) ? pmap[longint'(pg)] : 64'd0) | (va & 64'hffff), len: 8'(n)});
      va += 64'(n); len -= n;
    end
  endtask

  task automatic send(logic [63:0] va, int len);
    expect_req(va, len);
    @(negedge clk);
    in_valid = 1; in_req = '{addr: va, len: 8'(len)};
    do @(posedge clk); while (!in_ready);
    @(negedge clk); in_valid = 0;
  endtask

  initial begin
    #5000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    longint t0;
    in_valid = 0; in_req = '0; tw_we = 0; tw_addr = 0; tw_data = 0; root = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int a = 0; a < 4 * 4096; a++) begin @(negedge clk); tw_we = 1; tw_addr = 14'(a); tw_data = 0; end
    @(negedge clk); tw_we = 0;
    // pages 0..5 mapped to scattered physical pages; page 6 left unmapped
    for (int p = 0; p < 6; p++) map(VA0 + 64'(p) * 64'h1_0000, 64'h0000_00c0_0000_0000 + 64'((5 - p) * 3) * 64'h1_0000);
    last_page = '1;   // the table writes dropped any held page

    // timing: first request walks, the next 8 on the same page go every 2 cycles
    rdy_pct = 100;
    @(negedge clk);
    t0 = cycle;
    send(VA0 + 64'h100, 128);
    wait (n_out == 1);      // 1 cycle to the stage, 1 to start the walk, 5 to walk, 1 out, +1 drive
    chk(cycle - t0 >= 7 && cycle - t0 <= 9, $sformatf("walk latency %0d", cycle - t0));
    t0 = cycle;
    fork
      for (int k = 1; k <= 8; k++) send(VA0 + 64'h100 + 64'(128 * k), 128);
    join
    wait (n_out == 9);
    chk(cycle - t0 <= 2 * 8 + 2, $sformatf("8 held-page requests took %0d cycles", cycle - t0));
    chk(n_walk == 1, "walks in the timing run");

    // random stream, random back-pressure, boundary crossings, unmapped page
    rdy_pct = 60;
    for (int i = 0; i < 600; i++) begin
      logic [63:0] va;
      int len;
      len = 16 * (1 + $urandom_range(7));
      case ($urandom_range(3))
        0: va = VA0 + 64'($urandom_range(6)) * 64'h1_0000 + 64'h1_0000 - 64'(16 * $urandom_range(8));
        1: va = VA0 + 64'h6_0000 + 64'(16 * $urandom_range(100));
        default: va = VA0 + 64'(16 * $urandom_range(7 * 4096 - 1));
      endcase
      send(va, len);
      if (i == 300) begin       // a table write drops the held page
        wait (exp_q.size() == 0);
        map(VA0 + 64'h0, 64'h0000_00c0_0000_0000 + 64'd15 * 64'h1_0000);
        last_page = '1;
      end
    end
    wait (exp_q.size() == 0);
    repeat (10) @(posedge clk);
    chk(n_walk == exp_walk, $sformatf("walks %0d, expected %0d", n_walk, exp_walk));
    chk(n_fault == exp_fault && exp_fault > 0, $sformatf("faults %0d, expected %0d", n_fault, exp_fault));
    $display("gpu_rd_xlate: %0d pieces, %0d walks, %0d faults", n_out, n_walk, n_fault);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
