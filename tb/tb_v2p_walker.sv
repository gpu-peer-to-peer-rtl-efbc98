// tb_v2p_walker: builds 4-level tables for several 64 KB-page mappings
// (the GPU map), then checks translated addresses, faults on unmapped pages
// and the constant 5-cycle walk time. A second instance checks 4 KB pages
// (the host map) with a small table RAM.
module tb_v2p_walker;
  logic clk = 0, rst_n = 0;
  int checks = 0, failures = 0;

  // GPU map: 64 KB pages, 12-bit indices
  localparam int GW = 4 * 4096;
  logic tw_we; logic [13:0] tw_addr; logic [63:0] tw_data;
  logic req_valid, req_ready, done, fault; logic [63:0] req_va, pa; logic [13:0] root;
  v2p_walker #(.PAGE_LOG2(16)) dut (.*);

  // host map: 4 KB pages, 13-bit indices, 4 tables of 8192 words
  logic h_we; logic [14:0] h_addr; logic [63:0] h_data;
  logic h_rv, h_rr, h_done, h_fault; logic [63:0] h_va, h_pa;
  v2p_walker #(.PAGE_LOG2(12)) dut_h (.clk, .rst_n, .tw_we(h_we), .tw_addr(h_addr), .tw_data(h_data),
    .req_valid(h_rv), .req_ready(h_rr), .req_va(h_va), .root(15'd0),
    .done(h_done), .fault(h_fault), .pa(h_pa));

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic wr(int a, logic [63:0] d);
    @(negedge clk); tw_we = 1; tw_addr = 14'(a); tw_data = d; @(negedge clk); tw_we = 0;
  endtask
  task automatic hwr(int a, logic [63:0] d);
    @(negedge clk); h_we = 1; h_addr = 15'(a); h_data = d; @(negedge clk); h_we = 0;
  endtask

  // map va -> pa page, tables at word bases 0, 4096, 8192, 12288 (one path)
  task automatic map_gpu(logic [63:0] va, logic [63:0] pa_page);
    wr(0     + int'(va[63:52]), 64'(4096 << 1) | 1);
    wr(4096  + int'(va[51:40]), 64'(8192 << 1) | 1);
    wr(8192  + int'(va[39:28]), 64'(12288 << 1) | 1);
    wr(12288 + int'(va[27:16]), {pa_page[63:16], 15'd0, 1'b1});
  endtask

  task automatic xl(logic [63:0] va, bit exp_fault, logic [63:0] exp_pa, int exp_cyc = 5);
    int cyc = 0;
    @(negedge clk); req_valid = 1; req_va = va; root = 0;
    @(negedge clk); req_valid = 0; cyc = 1;
    while (!done) begin @(negedge clk); cyc++; end
    chk(fault == exp_fault, $sformatf("fault va=%h", va));
    if (!exp_fault) chk(pa == exp_pa, $sformatf("pa %h exp %h", pa, exp_pa));
    chk(cyc == exp_cyc, $sformatf("walk cycles %0d", cyc));
  endtask

  initial begin
    #2000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    tw_we = 0; req_valid = 0; tw_addr = 0; tw_data = 0; req_va = 0; root = 0;
    h_we = 0; h_rv = 0; h_addr = 0; h_data = 0; h_va = 0;
    for (int i = 0; i < GW; i++) dut.mem[i] = '0;
    for (int i = 0; i < 4 * 8192; i++) dut_h.mem[i] = '0;
    repeat (2) @(posedge clk); rst_n = 1;
    map_gpu(64'h0000_0002_0013_0000, 64'h0000_00d0_4567_0000);
    map_gpu(64'h0000_0002_0014_0000, 64'h0000_00d0_9abc_0000);
    xl(64'h0000_0002_0013_1234, 0, 64'h0000_00d0_4567_1234);
    xl(64'h0000_0002_0014_fff0, 0, 64'h0000_00d0_9abc_fff0);
    xl(64'h0000_0002_0015_0000, 1, 0);                 // leaf missing
    xl(64'h0000_0003_0013_0000, 1, 0, 4);              // level-3 entry missing: ends after 3 reads
    // host map, 4 KB pages
    hwr(0     + 0,                 64'(8192 << 1) | 1);
    hwr(8192  + 0,                 64'(16384 << 1) | 1);
    hwr(16384 + 13'h1fc0 /*bits 37:25*/, 64'(24576 << 1) | 1);
    hwr(24576 + 13'h0abc,          {52'h00000_0123_4, 11'd0, 1'b1});
    @(negedge clk); h_rv = 1; h_va = {26'd0, 13'h1fc0, 13'h0abc, 12'h5a0};
    @(negedge clk); h_rv = 0;
    while (!h_done) @(negedge clk);
    chk(!h_fault && h_pa == {52'h00000_0123_4, 12'h5a0}, $sformatf("host pa %h", h_pa));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
