// tb_buf_list: registers host and GPU buffers, then checks hits, misses
// (wrong process, out of range, deregistered) and the linear lookup time:
// a hit at entry i takes i+1 cycles, a miss N_ENTRIES cycles.
module tb_buf_list;
  import apenet_pkg::*;
  localparam int N = 16;
  logic clk = 0, rst_n = 0;
  logic reg_we, reg_valid, reg_is_gpu;
  logic [3:0] reg_idx;
  logic [63:0] reg_va; logic [31:0] reg_len; logic [15:0] reg_pid;
  logic [0:0] reg_gpu;
  logic lk_valid, lk_ready, lk_done, lk_hit, lk_is_gpu;
  logic [63:0] lk_va; logic [12:0] lk_len; logic [15:0] lk_pid;
  logic [0:0] lk_gpu;
  int checks = 0, failures = 0;

  buf_list #(.N_ENTRIES(N), .N_GPU(2)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  task automatic regb(int idx, bit v, longint va, int len, int pid, bit gpu, bit g);
    @(negedge clk);
    reg_we = 1; reg_idx = 4'(idx); reg_valid = v; reg_va = va; reg_len = len;
    reg_pid = 16'(pid); reg_is_gpu = gpu; reg_gpu = g;
    @(negedge clk); reg_we = 0;
  endtask

  task automatic look(longint va, int len, int pid, bit exp_hit, bit exp_gpu, bit exp_g, int exp_cyc);
    int cyc = 0;
    @(negedge clk);
    lk_valid = 1; lk_va = va; lk_len = 13'(len); lk_pid = 16'(pid);
    @(negedge clk); lk_valid = 0;
    while (!lk_done) begin @(negedge clk); cyc++; end
    chk(lk_hit == exp_hit, $sformatf("hit va=%h", va));
    if (exp_hit) begin
      chk(lk_is_gpu == exp_gpu, "is_gpu");
      chk(lk_gpu == exp_g, "gpu index");
    end
    chk(cyc == exp_cyc, $sformatf("lookup cycles %0d exp %0d", cyc, exp_cyc));
  endtask

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    reg_we = 0; lk_valid = 0; reg_idx = 0; reg_valid = 0; reg_va = 0; reg_len = 0;
    reg_pid = 0; reg_is_gpu = 0; reg_gpu = 0; lk_va = 0; lk_len = 0; lk_pid = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    regb(0, 1, 64'h0000_7f00_0000_0000, 65536, 10, 0, 0);     // host buffer
    regb(3, 1, 64'h0000_0002_0000_0000, 1 << 20, 10, 1, 1);   // GPU buffer on GPU 1
    regb(9, 1, 64'h0000_0003_0000_0000, 8192, 11, 1, 0);      // GPU buffer, other process
    look(64'h0000_7f00_0000_1000, 4096, 10, 1, 0, 0, 1);
    look(64'h0000_0002_0008_0000, 4096, 10, 1, 1, 1, 4);
    look(64'h0000_0003_0000_1000, 4096, 11, 1, 1, 0, 10);
    look(64'h0000_0003_0000_1000, 4096, 10, 0, 0, 0, N);       // wrong process
    look(64'h0000_7f00_0000_f800, 4096, 10, 0, 0, 0, N);       // runs past the end
    look(64'h0000_7f00_0000_f000, 4096, 10, 1, 0, 0, 1);       // ends exactly at the end
    regb(3, 0, 0, 0, 0, 0, 0);                                 // deregister
    look(64'h0000_0002_0008_0000, 4096, 10, 0, 0, 0, N);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
