// tb_sync_fifo: random push/pop against a queue model; checks data order,
// full/empty flags and the almost-full threshold on a 16-entry FIFO.
module tb_sync_fifo;
  localparam int DEPTH = 16, AF = 12, W = 20;
  logic clk = 0, rst_n = 0;
  logic wr_valid, wr_ready, rd_valid, rd_ready, af;
  logic [W-1:0] wr_data, rd_data;
  logic [$clog2(DEPTH):0] count;
  int checks = 0, failures = 0;
  logic [W-1:0] model[$];

  sync_fifo #(.WIDTH(W), .DEPTH(DEPTH), .AF_LEVEL(AF)) dut (.*, .almost_full(af));

  always #5 clk = ~clk;

  task automatic chk(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    #200000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end

  initial begin
    wr_valid = 0; rd_ready = 0; wr_data = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    for (int cyc = 0; cyc < 3000; cyc++) begin
      // phases: fill-biased, then drain-biased
      int pw = ((cyc / 300) % 2 == 0) ? 80 : 30;
      @(negedge clk);
      wr_valid = ($urandom_range(99) < pw);
      wr_data  = W'($urandom);
      rd_ready = ($urandom_range(99) < 100 - pw + 10);
      chk(count == model.size(), "count");
      chk(wr_ready == (model.size() < DEPTH), "wr_ready/full");
      chk(rd_valid == (model.size() != 0), "rd_valid/empty");
      chk(af == (model.size() >= AF), "almost_full");
      if (rd_valid) chk(rd_data == model[0], "data order");
      @(posedge clk);
      if (rd_valid && rd_ready) void'(model.pop_front());
      if (wr_valid && wr_ready) model.push_back(wr_data);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
