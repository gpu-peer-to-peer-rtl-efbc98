// sync_fifo: single-clock FIFO with a programmable almost-full flag.
//
// The DNP's on-board temporary buffers (the TX data FIFO, the TX header FIFO
// and the P2P request FIFO) are instances of this block. Storage is a plain
// array (an on-chip RAM on an FPGA) addressed by wrapping read and write
// pointers; a count tracks occupancy. `almost_full` rises when the count
// reaches AF_LEVEL, which leaves DEPTH-AF_LEVEL entries of headroom for data
// already in flight; the GPU read-request generator reacts to this flag.
//
// Interface: valid/ready on both sides. A write is accepted when wr_valid and
// !full, a read when rd_valid and rd_ready. rd_data shows the head entry
// (first-word fall-through); occupancy changes on the next clock edge.
// The 32 KB default size follows the transmission buffer of the source design;
// the almost-full threshold and the fall-through behaviour are this design's.
module sync_fifo #(
  parameter int unsigned WIDTH    = 129,
  parameter int unsigned DEPTH    = 2048,            // 2048 x 16 B = 32 KB
  parameter int unsigned AF_LEVEL = DEPTH - 64,
  localparam int unsigned AW      = (DEPTH > 1) ? $clog2(DEPTH) : 1
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             wr_valid,
  output logic             wr_ready,
  input  logic [WIDTH-1:0] wr_data,
  output logic             rd_valid,
  input  logic             rd_ready,
  output logic [WIDTH-1:0] rd_data,
  output logic             almost_full,
  output logic [AW:0]      count
);
  logic [WIDTH-1:0] mem [DEPTH];
  logic [AW-1:0]    wp, rp;
  logic             do_wr, do_rd;

  assign wr_ready    = (count < (AW+1)'(DEPTH));
  assign rd_valid    = (count != '0);
  assign do_wr       = wr_valid && wr_ready;
  assign do_rd       = rd_valid && rd_ready;
  assign rd_data     = mem[rp];
  assign almost_full = (count >= (AW+1)'(AF_LEVEL));

  always_ff @(posedge clk) begin
    if (do_wr) mem[wp] <= wr_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wp    <= '0;
      rp    <= '0;
      count <= '0;
    end else begin
      if (do_wr) wp <= (wp == AW'(DEPTH-1)) ? '0 : wp + 1'b1;
      if (do_rd) rp <= (rp == AW'(DEPTH-1)) ? '0 : rp + 1'b1;
      count <= count + (AW+1)'(do_wr) - (AW+1)'(do_rd);
    end
  end

endmodule
