// v2p_walker: virtual-to-physical translation through a 4-level page table.
//
// Used twice in the RX path: as HOST_V2P with 4 KB pages and as GPU_V2P with
// 64 KB GPU pages. The page-number part of a 64-bit virtual address is cut
// into four equal indices, one per level (13 bits each for 4 KB pages, 12 for
// 64 KB pages). The walk starts at the table whose first word is `root`; each
// level reads one 64-bit word at table_base + index. Word layout: bit 0 is
// valid; in levels 1-3 bits [TW:1] give the word address of the next-level
// table; in the leaf (level 4) bits [63:PAGE_LOG2] are the physical page
// address. An invalid word ends the walk with `fault`.
//
// Timing: one table read per cycle, so a successful translation takes a
// constant 5 cycles from the accepted request to `done` (4 reads and the
// result), whatever the address; a fault ends the walk after the level whose
// word is invalid. The tables live in an internal RAM of TABLE_WORDS words that the
// firmware fills through the tw_* port.
//
// From the source design: the 4-level table, the constant traversal time, the
// 64 KB GPU and 4 KB host page sizes and separate host and GPU maps. The
// word layout, the equal split of the index bits, the RAM size and running
// the walk in hardware are this design's.
module v2p_walker
  import apenet_pkg::*;
#(
  parameter int unsigned PAGE_LOG2   = 16,
  parameter int unsigned TABLE_WORDS = 4 * (1 << ((64 - PAGE_LOG2) / 4)),  // one table per level
  localparam int unsigned LVL_BITS   = (64 - PAGE_LOG2) / 4,
  localparam int unsigned TW         = $clog2(TABLE_WORDS)
) (
  input  logic            clk,
  input  logic            rst_n,
  // table fill port
  input  logic            tw_we,
  input  logic [TW-1:0]   tw_addr,
  input  logic [63:0]     tw_data,
  // translation
  input  logic            req_valid,
  output logic            req_ready,
  input  logic [VA_W-1:0] req_va,
  input  logic [TW-1:0]   root,
  output logic            done,
  output logic            fault,
  output logic [PA_W-1:0] pa
);
  logic [63:0]     mem [TABLE_WORDS];
  logic            busy_q;
  logic [1:0]      lvl_q;
  logic [TW-1:0]   base_q;
  logic [VA_W-1:0] va_q;
  logic [63:0]     word;
  logic [LVL_BITS-1:0] index;
  logic [TW-1:0]   rd_addr;

  always_comb begin
    // level 0 uses the most significant index
    index = va_q[PAGE_LOG2 + LVL_BITS*(3 - int'(lvl_q)) +: LVL_BITS];
  end
  assign rd_addr   = base_q + TW'(index);
  assign word      = mem[rd_addr];
  assign req_ready = !busy_q;

  always_ff @(posedge clk) begin
    if (tw_we) mem[tw_addr] <= tw_data;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      lvl_q  <= '0;
      base_q <= '0;
      va_q   <= '0;
      done   <= 1'b0;
      fault  <= 1'b0;
      pa     <= '0;
    end else begin
      done <= 1'b0;
      if (!busy_q) begin
        if (req_valid) begin
          busy_q <= 1'b1;
          lvl_q  <= '0;
          base_q <= root;
          va_q   <= req_va;
        end
      end else if (!word[0]) begin
        busy_q <= 1'b0;
        done   <= 1'b1;
        fault  <= 1'b1;
      end else if (lvl_q == 2'd3) begin
        busy_q <= 1'b0;
        done   <= 1'b1;
        fault  <= 1'b0;
        pa     <= {word[63:PAGE_LOG2], va_q[PAGE_LOG2-1:0]};
      end else begin
        lvl_q  <= lvl_q + 1'b1;
        base_q <= word[TW:1];
      end
    end
  end
endmodule
