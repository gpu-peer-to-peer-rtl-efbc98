// gpu_rd_xlate: transmit-side GPU source address translation.
//
// GPU transmit descriptors carry GPU virtual source addresses. This stage sits
// between the P2P request FIFO and the PCIe core and turns the virtual address
// of each peer-to-peer read request into a physical one, through the same
// 4-level GPU_V2P page table (64 KB pages) the receive side uses. It keeps the
// last translated page (tag and physical page), so a walk is needed only when
// a request moves to a new 64 KB page. A request that crosses a page boundary
// is split in two, the second half translated on its own. Data returns in
// request order, so a split changes nothing downstream.
//
// Interface: in_* is a valid/ready stream of rd_req_t with virtual addresses
// (from the request FIFO); out_* the same with physical addresses (to PCIe).
// tw_* fills this stage's copy of the GPU_V2P table, with the same writes
// that fill the receive side's copy. Any table write drops the held page, and
// a walk that overlaps a table write is not kept (the request walks again).
// `root` is the table root of the GPU that is read. `walk` pulses for each
// page walk, `fault` when a walk finds an invalid entry: the request is then
// still issued, to physical page 0, so the read data accounting stays intact,
// and the firmware is expected to act on the fault.
//
// Timing: a request on the held page leaves 1 cycle after it is taken (the
// stage takes one request every 2 cycles, far above the 16-cycle request
// pace); a new page adds the 5-cycle walk.
//
// From the source design: translating GPU virtual source addresses page by
// page through the 4-level GPU_V2P map, done there by the micro-controller
// firmware. Doing it in hardware, the one-page translation cache, splitting
// at page boundaries, a private copy of the table and the fault handling are
// this design's choices.
module gpu_rd_xlate
  import apenet_pkg::*;
#(
  parameter int unsigned PAGE_LOG2   = GPU_PAGE_LOG2,
  parameter int unsigned TABLE_WORDS = 4 * (1 << ((64 - PAGE_LOG2) / 4)),
  localparam int unsigned TW         = $clog2(TABLE_WORDS)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          in_valid,
  output logic          in_ready,
  input  rd_req_t       in_req,
  output logic          out_valid,
  input  logic          out_ready,
  output rd_req_t       out_req,
  input  logic          tw_we,
  input  logic [TW-1:0] tw_addr,
  input  logic [63:0]   tw_data,
  input  logic [TW-1:0] root,
  output logic          walk,
  output logic          fault
);
  localparam int unsigned PAGE_BYTES = 1 << PAGE_LOG2;

  typedef enum logic [1:0] {S_IDLE, S_OUT, S_WALK} state_e;
  state_e state_q;

  logic [VA_W-1:0]           va_q;
  logic [8:0]                len_q;
  logic                      tag_valid_q;
  logic [VA_W-PAGE_LOG2-1:0] tag_q;
  logic [PA_W-PAGE_LOG2-1:0] ppage_q;
  logic                      stale_q;   // table written during the walk

  logic            hit, w_ready, w_done, w_fault;
  logic [PA_W-1:0] w_pa;
  logic [PAGE_LOG2:0] room;     // bytes left in the current page
  logic [8:0]      first_len;

  assign hit       = tag_valid_q && (tag_q == va_q[VA_W-1:PAGE_LOG2]);
  assign room      = (PAGE_LOG2+1)'(PAGE_BYTES) - {1'b0, va_q[PAGE_LOG2-1:0]};
  assign first_len = ((PAGE_LOG2+1)'(len_q) > room) ? 9'(room) : len_q;

  assign in_ready  = (state_q == S_IDLE);
  assign out_valid = (state_q == S_OUT) && hit;
  assign out_req   = '{addr: {ppage_q, va_q[PAGE_LOG2-1:0]}, len: 8'(first_len)};

  v2p_walker #(.PAGE_LOG2(PAGE_LOG2), .TABLE_WORDS(TABLE_WORDS)) u_walker (
    .clk, .rst_n, .tw_we, .tw_addr, .tw_data,
    .req_valid((state_q == S_OUT) && !hit), .req_ready(w_ready), .req_va(va_q), .root,
    .done(w_done), .fault(w_fault), .pa(w_pa));

  assign walk  = (state_q == S_OUT) && !hit && w_ready;
  assign fault = w_done && w_fault;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q     <= S_IDLE;
      va_q        <= '0;
      len_q       <= '0;
      tag_valid_q <= 1'b0;
      tag_q       <= '0;
      ppage_q     <= '0;
      stale_q     <= 1'b0;
    end else begin
      if (tw_we) tag_valid_q <= 1'b0;
      if (state_q != S_WALK) stale_q <= 1'b0;
      else if (tw_we)        stale_q <= 1'b1;
      unique case (state_q)
        S_IDLE: if (in_valid) begin
          va_q    <= in_req.addr;
          len_q   <= {1'b0, in_req.len};
          state_q <= S_OUT;
        end
        S_OUT: begin
          if (hit && out_ready) begin
            if (first_len == len_q) state_q <= S_IDLE;
            else begin
              va_q  <= va_q + VA_W'(first_len);
              len_q <= len_q - first_len;
            end
          end else if (!hit && w_ready) state_q <= S_WALK;
        end
        S_WALK: if (w_done) begin
          tag_q       <= va_q[VA_W-1:PAGE_LOG2];
          ppage_q     <= w_fault ? '0 : w_pa[PA_W-1:PAGE_LOG2];
          tag_valid_q <= !(tw_we || stale_q);
          state_q     <= S_OUT;
        end
        default: state_q <= S_IDLE;
      endcase
    end
  end

  a_len: assert property (@(posedge clk) disable iff (!rst_n)
    out_valid |-> out_req.len != 0) else $error("gpu_rd_xlate: empty request");
endmodule
