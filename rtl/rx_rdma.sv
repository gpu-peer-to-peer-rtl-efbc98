// rx_rdma: receive-side RDMA engine of the network interface.
//
// Packets delivered by the router carry a 64-bit destination virtual address.
// For each packet the engine (1) checks the destination against the list of
// registered buffers (buf_list), which also says whether the buffer is in host
// or GPU memory, (2) translates the address page by page through HOST_V2P
// (4 KB pages) or GPU_V2P (64 KB pages), both v2p_walker instances, and
// (3) emits one PCIe write per 16-byte payload word at the translated
// physical address. GPU memory is written through a sliding peer-to-peer
// window: whenever the target 64 KB GPU page differs from the page the window
// is on, a GPU_WINDOW command is issued first. A packet that crosses a page
// boundary is translated again at the boundary. A packet whose destination is
// not registered, or whose translation faults, is drained and counted as
// dropped.
//
// Interface: a flit stream in (valid/ready, header first); PCIe writes out
// (valid/ready); fill ports for the list and the two tables; `root` inputs
// select the first-level table of each map. Timing: buffer lookup 1..N cycles
// (linear), translation 5 cycles per page, then one payload word per cycle.
//
// From the source design: buffer validation, host/GPU distinction, the two
// translation maps and GPU window switching. Doing all of it in hardware (the
// source design runs list traversal and translation as firmware on its
// micro-controller), one write per payload word and dropping unmatched
// packets are this design's choices.
module rx_rdma
  import apenet_pkg::*;
#(
  parameter int unsigned N_BUF        = 64,
  parameter int unsigned N_GPU        = 1,
  parameter int unsigned HOST_TWORDS  = 4 * (1 << ((64 - HOST_PAGE_LOG2) / 4)),
  parameter int unsigned GPU_TWORDS   = 4 * (1 << ((64 - GPU_PAGE_LOG2) / 4)),
  localparam int unsigned BIW = (N_BUF > 1) ? $clog2(N_BUF) : 1,
  localparam int unsigned GW  = (N_GPU > 1) ? $clog2(N_GPU) : 1,
  localparam int unsigned HTW = $clog2(HOST_TWORDS),
  localparam int unsigned GTW = $clog2(GPU_TWORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  // packets from the router
  input  logic             in_valid,
  output logic             in_ready,
  input  flit_t            in_flit,
  // writes towards the PCIe core
  output logic             wr_valid,
  input  logic             wr_ready,
  output pcie_wr_t         wr,
  // buffer registration
  input  logic             reg_we,
  input  logic [BIW-1:0]   reg_idx,
  input  logic             reg_valid,
  input  logic [VA_W-1:0]  reg_va,
  input  logic [31:0]      reg_len,
  input  logic [PID_W-1:0] reg_pid,
  input  logic             reg_is_gpu,
  input  logic [GW-1:0]    reg_gpu,
  // page-table fill
  input  logic             htw_we,
  input  logic [HTW-1:0]   htw_addr,
  input  logic [63:0]      htw_data,
  input  logic [HTW-1:0]   host_root,
  input  logic             gtw_we,
  input  logic [GTW-1:0]   gtw_addr,
  input  logic [63:0]      gtw_data,
  input  logic [GTW-1:0]   gpu_root [N_GPU],
  // status pulses
  output logic             pkt_done,
  output logic             pkt_drop,
  output logic             win_switch
);
  typedef enum logic [2:0] {S_HDR, S_LOOKUP, S_XLATE, S_WIN, S_DATA, S_DRAIN} state_e;
  state_e           st_q;
  pkt_hdr_t         hdr;
  logic [VA_W-1:0]  va_q;
  logic [LEN_W-1:0] remain_q;
  logic [PID_W-1:0] pid_q;
  logic             is_gpu_q;
  logic [GW-1:0]    gpu_q;
  logic             req_sent_q;          // lookup/translation request issued
  logic [PA_W-1:0]  page_pa_q;           // physical address of the current VA page
  logic [PA_W-1:0]  win_q;               // GPU page the window is on
  logic             win_ok_q;
  logic             last_word;
  logic [PA_W-1:0]  cur_pa;
  logic [PA_W-1:0]  gpu_page;

  // lookup and translation units
  logic lk_valid, lk_ready, lk_done, lk_hit, lk_is_gpu;
  logic [GW-1:0] lk_gpu;
  logic hx_valid, hx_ready, hx_done, hx_fault;
  logic gx_valid, gx_ready, gx_done, gx_fault;
  logic [PA_W-1:0] hx_pa, gx_pa;

  assign hdr = pkt_hdr_t'(in_flit.data);

  buf_list #(.N_ENTRIES(N_BUF), .N_GPU(N_GPU)) u_buf_list (
    .clk, .rst_n,
    .reg_we, .reg_idx, .reg_valid, .reg_va, .reg_len, .reg_pid, .reg_is_gpu, .reg_gpu,
    .lk_valid, .lk_ready, .lk_va(va_q), .lk_len(remain_q), .lk_pid(pid_q),
    .lk_done, .lk_hit, .lk_is_gpu, .lk_gpu);

  v2p_walker #(.PAGE_LOG2(HOST_PAGE_LOG2), .TABLE_WORDS(HOST_TWORDS)) u_host_v2p (
    .clk, .rst_n, .tw_we(htw_we), .tw_addr(htw_addr), .tw_data(htw_data),
    .req_valid(hx_valid), .req_ready(hx_ready), .req_va(va_q), .root(host_root),
    .done(hx_done), .fault(hx_fault), .pa(hx_pa));

  v2p_walker #(.PAGE_LOG2(GPU_PAGE_LOG2), .TABLE_WORDS(GPU_TWORDS)) u_gpu_v2p (
    .clk, .rst_n, .tw_we(gtw_we), .tw_addr(gtw_addr), .tw_data(gtw_data),
    .req_valid(gx_valid), .req_ready(gx_ready), .req_va(va_q), .root(gpu_root[gpu_q]),
    .done(gx_done), .fault(gx_fault), .pa(gx_pa));

  assign lk_valid = (st_q == S_LOOKUP) && !req_sent_q;
  assign hx_valid = (st_q == S_XLATE) && !req_sent_q && !is_gpu_q;
  assign gx_valid = (st_q == S_XLATE) && !req_sent_q &&  is_gpu_q;

  // physical address of the current word: page base + in-page offset
  always_comb begin
    if (is_gpu_q) cur_pa = {page_pa_q[PA_W-1:GPU_PAGE_LOG2],  va_q[GPU_PAGE_LOG2-1:0]};
    else          cur_pa = {page_pa_q[PA_W-1:HOST_PAGE_LOG2], va_q[HOST_PAGE_LOG2-1:0]};
  end
  assign gpu_page  = {page_pa_q[PA_W-1:GPU_PAGE_LOG2], {GPU_PAGE_LOG2{1'b0}}};
  assign last_word = (remain_q <= LEN_W'(FLIT_BYTES));

  always_comb begin
    in_ready = 1'b0;
    wr_valid = 1'b0;
    wr       = '{kind: WR_HOST, addr: cur_pa, data: in_flit.data};
    unique case (st_q)
      S_HDR:   in_ready = 1'b1;
      S_WIN: begin
        wr_valid = 1'b1;
        wr       = '{kind: GPU_WINDOW, addr: gpu_page, data: '0};
      end
      S_DATA: begin
        wr_valid = in_valid;
        wr.kind  = is_gpu_q ? WR_GPU : WR_HOST;
        in_ready = wr_ready;
      end
      S_DRAIN: in_ready = 1'b1;
      default: ;
    endcase
  end

  // the next word starts a new page
  function automatic logic page_cross(logic [VA_W-1:0] va, logic gpu);
    logic [VA_W-1:0] nxt;
    nxt = va + VA_W'(FLIT_BYTES);
    return gpu ? (nxt[GPU_PAGE_LOG2-1:0] == '0) : (nxt[HOST_PAGE_LOG2-1:0] == '0);
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st_q       <= S_HDR;
      va_q       <= '0;
      remain_q   <= '0;
      pid_q      <= '0;
      is_gpu_q   <= 1'b0;
      gpu_q      <= '0;
      req_sent_q <= 1'b0;
      page_pa_q  <= '0;
      win_q      <= '0;
      win_ok_q   <= 1'b0;
      pkt_done   <= 1'b0;
      pkt_drop   <= 1'b0;
      win_switch <= 1'b0;
    end else begin
      pkt_done   <= 1'b0;
      pkt_drop   <= 1'b0;
      win_switch <= 1'b0;
      unique case (st_q)
        S_HDR: if (in_valid) begin
          va_q       <= hdr.dst_va;
          remain_q   <= hdr.len;
          pid_q      <= hdr.pid;
          req_sent_q <= 1'b0;
          if (in_flit.last) begin
            // header-only packet: nothing to write
            pkt_done <= 1'b1;
          end else begin
            st_q <= S_LOOKUP;
          end
        end
        S_LOOKUP: begin
          if (lk_valid && lk_ready) req_sent_q <= 1'b1;
          if (lk_done) begin
            req_sent_q <= 1'b0;
            is_gpu_q   <= lk_is_gpu;
            gpu_q      <= lk_gpu;
            st_q       <= lk_hit ? S_XLATE : S_DRAIN;
          end
        end
        S_XLATE: begin
          if ((hx_valid && hx_ready) || (gx_valid && gx_ready)) req_sent_q <= 1'b1;
          if (hx_done || gx_done) begin
            req_sent_q <= 1'b0;
            page_pa_q  <= is_gpu_q ? gx_pa : hx_pa;
            if (is_gpu_q ? gx_fault : hx_fault) st_q <= S_DRAIN;
            else if (is_gpu_q && !(win_ok_q && win_q[PA_W-1:GPU_PAGE_LOG2] == gx_pa[PA_W-1:GPU_PAGE_LOG2]))
              st_q <= S_WIN;
            else
              st_q <= S_DATA;
          end
        end
        S_WIN: if (wr_ready) begin
          win_q      <= gpu_page;
          win_ok_q   <= 1'b1;
          win_switch <= 1'b1;
          st_q       <= S_DATA;
        end
        S_DATA: if (in_valid && wr_ready) begin
          va_q     <= va_q + VA_W'(FLIT_BYTES);
          remain_q <= remain_q - LEN_W'(FLIT_BYTES);
          if (in_flit.last || last_word) begin
            pkt_done <= 1'b1;
            st_q     <= in_flit.last ? S_HDR : S_DRAIN;
          end else if (page_cross(va_q, is_gpu_q)) begin
            st_q <= S_XLATE;
          end
        end
        S_DRAIN: if (in_valid && in_flit.last) begin
          pkt_drop <= 1'b1;
          st_q     <= S_HDR;
        end
        default: st_q <= S_HDR;
      endcase
    end
  end
endmodule
