// dnp_top: the DNP (Distributed Network Processor) of a 3D-torus network
// adapter that can read and write GPU memory directly over PCIe.
//
// Blocks and data flow:
//   * dnp_router: 8-port switch. Ports 0..5 are the torus links (brought out
//     as flit streams), port 6 carries host traffic, port 7 GPU traffic.
//   * GPU transmit: gpu_p2p_tx turns transmit descriptors into paced 128-byte
//     peer-to-peer read requests, queued in the P2P request FIFO towards the
//     GPU; gpu_rd_xlate translates their GPU virtual source addresses
//     through its copy of the GPU_V2P table (GPU 0's root) as they leave; the
//     GPU's read data fills the 32 KB TX data FIFO, headers go to the
//     TX header FIFO, and tx_pkt_merge joins the two into packets for router
//     port 7. The almost-full flags of the three FIFOs throttle the request
//     generator.
//   * Host transmit: the same request generator without pacing reads host
//     memory into a second 32 KB TX data FIFO and header FIFO, merged into
//     router port 6.
//   * Receive: packets for this node leave router port 6 into rx_rdma, which
//     validates them against the registered buffers, translates their
//     addresses (HOST_V2P / GPU_V2P) and issues PCIe writes to host or GPU
//     memory, moving the GPU window when needed.
// Router port 7's output is never chosen by the routing (delivery uses port 6)
// and is brought out as a port.
//
// Outside this module, connected through ports: the six torus link
// transceivers, the PCIe core (read requests out, read data in, writes out)
// and the firmware micro-controller (descriptors, buffer registration, page
// table fill, table roots).
//
// Read data arrives without back-pressure, as PCIe completions do; the data
// FIFOs' almost-full levels leave room for every outstanding request, which
// an assertion checks.
module dnp_top
  import apenet_pkg::*;
#(
  parameter int unsigned DIM_X           = 4,
  parameter int unsigned DIM_Y           = 2,
  parameter int unsigned DIM_Z           = 1,
  parameter int unsigned TXDATA_WORDS    = 2048,   // 32 KB transmission buffer
  parameter int unsigned HDR_DEPTH       = 64,
  parameter int unsigned REQ_DEPTH       = 32,
  parameter int unsigned REQ_BYTES       = 128,
  parameter int unsigned REQ_INTERVAL    = 16,     // 80 ns at 200 MHz
  parameter int unsigned MAX_OUTSTANDING = 32,
  parameter int unsigned N_BUF           = 64,
  parameter int unsigned N_GPU           = 1,
  localparam int unsigned BIW = (N_BUF > 1) ? $clog2(N_BUF) : 1,
  localparam int unsigned GW  = (N_GPU > 1) ? $clog2(N_GPU) : 1,
  localparam int unsigned HOST_TWORDS = 4 * (1 << ((64 - HOST_PAGE_LOG2) / 4)),
  localparam int unsigned GPU_TWORDS  = 4 * (1 << ((64 - GPU_PAGE_LOG2) / 4)),
  localparam int unsigned HTW = $clog2(HOST_TWORDS),
  localparam int unsigned GTW = $clog2(GPU_TWORDS)
) (
  input  logic             clk,
  input  logic             rst_n,
  input  coord_t           my_coord,
  // torus links X+, X-, Y+, Y-, Z+, Z-
  input  flit_t            link_in_flit  [6],
  input  logic             link_in_valid [6],
  output logic             link_in_ready [6],
  output flit_t            link_out_flit [6],
  output logic             link_out_valid[6],
  input  logic             link_out_ready[6],
  // GPU transmit: descriptors, P2P read requests, read data
  input  logic             gtx_desc_valid,
  output logic             gtx_desc_ready,
  input  tx_desc_t         gtx_desc,
  output logic             gpu_rd_valid,
  input  logic             gpu_rd_ready,
  output rd_req_t          gpu_rd,
  input  logic             gpu_data_valid,
  input  logic [FLIT_W-1:0] gpu_data,
  // host transmit: descriptors, read requests, read data
  input  logic             htx_desc_valid,
  output logic             htx_desc_ready,
  input  tx_desc_t         htx_desc,
  output logic             host_rd_valid,
  input  logic             host_rd_ready,
  output rd_req_t          host_rd,
  input  logic             host_data_valid,
  input  logic [FLIT_W-1:0] host_data,
  // receive: PCIe writes
  output logic             rx_wr_valid,
  input  logic             rx_wr_ready,
  output pcie_wr_t         rx_wr,
  // second local extraction port (unused by the routing)
  output flit_t            loc1_out_flit,
  output logic             loc1_out_valid,
  input  logic             loc1_out_ready,
  // firmware configuration
  input  logic             reg_we,
  input  logic [BIW-1:0]   reg_idx,
  input  logic             reg_valid,
  input  logic [VA_W-1:0]  reg_va,
  input  logic [31:0]      reg_len,
  input  logic [PID_W-1:0] reg_pid,
  input  logic             reg_is_gpu,
  input  logic [GW-1:0]    reg_gpu,
  input  logic             htw_we,
  input  logic [HTW-1:0]   htw_addr,
  input  logic [63:0]      htw_data,
  input  logic [HTW-1:0]   host_root,
  input  logic             gtw_we,
  input  logic [GTW-1:0]   gtw_addr,
  input  logic [63:0]      gtw_data,
  input  logic [GTW-1:0]   gpu_root [N_GPU],
  // status
  output logic             gtx_fc_stall,
  output logic             gtx_busy,
  output logic             gtx_xlate_walk,
  output logic             gtx_xlate_fault,
  output logic             htx_busy,
  output logic             rx_pkt_done,
  output logic             rx_pkt_drop,
  output logic             rx_win_switch
);
  localparam int unsigned REQ_WORDS = REQ_BYTES / FLIT_BYTES;
  localparam int unsigned DATA_AF   = TXDATA_WORDS - MAX_OUTSTANDING * REQ_WORDS;
  localparam int unsigned HW_       = $bits(pkt_hdr_t);
  localparam int unsigned RW_       = $bits(rd_req_t);

  // router ports
  flit_t r_in_flit [NPORTS], r_out_flit [NPORTS];
  logic  r_in_valid[NPORTS], r_in_ready [NPORTS];
  logic  r_out_valid[NPORTS], r_out_ready[NPORTS];

  for (genvar p = 0; p < 6; p++) begin : g_link
    assign r_in_flit[p]      = link_in_flit[p];
    assign r_in_valid[p]     = link_in_valid[p];
    assign link_in_ready[p]  = r_in_ready[p];
    assign link_out_flit[p]  = r_out_flit[p];
    assign link_out_valid[p] = r_out_valid[p];
    assign r_out_ready[p]    = link_out_ready[p];
  end

  dnp_router #(.DIM_X(DIM_X), .DIM_Y(DIM_Y), .DIM_Z(DIM_Z)) u_router (
    .clk, .rst_n, .my_coord,
    .in_flit(r_in_flit), .in_valid(r_in_valid), .in_ready(r_in_ready),
    .out_flit(r_out_flit), .out_valid(r_out_valid), .out_ready(r_out_ready));

  // ---------------------------------------------------------------- GPU TX
  logic     g_hdr_push, g_hdr_af, g_hdr_rv, g_hdr_rr;
  pkt_hdr_t g_hdr_in;
  logic [HW_-1:0] g_hdr_out;
  logic     g_req_push, g_req_af;
  rd_req_t  g_req_in;
  logic [RW_-1:0] g_req_out;
  logic     g_dat_af, g_dat_rv, g_dat_rr, g_dat_wr;
  logic [FLIT_W-1:0] g_dat_out;

  gpu_p2p_tx #(.REQ_BYTES(REQ_BYTES), .REQ_INTERVAL(REQ_INTERVAL),
               .MAX_OUTSTANDING(MAX_OUTSTANDING)) u_gpu_p2p_tx (
    .clk, .rst_n,
    .desc_valid(gtx_desc_valid), .desc_ready(gtx_desc_ready), .desc(gtx_desc),
    .hdr_valid(g_hdr_push), .hdr(g_hdr_in),
    .req_valid(g_req_push), .req(g_req_in),
    .hdr_af(g_hdr_af), .data_af(g_dat_af), .req_af(g_req_af),
    .data_word(gpu_data_valid), .busy(gtx_busy), .fc_stall(gtx_fc_stall));

  sync_fifo #(.WIDTH(HW_), .DEPTH(HDR_DEPTH), .AF_LEVEL(HDR_DEPTH - 2)) u_gtx_hdr_fifo (
    .clk, .rst_n, .wr_valid(g_hdr_push), .wr_ready(), .wr_data(g_hdr_in),
    .rd_valid(g_hdr_rv), .rd_ready(g_hdr_rr), .rd_data(g_hdr_out),
    .almost_full(g_hdr_af), .count());

  logic g_xl_valid, g_xl_ready;

  sync_fifo #(.WIDTH(RW_), .DEPTH(REQ_DEPTH), .AF_LEVEL(REQ_DEPTH - 2)) u_p2p_req_fifo (
    .clk, .rst_n, .wr_valid(g_req_push), .wr_ready(), .wr_data(g_req_in),
    .rd_valid(g_xl_valid), .rd_ready(g_xl_ready), .rd_data(g_req_out),
    .almost_full(g_req_af), .count());

  // GPU virtual source addresses become physical on the way to the GPU
  gpu_rd_xlate u_gpu_rd_xlate (
    .clk, .rst_n,
    .in_valid(g_xl_valid), .in_ready(g_xl_ready), .in_req(rd_req_t'(g_req_out)),
    .out_valid(gpu_rd_valid), .out_ready(gpu_rd_ready), .out_req(gpu_rd),
    .tw_we(gtw_we), .tw_addr(gtw_addr), .tw_data(gtw_data), .root(gpu_root[0]),
    .walk(gtx_xlate_walk), .fault(gtx_xlate_fault));

  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(TXDATA_WORDS), .AF_LEVEL(DATA_AF)) u_gtx_data_fifo (
    .clk, .rst_n, .wr_valid(gpu_data_valid), .wr_ready(g_dat_wr), .wr_data(gpu_data),
    .rd_valid(g_dat_rv), .rd_ready(g_dat_rr), .rd_data(g_dat_out),
    .almost_full(g_dat_af), .count());

  tx_pkt_merge u_gtx_merge (
    .clk, .rst_n,
    .hdr_valid(g_hdr_rv), .hdr_ready(g_hdr_rr), .hdr(pkt_hdr_t'(g_hdr_out)),
    .data_valid(g_dat_rv), .data_ready(g_dat_rr), .data(g_dat_out),
    .out_valid(r_in_valid[P_LOC1]), .out_ready(r_in_ready[P_LOC1]), .out_flit(r_in_flit[P_LOC1]));

  // --------------------------------------------------------------- host TX
  logic     h_hdr_push, h_hdr_af, h_hdr_rv, h_hdr_rr;
  pkt_hdr_t h_hdr_in;
  logic [HW_-1:0] h_hdr_out;
  logic     h_req_push, h_req_af;
  rd_req_t  h_req_in;
  logic [RW_-1:0] h_req_out;
  logic     h_dat_af, h_dat_rv, h_dat_rr, h_dat_wr;
  logic [FLIT_W-1:0] h_dat_out;

  gpu_p2p_tx #(.REQ_BYTES(REQ_BYTES), .REQ_INTERVAL(1),
               .MAX_OUTSTANDING(MAX_OUTSTANDING)) u_host_tx (
    .clk, .rst_n,
    .desc_valid(htx_desc_valid), .desc_ready(htx_desc_ready), .desc(htx_desc),
    .hdr_valid(h_hdr_push), .hdr(h_hdr_in),
    .req_valid(h_req_push), .req(h_req_in),
    .hdr_af(h_hdr_af), .data_af(h_dat_af), .req_af(h_req_af),
    .data_word(host_data_valid), .busy(htx_busy), .fc_stall());

  sync_fifo #(.WIDTH(HW_), .DEPTH(HDR_DEPTH), .AF_LEVEL(HDR_DEPTH - 2)) u_htx_hdr_fifo (
    .clk, .rst_n, .wr_valid(h_hdr_push), .wr_ready(), .wr_data(h_hdr_in),
    .rd_valid(h_hdr_rv), .rd_ready(h_hdr_rr), .rd_data(h_hdr_out),
    .almost_full(h_hdr_af), .count());

  sync_fifo #(.WIDTH(RW_), .DEPTH(REQ_DEPTH), .AF_LEVEL(REQ_DEPTH - 2)) u_host_req_fifo (
    .clk, .rst_n, .wr_valid(h_req_push), .wr_ready(), .wr_data(h_req_in),
    .rd_valid(host_rd_valid), .rd_ready(host_rd_ready), .rd_data(h_req_out),
    .almost_full(h_req_af), .count());
  assign host_rd = rd_req_t'(h_req_out);

  sync_fifo #(.WIDTH(FLIT_W), .DEPTH(TXDATA_WORDS), .AF_LEVEL(DATA_AF)) u_htx_data_fifo (
    .clk, .rst_n, .wr_valid(host_data_valid), .wr_ready(h_dat_wr), .wr_data(host_data),
    .rd_valid(h_dat_rv), .rd_ready(h_dat_rr), .rd_data(h_dat_out),
    .almost_full(h_dat_af), .count());

  tx_pkt_merge u_htx_merge (
    .clk, .rst_n,
    .hdr_valid(h_hdr_rv), .hdr_ready(h_hdr_rr), .hdr(pkt_hdr_t'(h_hdr_out)),
    .data_valid(h_dat_rv), .data_ready(h_dat_rr), .data(h_dat_out),
    .out_valid(r_in_valid[P_LOC0]), .out_ready(r_in_ready[P_LOC0]), .out_flit(r_in_flit[P_LOC0]));

  // -------------------------------------------------------------------- RX
  rx_rdma #(.N_BUF(N_BUF), .N_GPU(N_GPU)) u_rx_rdma (
    .clk, .rst_n,
    .in_valid(r_out_valid[P_LOC0]), .in_ready(r_out_ready[P_LOC0]), .in_flit(r_out_flit[P_LOC0]),
    .wr_valid(rx_wr_valid), .wr_ready(rx_wr_ready), .wr(rx_wr),
    .reg_we, .reg_idx, .reg_valid, .reg_va, .reg_len, .reg_pid, .reg_is_gpu, .reg_gpu,
    .htw_we, .htw_addr, .htw_data, .host_root,
    .gtw_we, .gtw_addr, .gtw_data, .gpu_root,
    .pkt_done(rx_pkt_done), .pkt_drop(rx_pkt_drop), .win_switch(rx_win_switch));

  assign loc1_out_flit        = r_out_flit[P_LOC1];
  assign loc1_out_valid       = r_out_valid[P_LOC1];
  assign r_out_ready[P_LOC1]  = loc1_out_ready;

  // Read data has no back-pressure: the data FIFOs must always have room.
  a_gpu_data_room: assert property (@(posedge clk) disable iff (!rst_n)
    gpu_data_valid |-> g_dat_wr) else $error("dnp_top: GPU TX data FIFO overflow");
  a_host_data_room: assert property (@(posedge clk) disable iff (!rst_n)
    host_data_valid |-> h_dat_wr) else $error("dnp_top: host TX data FIFO overflow");
endmodule
