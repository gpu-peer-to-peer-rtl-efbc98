// gpu_p2p_tx: GPU read-request generator with unlimited pre-fetch and
// flow control (third-generation GPU_P2P_TX).
//
// Transmitting a GPU buffer means reading GPU memory through the GPUDirect
// peer-to-peer protocol. For each transmit descriptor (one packet of up to
// 4 KB; its source address is passed through unchanged, and in dnp_top it is
// a GPU virtual address that gpu_rd_xlate translates later) this block
// writes the packet header into the TX header FIFO and then splits the payload
// into read requests of REQ_BYTES each, queued in the P2P request FIFO towards
// the GPU. Requests leave at a steady pace, at most one every REQ_INTERVAL
// clock cycles, and flow across packet boundaries: there is no pre-fetch
// window, so the GPU's queue of outstanding reads is kept full. Issue pauses
// while any of the downstream buffers reports almost-full (TX data FIFO, TX
// header FIFO, P2P request FIFO) or while another request would take the data
// still owed by the GPU above MAX_OUTSTANDING x REQ_BYTES. The GPU's read
// data is written into the TX data FIFO by the surrounding logic; this block only counts it (`data_word`) to retire
// outstanding requests.
//
// Interface: desc_valid/desc_ready; hdr_valid pulses one cycle per accepted
// descriptor; req_valid pulses one cycle per request. `fc_stall` is high in
// every cycle a request was due but held back by flow control.
//
// From the source design: hardware-generated reads at one per 80 ns, pre-fetch
// without limit, back-reaction to almost-full on the TX data, TX header and
// P2P request FIFOs, and packets of up to 4 KB. This design's choices: a
// 200 MHz clock (so 80 ns = 16 cycles), 128-byte requests (1.6 GB/s at that
// pace, close to the measured 1.5-1.6 GB/s), a cap of 32 x 128 bytes owed
// by the GPU (enough to cover its 1.8 us first-data latency at one request
// per 80 ns, about 23 requests) and in-order return of read data.
module gpu_p2p_tx
  import apenet_pkg::*;
#(
  parameter int unsigned REQ_BYTES       = 128,
  parameter int unsigned REQ_INTERVAL    = 16,   // cycles between requests (80 ns at 200 MHz)
  parameter int unsigned MAX_OUTSTANDING = 32
) (
  input  logic      clk,
  input  logic      rst_n,
  // transmit descriptors from the firmware
  input  logic      desc_valid,
  output logic      desc_ready,
  input  tx_desc_t  desc,
  // header towards the TX header FIFO
  output logic      hdr_valid,
  output pkt_hdr_t  hdr,
  // read requests towards the P2P request FIFO
  output logic      req_valid,
  output rd_req_t   req,
  // flow-control feedback
  input  logic      hdr_af,
  input  logic      data_af,
  input  logic      req_af,
  input  logic      data_word,     // one 16-byte word of read data arrived
  // status
  output logic      busy,
  output logic      fc_stall
);
  localparam int unsigned REQ_WORDS = REQ_BYTES / FLIT_BYTES;
  localparam int unsigned OUT_MAX   = MAX_OUTSTANDING * REQ_WORDS;
  localparam int unsigned OW        = $clog2(OUT_MAX + 1) + 1;
  localparam int unsigned TW        = (REQ_INTERVAL > 1) ? $clog2(REQ_INTERVAL) : 1;

  logic             active_q;            // a descriptor is being read
  logic [PA_W-1:0]  addr_q;
  logic [LEN_W-1:0] remain_q;
  logic [TW-1:0]    timer_q;             // cycles until the next request slot
  logic [OW-1:0]    outst_q;             // words requested and not yet returned
  logic             due, fc_ok, issue;
  logic [LEN_W-1:0] chunk;

  assign chunk      = (remain_q > LEN_W'(REQ_BYTES)) ? LEN_W'(REQ_BYTES) : remain_q;
  assign due        = active_q && (remain_q != '0) && (timer_q == '0);
  assign fc_ok      = !data_af && !req_af && (int'(outst_q) + int'(REQ_WORDS) <= int'(OUT_MAX));
  assign issue      = due && fc_ok;
  assign fc_stall   = due && !fc_ok;

  // A new descriptor is taken when the previous one has issued all its reads
  // and there is room for its header.
  assign desc_ready = (!active_q || (remain_q == '0) || (issue && remain_q == chunk)) && !hdr_af;
  assign hdr_valid  = desc_valid && desc_ready;
  assign hdr        = '{rsvd: '0, dst: desc.dst, pid: desc.pid, len: desc.len, dst_va: desc.dst_va};

  assign req_valid  = issue;
  assign req        = '{addr: addr_q, len: chunk[7:0]};
  assign busy       = active_q && (remain_q != '0) || (outst_q != '0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      active_q <= 1'b0;
      addr_q   <= '0;
      remain_q <= '0;
      timer_q  <= '0;
      outst_q  <= '0;
    end else begin
      if (timer_q != '0) timer_q <= timer_q - 1'b1;
      else if (issue)    timer_q <= TW'(REQ_INTERVAL - 1);

      if (hdr_valid) begin
        active_q <= 1'b1;
        addr_q   <= desc.src_addr;
        remain_q <= desc.len;
      end else if (issue) begin
        addr_q   <= addr_q + PA_W'(chunk);
        remain_q <= remain_q - chunk;
        if (remain_q == chunk) active_q <= 1'b0;
      end

      outst_q <= outst_q + (issue ? OW'((int'(chunk) + FLIT_BYTES - 1) / FLIT_BYTES) : '0)
                         - OW'(data_word);
    end
  end

  a_data_matches_requests: assert property (@(posedge clk) disable iff (!rst_n)
    data_word |-> (outst_q != '0)) else $error("gpu_p2p_tx: read data with no request outstanding");
endmodule
