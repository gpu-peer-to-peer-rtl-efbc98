// apenet_pkg: types and constants shared by the DNP (Distributed Network
// Processor) blocks.
//
// Data moves through the DNP as 128-bit flits with a `last` marker. A packet is
// one header flit followed by its payload flits (16 bytes each); the header
// carries the destination torus coordinates, the 64-bit destination virtual
// address, the sender's process ID and the payload length. The six torus ports
// and the two local ports of the router are numbered by `port_e`.
//
// What follows the source design: 64-bit virtual addresses, 64 KB GPU pages,
// 4 KB host pages, packets of up to 4 KB, six torus ports plus two local ones.
// This design's own choices: the flit width, the header bit layout, the 4-bit
// coordinate fields and the PCIe request/write records, which stand in for
// the transaction layer of the PCIe core.
package apenet_pkg;

  localparam int unsigned FLIT_W      = 128;           // flit width, bits
  localparam int unsigned FLIT_BYTES  = FLIT_W / 8;    // 16 bytes per flit
  localparam int unsigned COORD_W     = 4;             // bits per torus coordinate
  localparam int unsigned LEN_W       = 13;            // payload length in bytes, up to 4096
  localparam int unsigned MAX_PKT_BYTES = 4096;        // largest packet payload
  localparam int unsigned PID_W       = 16;            // process ID
  localparam int unsigned VA_W        = 64;            // UVA virtual address
  localparam int unsigned PA_W        = 64;            // PCIe physical address
  localparam int unsigned NPORTS      = 8;             // router ports
  localparam int unsigned GPU_PAGE_LOG2  = 16;         // 64 KB GPU pages
  localparam int unsigned HOST_PAGE_LOG2 = 12;         // 4 KB host pages

  // Router port numbering: six torus links, then the two local ports.
  typedef enum logic [2:0] {
    P_XP = 3'd0, P_XM = 3'd1, P_YP = 3'd2, P_YM = 3'd3,
    P_ZP = 3'd4, P_ZM = 3'd5, P_LOC0 = 3'd6, P_LOC1 = 3'd7
  } port_e;

  typedef struct packed {
    logic [COORD_W-1:0] x;
    logic [COORD_W-1:0] y;
    logic [COORD_W-1:0] z;
  } coord_t;

  // Header flit layout (128 bits).
  typedef struct packed {
    logic [22:0]       rsvd;
    coord_t            dst;      // 12 bits
    logic [PID_W-1:0]  pid;
    logic [LEN_W-1:0]  len;      // payload bytes, multiple of FLIT_BYTES
    logic [VA_W-1:0]   dst_va;
  } pkt_hdr_t;

  typedef struct packed {
    logic              last;
    logic [FLIT_W-1:0] data;
  } flit_t;

  // Transmit descriptor: one packet. For host memory the source address is
  // physical (the driver translates it); for GPU memory it is the GPU
  // virtual address, translated on the way out by gpu_rd_xlate.
  typedef struct packed {
    logic [PA_W-1:0]   src_addr;
    logic [LEN_W-1:0]  len;
    coord_t            dst;
    logic [PID_W-1:0]  pid;
    logic [VA_W-1:0]   dst_va;
  } tx_desc_t;

  // Read request towards the GPU over PCIe (GPUDirect P2P read).
  typedef struct packed {
    logic [PA_W-1:0] addr;
    logic [7:0]      len;        // bytes, up to 128
  } rd_req_t;

  // Write the RX path hands to the PCIe core.
  typedef enum logic [1:0] {
    WR_HOST    = 2'd0,           // posted write to host memory
    WR_GPU     = 2'd1,           // P2P write into the current GPU window
    GPU_WINDOW = 2'd2            // move the GPU P2P window to a new 64 KB page
  } wr_kind_e;

  typedef struct packed {
    wr_kind_e          kind;
    logic [PA_W-1:0]   addr;
    logic [FLIT_W-1:0] data;
  } pcie_wr_t;

endpackage
