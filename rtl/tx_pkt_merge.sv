// tx_pkt_merge: joins a TX header FIFO and a TX data FIFO into packets.
//
// The transmit side keeps headers and payload in separate FIFOs. This block
// takes one header, sends it as the first flit of a packet, then forwards
// len/16 payload words from the data FIFO, marking the final flit `last` (a
// packet with no payload is its header alone). The flit stream feeds a local
// injection port of the router.
//
// Interface: the two FIFO read sides (valid/ready, first-word fall-through)
// in, a valid/ready flit stream out; one flit per cycle when nothing stalls.
// Separate header and data FIFOs in front of the switch are in the source
// design; the way they are joined is this design's.
module tx_pkt_merge
  import apenet_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        hdr_valid,
  output logic        hdr_ready,
  input  pkt_hdr_t    hdr,
  input  logic        data_valid,
  output logic        data_ready,
  input  logic [FLIT_W-1:0] data,
  output logic        out_valid,
  input  logic        out_ready,
  output flit_t       out_flit
);
  localparam int unsigned WCW = LEN_W - 4 + 1;
  logic           in_body_q;
  logic [WCW-1:0] words_q;        // payload words still to send
  logic [WCW-1:0] hdr_words;

  assign hdr_words = WCW'(hdr.len >> 4);

  always_comb begin
    hdr_ready  = 1'b0;
    data_ready = 1'b0;
    if (!in_body_q) begin
      out_valid = hdr_valid;
      out_flit  = '{last: (hdr_words == '0), data: FLIT_W'(hdr)};
      hdr_ready = out_ready;
    end else begin
      out_valid  = data_valid;
      out_flit   = '{last: (words_q == WCW'(1)), data: data};
      data_ready = out_ready;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_body_q <= 1'b0;
      words_q   <= '0;
    end else if (out_valid && out_ready) begin
      if (!in_body_q) begin
        in_body_q <= (hdr_words != '0);
        words_q   <= hdr_words;
      end else begin
        words_q   <= words_q - 1'b1;
        if (words_q == WCW'(1)) in_body_q <= 1'b0;
      end
    end
  end
endmodule
