// Data Extractor (DE): packs the waveform words of its digitizers into
// UDP/IPv4 Ethernet frames for the point-to-point link to one Data Collector.
//
// Collection: for each event the DE takes the words of input 0 up to and
// including its event-end word, then those of input 1, and so on, into a
// packet buffer of MAX_WORDS 64-bit words. A packet is closed when the buffer
// is full or when the last input's event-end word has arrived; the inputs
// are stalled (in_ready low) while a packet is being sent.
//
// Frame, one byte per cycle on a GMII-style byte interface (tx_en, txd):
//   preamble 55 x7, SFD D5;
//   Ethernet: destination MAC, source MAC, type 0800;
//   IPv4 header (20 bytes, no options, DF set, TTL 64, protocol 17, header
//   checksum); UDP header (checksum 0, which IPv4 allows);
//   application header, 8 bytes: event number (24 bits), flags (bit 0 = last
//   packet of the event), packet sequence number (16 bits, +1 per packet on
//   this link) and number of 64-bit words that follow;
//   payload: the words, most significant byte first;
//   FCS: CRC-32 (IEEE 802.3) of the bytes from the destination MAC to the end
//   of the payload, least significant byte first;
//   then IFG idle cycles.
// The sequence number and word count let the receiver check consistency at
// the application level, so that UDP needs no retransmission on this
// dedicated link.
// From the paper: FPGA-generated Ethernet packets, 1 Gbit UDP, point-to-point,
// consistency checking at the application level. Header layout, addresses,
// packet size and the in-order input service are this design's choices. The
// byte interface runs on the 100 MHz system clock (800 Mbit/s); a real GMII
// port runs at 125 MHz behind a clock-domain crossing, not modelled here.
module data_extractor
  import lz_daq_pkg::*;
#(
  parameter int unsigned N_IN      = 3,
  parameter int unsigned MAX_WORDS = 180,
  parameter logic [15:0] SRC_PORT  = 16'd5000,
  parameter logic [15:0] DST_PORT  = 16'd5001,
  parameter int unsigned IFG       = 12
) (
  input  logic            clk,
  input  logic            rst_n,
  // link addresses, set by the board's configuration
  input  logic [47:0]     src_mac,
  input  logic [47:0]     dst_mac,
  input  logic [31:0]     src_ip,
  input  logic [31:0]     dst_ip,
  input  logic            in_valid [N_IN],
  output logic            in_ready [N_IN],
  input  wave_word_t      in_word  [N_IN],
  output logic            tx_en,
  output logic [7:0]      txd,
  output logic [31:0]     n_packets,
  output logic [31:0]     n_events
);
  localparam int unsigned HDR_BYTES = 50;   // Ethernet 14 + IPv4 20 + UDP 8 + app 8
  localparam int unsigned NW = $clog2(MAX_WORDS + 1);
  localparam int unsigned SW = (N_IN > 1) ? $clog2(N_IN) : 1;
  localparam int unsigned BW = $clog2(HDR_BYTES + 8*MAX_WORDS + 1);

  // ---------------- collection ----------------
  wave_word_t         pkt [MAX_WORDS];
  logic [NW-1:0]      n;
  logic [SW-1:0]      src;
  logic [EVT_W-1:0]   evt;
  logic               busy;        // a packet is being sent
  logic               flush, flush_last;
  logic               take;
  wave_word_t         w;

  always_comb begin
    w = in_word[src];
    for (int i = 0; i < int'(N_IN); i++) in_ready[i] = 1'b0;
    take = 1'b0;
    if (!busy && n != NW'(MAX_WORDS)) begin
      in_ready[src] = 1'b1;
      take = in_valid[src];
    end
  end

  always_comb begin
    flush      = 1'b0;
    flush_last = 1'b0;
    if (!busy) begin
      if (take && w.kind == W_EVT_END && src == SW'(N_IN - 1)) begin
        flush = 1'b1; flush_last = 1'b1;
      end else if (n == NW'(MAX_WORDS)) flush = 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (take) pkt[n] <= w;
  end

  // ---------------- frame transmission ----------------
  typedef enum logic [2:0] {T_IDLE, T_PRE, T_BODY, T_FCS, T_GAP} tstate_e;
  tstate_e        tst;
  logic [BW-1:0]  bi;         // byte index within the state
  logic [NW-1:0]  tx_n;
  logic           tx_last;
  logic [EVT_W-1:0] tx_evt;
  logic [15:0]    seq;
  logic [31:0]    crc;
  logic [7:0]     body_byte;

  function automatic logic [31:0] crc32_byte(input logic [31:0] c, input logic [7:0] d);
    logic [31:0] r = c;
    for (int i = 0; i < 8; i++)
      r = (r >> 1) ^ ((r[0] ^ d[i]) ? 32'hEDB8_8320 : 32'h0);
    return r;
  endfunction

  function automatic logic [15:0] ip_checksum(input logic [159:0] h);
    logic [31:0] s = '0;
    for (int i = 0; i < 10; i++) s += 32'(h[i*16 +: 16]);
    s = 32'(s[15:0]) + 32'(s[31:16]);
    s = 32'(s[15:0]) + 32'(s[31:16]);
    return ~s[15:0];
  endfunction

  logic [15:0] ip_len, udp_len;
  logic [159:0] ip_hdr;
  logic [8*HDR_BYTES-1:0] hdr;
  always_comb begin
    udp_len = 16'(8 + 8 + 8*int'(tx_n));
    ip_len  = udp_len + 16'd20;
    ip_hdr  = {8'h45, 8'h00, ip_len, seq, 16'h4000, 8'd64, 8'd17, 16'h0000, src_ip, dst_ip};
    ip_hdr[79:64] = ip_checksum(ip_hdr);
    hdr = {dst_mac, src_mac, 16'h0800, ip_hdr,
           SRC_PORT, DST_PORT, udp_len, 16'h0000,
           tx_evt, {7'd0, tx_last}, seq, 16'(tx_n)};
  end

  always_comb begin
    logic [BW-1:0] pb;
    pb = bi - BW'(HDR_BYTES);
    if (bi < BW'(HDR_BYTES)) body_byte = hdr[(HDR_BYTES - 1 - int'(bi))*8 +: 8];
    else                     body_byte = pkt[pb[BW-1:3]][(7 - int'(pb[2:0]))*8 +: 8];
  end

  logic [BW-1:0] body_len;
  assign body_len = BW'(HDR_BYTES) + BW'({tx_n, 3'b000});

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      tst       <= T_IDLE;
      bi        <= '0;
      tx_n      <= '0;
      tx_last   <= 1'b0;
      tx_evt    <= '0;
      seq       <= '0;
      crc       <= '1;
      tx_en     <= 1'b0;
      txd       <= '0;
      n         <= '0;
      src       <= '0;
      evt       <= '0;
      busy      <= 1'b0;
      n_packets <= '0;
      n_events  <= '0;
    end else begin
      // collection side
      if (take) begin
        if (w.kind == W_EVT_HDR && src == '0) evt <= EVT_W'(w.ts);
        if (w.kind == W_EVT_END) src <= (src == SW'(N_IN - 1)) ? '0 : src + 1'b1;
      end
      if (flush) begin
        busy    <= 1'b1;
        tx_n    <= take ? n + 1'b1 : n;
        tx_last <= flush_last;
        tx_evt  <= (take && w.kind == W_EVT_HDR && src == '0) ? EVT_W'(w.ts) : evt;
        n       <= '0;
        tst     <= T_PRE;
        bi      <= '0;
        if (flush_last) n_events <= n_events + 1'b1;
      end else if (take) n <= n + 1'b1;

      // transmit side
      tx_en <= 1'b0;
      unique case (tst)
        T_IDLE: ;
        T_PRE: begin
          tx_en <= 1'b1;
          txd   <= (bi == BW'(7)) ? 8'hD5 : 8'h55;
          crc   <= '1;
          if (bi == BW'(7)) begin tst <= T_BODY; bi <= '0; end
          else bi <= bi + 1'b1;
        end
        T_BODY: begin
          tx_en <= 1'b1;
          txd   <= body_byte;
          crc   <= crc32_byte(crc, body_byte);
          if (bi == body_len - 1'b1) begin tst <= T_FCS; bi <= '0; end
          else bi <= bi + 1'b1;
        end
        T_FCS: begin
          tx_en <= 1'b1;
          txd   <= ~crc[int'(bi[1:0])*8 +: 8];
          if (bi == BW'(3)) begin tst <= T_GAP; bi <= '0; end
          else bi <= bi + 1'b1;
        end
        T_GAP: begin
          if (bi == BW'(IFG - 1)) begin
            tst       <= T_IDLE;
            busy      <= 1'b0;
            seq       <= seq + 1'b1;
            n_packets <= n_packets + 1'b1;
          end else bi <= bi + 1'b1;
        end
        default: tst <= T_IDLE;
      endcase
    end
  end
endmodule
