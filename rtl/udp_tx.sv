// udp_tx: transmit side of the paper's "UDP layer" (Fig. 3). It puts the
// Ethernet, IPv4 and UDP headers (the layout of the paper's Fig. 5) in
// front of each 1024-byte payload and hands the frame to the MAC.
//
// Several payload sources share it (here: the upload of captured data and
// the network test). A source raises `src_req` when it can deliver a whole
// payload without pause. When idle and the host's address is known
// (`host_valid`), the block picks a requesting source in round-robin order,
// pulses its `src_gnt`, sends the 42 header bytes, then takes the 1024
// payload bytes from that source, one per cycle in which its `src_rd` is
// high (`src_data` must show the next byte combinationally).
//
// Header fields: destination = the host that sent the last valid command,
// source = this board's MAC/IP/port; EtherType 0x0800; IPv4 version 4,
// header length 5 words, total length 1052, an identification counter
// that increments per packet, "don't fragment", TTL 64, protocol 17 and the
// header checksum computed here; UDP length 1032, UDP checksum 0 (allowed
// for IPv4, meaning "not computed"). The paper fixes the field list and the
// 1024-byte payload; the values of TTL, flags, identification, ports and
// the choice not to compute the UDP checksum are this design's.
module udp_tx
  import digitizer_pkg::*;
#(
  parameter int unsigned NSRC = 2
) (
  input  logic                  clk,
  input  logic                  rst,
  input  endpoint_t             local_ep,
  input  endpoint_t             host_ep,
  input  logic                  host_valid,
  input  logic [NSRC-1:0]       src_req,
  output logic [NSRC-1:0]       src_gnt,
  output logic [NSRC-1:0]       src_rd,
  input  logic [NSRC-1:0][7:0]  src_data,
  // to the MAC
  output logic                  m_valid,
  input  logic                  m_ready,
  output logic [7:0]            m_data,
  output logic                  m_last,
  output logic [31:0]           pkt_count
);
  localparam int unsigned SW = (NSRC > 1) ? $clog2(NSRC) : 1;
  localparam logic [15:0] IP_LEN  = 16'(20 + 8 + PAYLOAD_BYTES);
  localparam logic [15:0] UDP_LEN = 16'(8 + PAYLOAD_BYTES);

  typedef enum logic [1:0] { U_IDLE, U_HDR, U_PAY } tx_e;
  tx_e state;
  logic [HDR_BYTES*8-1:0] hdr;        // byte 0 in the top bits
  logic [5:0]  hidx;
  logic [9:0]  pidx;
  logic [SW-1:0] sel, last_sel, pick;
  logic        any_req;
  logic [15:0] ip_id;

  function automatic logic [15:0] ip_csum(input logic [15:0] id, input logic [31:0] sip,
                                          input logic [31:0] dip);
    logic [19:0] s;
    s = 20'h04500 + 20'(IP_LEN) + 20'(id) + 20'h04000 + 20'({8'd64, IP_PROTO_UDP}) +
        20'(sip[31:16]) + 20'(sip[15:0]) + 20'(dip[31:16]) + 20'(dip[15:0]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    return ~s[15:0];
  endfunction

  // round-robin choice starting after the last source served
  always_comb begin
    pick    = last_sel;
    any_req = 1'b0;
    for (int k = NSRC; k >= 1; k--) begin
      int unsigned c;
      c = (int'(last_sel) + k) % NSRC;
      if (src_req[c]) begin
        pick    = SW'(c);
        any_req = 1'b1;
      end
    end
  end

  always_comb begin
    m_valid = (state != U_IDLE);
    m_last  = (state == U_PAY) && (pidx == 10'(PAYLOAD_BYTES - 1));
    m_data  = (state == U_HDR) ? hdr[HDR_BYTES*8-1 - 8*hidx -: 8] : src_data[sel];
    src_rd  = '0;
    if (state == U_PAY) src_rd[sel] = m_ready;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= U_IDLE;
      hdr       <= '0;
      hidx      <= '0;
      pidx      <= '0;
      sel       <= '0;
      last_sel  <= SW'(NSRC - 1);
      ip_id     <= '0;
      src_gnt   <= '0;
      pkt_count <= '0;
    end else begin
      src_gnt <= '0;
      unique case (state)
        U_IDLE: if (any_req && host_valid) begin
          sel          <= pick;
          last_sel     <= pick;
          src_gnt[pick] <= 1'b1;
          hdr <= {host_ep.mac, local_ep.mac, ETHERTYPE_IPV4,
                  16'h4500, IP_LEN, ip_id, 16'h4000, 8'd64, IP_PROTO_UDP,
                  ip_csum(ip_id, local_ep.ip, host_ep.ip), local_ep.ip, host_ep.ip,
                  local_ep.port, host_ep.port, UDP_LEN, 16'h0000};
          ip_id <= ip_id + 1'b1;
          hidx  <= '0;
          state <= U_HDR;
        end
        U_HDR: if (m_ready) begin
          if (hidx == 6'(HDR_BYTES - 1)) begin
            pidx  <= '0;
            state <= U_PAY;
          end else begin
            hidx <= hidx + 1'b1;
          end
        end
        U_PAY: if (m_ready) begin
          pidx <= pidx + 1'b1;
          if (m_last) begin
            pkt_count <= pkt_count + 1'b1;
            state     <= U_IDLE;
          end
        end
        default: state <= U_IDLE;
      endcase
    end
  end
endmodule
