// cmd_rx: receive side of the paper's "UDP layer" (Fig. 3): picks host
// commands out of the frames coming from the MAC receiver.
//
// A frame is accepted if its FCS was good, its destination MAC is this
// board's or broadcast, the EtherType is 0x0800 (IPv4, as in the paper's
// Fig. 5), the IP header is a plain 20-byte version-4 header, the protocol
// is UDP (17), the destination IP is this board's and the destination UDP
// port is this board's command port. Its UDP payload must hold at least 5
// bytes (UDP length field at least 13, the frame at least 47 bytes): an opcode byte and a 32-bit big-endian argument. For an accepted
// frame `cmd_valid` pulses with `opcode` and `arg`, and the sender's MAC,
// IP and UDP port are stored in `host_ep`; replies go there. The IP header
// checksum is not verified (the FCS already protects the frame on the
// link); other frames are dropped and counted in `dropped`.
//
// The paper says the host sends data request commands over UDP; the
// command format, the address filtering and the reply-to-sender rule are
// this design's. There is no ARP responder, so the host needs a static
// ARP entry for the board.
module cmd_rx
  import digitizer_pkg::*;
(
  input  logic        clk,
  input  logic        rst,
  input  endpoint_t   local_ep,
  input  logic        s_valid,
  input  logic [7:0]  s_data,
  input  logic        s_last,
  input  logic        s_good,
  output logic        cmd_valid,
  output logic [7:0]  opcode,
  output logic [31:0] arg,
  output endpoint_t   host_ep,
  output logic        host_valid,
  output logic [15:0] dropped
);
  logic [10:0] idx;
  logic [47:0] dmac, smac;
  logic [15:0] etype, sport, dport, ulen;
  logic [7:0]  verihl, proto, op;
  logic [31:0] sip, dip, a;

  // byte `b` of the frame lands in field registers by position
  always_ff @(posedge clk) begin
    if (rst) begin
      idx <= '0;
      dmac <= '0; smac <= '0; etype <= '0; verihl <= '0; proto <= '0;
      sip <= '0; dip <= '0; sport <= '0; dport <= '0; ulen <= '0; op <= '0; a <= '0;
      cmd_valid <= 1'b0;
      opcode <= '0; arg <= '0;
      host_ep <= '0; host_valid <= 1'b0;
      dropped <= '0;
    end else begin
      cmd_valid <= 1'b0;
      if (s_valid) begin
        if (idx != '1) idx <= idx + 1'b1;
        if (idx < 6)                  dmac   <= {dmac[39:0], s_data};
        else if (idx < 12)            smac   <= {smac[39:0], s_data};
        else if (idx < 14)            etype  <= {etype[7:0], s_data};
        else if (idx == 14)           verihl <= s_data;
        else if (idx == 23)           proto  <= s_data;
        else if (idx >= 26 && idx < 30) sip  <= {sip[23:0], s_data};
        else if (idx >= 30 && idx < 34) dip  <= {dip[23:0], s_data};
        else if (idx >= 34 && idx < 36) sport <= {sport[7:0], s_data};
        else if (idx >= 36 && idx < 38) dport <= {dport[7:0], s_data};
        else if (idx >= 38 && idx < 40) ulen  <= {ulen[7:0], s_data};
        else if (idx == 42)           op     <= s_data;
        else if (idx >= 43 && idx < 47) a    <= {a[23:0], s_data};
        if (s_last) begin
          idx <= '0;
          // idx is the index of this last byte; payload needs bytes 42..46
          if (s_good && idx >= 46 &&
              (dmac == local_ep.mac || dmac == '1) &&
              etype == ETHERTYPE_IPV4 && verihl == 8'h45 && proto == IP_PROTO_UDP &&
              dip == local_ep.ip && dport == local_ep.port &&
              ulen >= 16'd13) begin
            cmd_valid  <= 1'b1;
            opcode     <= op;
            // the last byte may itself be the final argument byte
            arg        <= (idx == 46) ? {a[23:0], s_data} : a;
            host_ep    <= '{mac: smac, ip: sip, port: sport};
            host_valid <= 1'b1;
          end else begin
            dropped <= dropped + 1'b1;
          end
        end
      end
    end
  end
endmodule
