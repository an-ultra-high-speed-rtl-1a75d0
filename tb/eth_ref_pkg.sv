// eth_ref_pkg: reference functions for the Ethernet testbenches, written
// independently of the design: a bit-serial CRC-32 (IEEE 802.3), the IPv4
// header checksum, and builders for complete frames as byte queues.
package eth_ref_pkg;
  typedef byte unsigned bq_t[$];

  // bit-serial CRC-32: shift register with polynomial 0x04C11DB7, data bits
  // taken least significant first, result bit-reversed and complemented
  function automatic logic [31:0] crc32(input bq_t b);
    logic [31:0] r;
    logic [31:0] out;
    r = 32'hFFFFFFFF;
    foreach (b[i])
      for (int k = 0; k < 8; k++) begin
        logic fb;
        fb = r[31] ^ b[i][k];
        r = {r[30:0], 1'b0};
        if (fb) r = r ^ 32'h04C11DB7;
      end
    for (int k = 0; k < 32; k++) out[k] = r[31-k];
    return ~out;
  endfunction

  function automatic logic [15:0] ip_checksum(input bq_t h);
    logic [31:0] s;
    s = 0;
    for (int i = 0; i + 1 < h.size(); i += 2) s += {h[i], h[i+1]};
    while (s[31:16] != 0) s = s[15:0] + s[31:16];
    return ~s[15:0];
  endfunction

  function automatic void push16(ref bq_t q, input logic [15:0] v);
    q.push_back(v[15:8]); q.push_back(v[7:0]);
  endfunction
  function automatic void push32(ref bq_t q, input logic [31:0] v);
    push16(q, v[31:16]); push16(q, v[15:0]);
  endfunction
  function automatic void push48(ref bq_t q, input logic [47:0] v);
    push16(q, v[47:32]); push32(q, v[31:0]);
  endfunction

  // Ethernet + IPv4 + UDP headers (42 bytes) followed by the payload
  function automatic bq_t udp_frame(input logic [47:0] dmac, smac,
                                    input logic [31:0] sip, dip,
                                    input logic [15:0] sport, dport, ip_id,
                                    input bq_t payload);
    bq_t f, ip;
    push48(f, dmac); push48(f, smac); push16(f, 16'h0800);
    push16(ip, 16'h4500);
    push16(ip, 16'(20 + 8 + payload.size()));
    push16(ip, ip_id);
    push16(ip, 16'h4000);
    ip.push_back(8'd64); ip.push_back(8'd17);
    push16(ip, 16'h0000);
    push32(ip, sip); push32(ip, dip);
    begin
      logic [15:0] c;
      c = ip_checksum(ip);
      ip[10] = c[15:8]; ip[11] = c[7:0];
    end
    f = {f, ip};
    push16(f, sport); push16(f, dport);
    push16(f, 16'(8 + payload.size()));
    push16(f, 16'h0000);
    f = {f, payload};
    return f;
  endfunction

  // what goes on the wire: preamble, SFD, frame padded to 60, FCS
  function automatic bq_t on_wire(input bq_t frame);
    bq_t w, f;
    logic [31:0] c;
    f = frame;
    while (f.size() < 60) f.push_back(8'h00);
    c = crc32(f);
    repeat (7) w.push_back(8'h55);
    w.push_back(8'hD5);
    w = {w, f};
    for (int i = 0; i < 4; i++) w.push_back(c[8*i +: 8]);
    return w;
  endfunction
endpackage
