// tb_udp_tx: two payload sources with different data both keep requesting.
// The MAC side takes bytes with a random ready. Each frame that comes out
// is compared byte for byte with a reference frame built by the reference
// package (Ethernet/IPv4/UDP headers, independently computed IP checksum,
// identification counting from 0) around the expected source's payload.
// Also checks: nothing is sent before the host address is known, sources
// are served alternately, m_last marks byte 1065, and pkt_count.
module tb_udp_tx;
  import digitizer_pkg::*;
  import eth_ref_pkg::*;
  logic clk = 0, rst = 1;
  always #4 clk = ~clk;
  endpoint_t local_ep, host_ep;
  logic host_valid = 0;
  logic [1:0] src_req, src_gnt, src_rd;
  logic [1:0][7:0] src_data;
  logic m_valid, m_ready, m_last;
  logic [7:0] m_data;
  logic [31:0] pkt_count;

  udp_tx #(.NSRC(2)) dut (.*);

  int checks = 0, failures = 0;
  task automatic check(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; if (failures < 10) $display("FAIL: %s", msg); end
  endtask

  // source s sends bytes (s*77 + i*5) mod 256 where i counts over all its packets
  int sent_b[2] = '{0, 0};
  int active[2] = '{0, 0};
  int gnt_order[$];
  assign src_req = 2'b11;
  always_comb for (int s = 0; s < 2; s++) src_data[s] = 8'(s * 77 + sent_b[s] * 5);
  always @(posedge clk) if (!rst) begin
    for (int s = 0; s < 2; s++) begin
      if (src_gnt[s]) gnt_order.push_back(s);
      if (src_rd[s]) sent_b[s] <= sent_b[s] + 1;
    end
  end

  always @(negedge clk) m_ready = ($urandom % 4 != 0);

  bq_t frames[$], cur;
  int last_pos[$];
  always @(posedge clk) if (!rst && m_valid && m_ready) begin
    cur.push_back(m_data);
    if (m_last) begin frames.push_back(cur); last_pos.push_back(cur.size() - 1); cur = {}; end
  end

  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int np[2];
    local_ep = '{mac: 48'h02_00_00_12_34_56, ip: 32'hC0A8_010A, port: 16'd5000};
    host_ep  = '{mac: 48'hA0_B1_C2_D3_E4_F5, ip: 32'hC0A8_0164, port: 16'd6001};
    repeat (3) @(posedge clk);
    rst <= 0;
    repeat (50) @(posedge clk);
    check(frames.size() == 0 && cur.size() == 0, "silent without host address");
    host_valid = 1;
    wait (frames.size() == 4);
    np = '{0, 0};
    for (int f = 0; f < 4; f++) begin
      int s;
      bq_t pl, ref_f;
      s = gnt_order[f];
      pl = {};
      check(s == (f % 2), $sformatf("frame %0d from source %0d", f, s));
      for (int i = 0; i < 1024; i++) pl.push_back(8'(s * 77 + (np[s] * 1024 + i) * 5));
      np[s]++;
      ref_f = udp_frame(host_ep.mac, local_ep.mac, local_ep.ip, host_ep.ip,
                        local_ep.port, host_ep.port, 16'(f), pl);
      check(frames[f].size() == 1066, $sformatf("frame %0d size %0d", f, frames[f].size()));
      for (int i = 0; i < 1066; i++)
        check(frames[f][i] == ref_f[i], $sformatf("frame %0d byte %0d %h exp %h", f, i, frames[f][i], ref_f[i]));
      check(last_pos[f] == 1065, "last position");
    end
    check(pkt_count >= 4, "pkt_count");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
