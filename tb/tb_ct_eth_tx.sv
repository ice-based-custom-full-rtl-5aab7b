// tb_ct_eth_tx: self-checking test of the transmit-only UDP/Ethernet MAC.
//
// The testbench sends packets of random length and content into ct_eth_tx
// and decodes the 32-bit XGMII-style output byte by byte (start code,
// preamble, SFD, frame bytes up to the terminate code). It checks, with its
// own bit-serial CRC and its own header arithmetic:
//   - preamble and SFD, destination/source MAC, EtherType 0x0800;
//   - IPv4 header: version/IHL, total length, protocol, addresses, and that
//     the header checksum sums to 0xFFFF;
//   - UDP ports and length, payload bytes in order, the Ethernet FCS;
//   - the inter-packet gap and the link time per frame (len + 17 words when
//     the source never pauses);
//   - that a pause of the source inside a packet is counted as an underrun.
module tb_ct_eth_tx;
  import ct_tb_pkg::*;

  logic        clk = 0, rst_n = 0;
  logic [47:0] src_mac = 48'h02_00_11_22_33_44, dst_mac = 48'h02_AA_BB_CC_DD_07;
  logic [31:0] src_ip = 32'h0A_00_01_05, dst_ip = 32'h0A_00_02_07;
  logic [15:0] src_port = 16'd41000, dst_port = 16'd5007;
  logic        s_valid = 0, s_last = 0;
  logic        s_ready;
  logic [31:0] s_data = 0;
  logic [15:0] s_len = 0;
  logic [31:0] txd;
  logic [3:0]  txc;
  logic [31:0] pkt_count, underrun_count;

  int checks = 0, failures = 0;

  ct_eth_tx dut (.*);

  always #2 clk = ~clk;

  task automatic check(bit ok, string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", msg); end
  endtask

  // ---------------------------------------------------------- capture
  logic [7:0] fbytes[$];     // bytes of the current frame after the SFD
  logic [7:0] pre[$];        // bytes between start and SFD
  int         start_cycle[$];
  int         frames_done = 0;
  logic [7:0] frames[$][$];
  int         cyc = 0;
  bit         in_frame = 0, seen_sfd = 0;
  int         idle_run = 0, min_gap = 1000;

  always @(posedge clk) begin
    cyc++;
    if (rst_n) begin
      for (int b = 0; b < 4; b++) begin
        logic [7:0] d;
        logic       c;
        d = txd[8*b +: 8];
        c = txc[b];
        if (!in_frame) begin
          if (c && d == 8'hFB) begin
            if (b != 0) begin checks++; failures++; $display("FAIL: start not in lane 0"); end
            in_frame = 1; seen_sfd = 0; pre.delete(); fbytes.delete();
            start_cycle.push_back(cyc);
            if (frames_done > 0 && idle_run < min_gap) min_gap = idle_run;
          end else if (c && d == 8'h07) begin
            idle_run++;
          end
        end else if (c) begin
          if (d == 8'hFD) begin
            in_frame = 0; idle_run = 0;
            frames.push_back(fbytes);
            frames_done++;
          end
        end else if (!seen_sfd) begin
          pre.push_back(d);
          if (d == 8'hD5) seen_sfd = 1;
        end else begin
          fbytes.push_back(d);
        end
      end
    end
  end

  // ---------------------------------------------------------- sending
  logic [31:0] sent[$][$];
  task automatic send(int len, int gap_at = -1);
    logic [31:0] w[$];
    for (int i = 0; i < len; i++) w.push_back($urandom);
    sent.push_back(w);
    for (int i = 0; i < len; i++) begin
      if (i == gap_at) begin
        s_valid <= 0;
        @(posedge clk);
      end
      s_valid <= 1; s_data <= w[i]; s_last <= (i == len - 1); s_len <= 16'(len);
      @(negedge clk);
      while (!s_ready) @(negedge clk);
      @(posedge clk);
    end
  endtask

  function automatic int be16(logic [7:0] f[$], int i);
    return {f[i], f[i+1]};
  endfunction

  task automatic check_frame(int n, logic [31:0] w[$], string tag);
    logic [7:0] f[$];
    logic [7:0] body[$];
    int sum;
    int plen;
    logic [31:0] fcs;
    f = frames[n];
    plen = 4 * w.size();
    check(f.size() == 42 + plen + 4, $sformatf("%s: frame length %0d want %0d", tag, f.size(), 46 + plen));
    if (f.size() != 42 + plen + 4) return;
    check({f[0],f[1],f[2],f[3],f[4],f[5]} == dst_mac, {tag, ": destination MAC"});
    check({f[6],f[7],f[8],f[9],f[10],f[11]} == src_mac, {tag, ": source MAC"});
    check(be16(f, 12) == 16'h0800, {tag, ": EtherType"});
    check(f[14] == 8'h45, {tag, ": IPv4 version/IHL"});
    check(be16(f, 16) == plen + 28, {tag, ": IP total length"});
    check(f[23] == 8'h11, {tag, ": IP protocol UDP"});
    check({f[26],f[27],f[28],f[29]} == src_ip && {f[30],f[31],f[32],f[33]} == dst_ip, {tag, ": IP addresses"});
    sum = 0;
    for (int i = 14; i < 34; i += 2) sum += be16(f, i);
    while (sum > 16'hFFFF) sum = (sum & 16'hFFFF) + (sum >> 16);
    check(sum == 16'hFFFF, $sformatf("%s: IP header checksum (sum %04x)", tag, sum));
    check(be16(f, 34) == src_port && be16(f, 36) == dst_port, {tag, ": UDP ports"});
    check(be16(f, 38) == plen + 8, {tag, ": UDP length"});
    begin
      bit ok;
      ok = 1;
      for (int i = 0; i < plen; i++) if (f[42 + i] != w[i/4][8*(i%4) +: 8]) ok = 0;
      check(ok, {tag, ": payload bytes"});
    end
    for (int i = 0; i < 42 + plen; i++) body.push_back(f[i]);
    fcs = crc_bytes(body);
    check({f[45+plen], f[44+plen], f[43+plen], f[42+plen]} == fcs, {tag, ": FCS"});
  endtask

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog (state %0d v %b r %b frames %0d sent %0d)", dut.state, s_valid, s_ready, frames_done, sent.size());
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int lens[5] = '{8, 1, 37, 151, 600};
    repeat (4) @(posedge clk);
    rst_n <= 1;
    repeat (4) @(posedge clk);
    for (int i = 0; i < 5; i++) send(lens[i]);
    // one frame with the source pausing inside the payload
    send(20, 7);
    s_valid <= 0;
    s_last  <= 0;
    repeat (40) @(posedge clk);
    check(frames_done == 6, $sformatf("frames seen %0d", frames_done));
    check(pkt_count == 6, "pkt_count");
    for (int i = 0; i < 5 && i < frames_done; i++) check_frame(i, sent[i], $sformatf("frame %0d", i));
    // preamble of the last frame: 55 x6 then D5 after FB
    check(pre.size() == 7 && pre[6] == 8'hD5 && pre[0] == 8'h55, "preamble and SFD");
    // back-to-back frames: link time per frame is len + 17 words
    for (int i = 0; i < 4; i++) begin
      int dt;
      dt = start_cycle[i+1] - start_cycle[i];
      check(dt == lens[i] + 17, $sformatf("frame %0d period %0d want %0d", i, dt, lens[i] + 17));
    end
    check(min_gap >= 3, $sformatf("idle words between frames %0d", min_gap));
    check(underrun_count == 1, $sformatf("underrun counted %0d", underrun_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
