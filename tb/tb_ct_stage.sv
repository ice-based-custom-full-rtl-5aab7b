// tb_ct_stage: self-checking test of one corner-turn stage at reduced size
// (4 lanes of 8 channels x 4 inputs, 2 output streams of 4 channels x 16
// inputs). Every output packet is compared word for word with the packet the
// reference model says the stage must build. Covered: the default channel
// split, skewed lanes, combining two frames into one packet, a missing lane
// (zeroed data, raised flags, status word), the bypass of a lane group
// (smaller output geometry), a reprogrammed table, a buffer overflow under
// back-pressure (dropped packet, status flag in the next packet), and that
// each output packet leaves at one word per clock.
module tb_ct_stage;
  import ct_tb_pkg::*;
  import ct_pkg::*;

  localparam int N_IN = 4, C_IN = 8, A_IN = 4, N_OUT = 2, C_OUT = 4;
  localparam int CRATE = 1, SLOT = 5, STG = 2;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  iq_t none;
  logic [N_IN-1:0] grp_en = '1;
  logic [3:0] frames_out = 4'd1;
  logic map_wr_en = 0;
  logic [2:0] map_wr_addr = '0;
  map_entry_t map_wr_data = '0;
  logic [N_IN-1:0] s_valid = '0, s_last = '0, s_err = '0;
  logic [N_IN-1:0][31:0] s_data = '0;
  logic [N_OUT-1:0] m_valid, m_last;
  logic [N_OUT-1:0] m_ready = '1;
  logic [N_OUT-1:0][31:0] m_data;
  logic [N_OUT-1:0][15:0] m_len;
  logic [31:0] lost_count, drop_count, fifo_ovf_count, buf_ovf_count, geom_err_count;
  logic [N_OUT-1:0][31:0] pkt_count;

  ct_stage #(.STAGE(STG), .N_IN(N_IN), .CH_GROUPS(1), .C_IN(C_IN), .A_IN(A_IN),
             .N_OUT(N_OUT), .C_OUT(C_OUT), .MAX_FRAMES(4), .FIFO_DEPTH(64), .TIMEOUT(30))
    dut (.clk, .rst_n, .crate(4'(CRATE)), .slot(4'(SLOT)), .grp_en, .frames_out,
         .map_wr_en, .map_wr_addr, .map_wr_data, .s_valid, .s_data, .s_last, .s_err,
         .m_valid, .m_ready, .m_data, .m_last, .m_len, .lost_count, .drop_count,
         .fifo_ovf_count, .buf_ovf_count, .geom_err_count, .pkt_count);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ---------------- lane driver
  logic [33:0] sched[N_IN][$];
  function automatic wq_t lane_pkt(int l, longint ts);
    return build_pkt(1, CRATE, l, SLOT, 1, range_q(0, C_IN), range_q(l * A_IN, A_IN), ts, 32'h0);
  endfunction
  task automatic send_frame(longint ts, int miss = -1);
    for (int l = 0; l < N_IN; l++) if (l != miss) begin
      wq_t q = lane_pkt(l, ts);
      repeat ((l * 3) % 5) sched[l].push_back('0);
      foreach (q[i]) sched[l].push_back({1'b1, i == q.size() - 1, q[i]});
    end
    begin
      int m = 0;
      for (int l = 0; l < N_IN; l++) if (sched[l].size() > m) m = sched[l].size();
      for (int l = 0; l < N_IN; l++) while (sched[l].size() < m + 4) sched[l].push_back('0);
    end
  endtask
  always @(posedge clk) if (rst_n)
    for (int l = 0; l < N_IN; l++) begin
      logic [33:0] e;
      e = sched[l].size() ? sched[l].pop_front() : '0;
      s_valid[l] <= e[33]; s_last[l] <= e[32]; s_data[l] <= e[31:0];
    end

  // ---------------- output capture
  wq_t got[N_OUT][$];
  int  dur[N_OUT][$];
  wq_t cur[N_OUT];
  int  t_first[N_OUT], stalls[N_OUT];
  always @(posedge clk) if (rst_n)
    for (int o = 0; o < N_OUT; o++) begin
      if (m_valid[o] && !m_ready[o] && cur[o].size() > 0) stalls[o]++;
      if (m_valid[o] && m_ready[o]) begin
        if (cur[o].size() == 0) begin t_first[o] = cyc; stalls[o] = 0; end
        cur[o].push_back(m_data[o]);
        if (m_last[o]) begin
          check(m_len[o] == 16'(cur[o].size()), "m_len matches packet length");
          got[o].push_back(cur[o]);
          dur[o].push_back(cyc - t_first[o] + 1 - stalls[o]);
          cur[o] = {};
        end
      end
    end

  task automatic expect_pkt(int o, int nf, iq_t chans, iq_t ants, longint ts,
                            logic [31:0] status, iq_t lost = {}, string tag = "");
    wq_t e = build_pkt(STG, CRATE, SLOT, o, nf, chans, ants, ts, status, lost);
    if (got[o].size() == 0) begin
      check(0, $sformatf("%s: no packet on stream %0d", tag, o));
      return;
    end
    begin
      wq_t g = got[o].pop_front();
      int d = dur[o].pop_front();
      check(same(g, e), $sformatf("%s: stream %0d content (got %0d words, want %0d)", tag, o, g.size(), e.size()));
      if (!same(g, e))
        for (int i = 0; i < e.size() && i < g.size(); i++)
          if (g[i] !== e[i]) begin $display("  word %0d got %h want %h", i, g[i], e[i]); break; end
      check(d == e.size(), $sformatf("%s: stream %0d one word per clock (%0d clocks)", tag, o, d));
    end
  endtask

  task automatic drain(int n = 150);
    repeat (n) @(posedge clk);
  endtask

  initial begin
    iq_t all_ants = range_q(0, 16);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // A: default split
    send_frame(10);
    drain();
    for (int o = 0; o < N_OUT; o++) expect_pkt(o, 1, range_q(o * C_OUT, C_OUT), all_ants, 10, 0, none, "A");
    // B: two frames per packet
    frames_out = 2;
    send_frame(11); send_frame(12);
    drain(250);
    for (int o = 0; o < N_OUT; o++) expect_pkt(o, 2, range_q(o * C_OUT, C_OUT), all_ants, 11, 0, none, "B");
    // C: lane 2 missing
    frames_out = 1;
    send_frame(13, 2);
    drain();
    for (int o = 0; o < N_OUT; o++)
      expect_pkt(o, 1, range_q(o * C_OUT, C_OUT), all_ants, 13, 32'h0001_0002, range_q(8, 4), "C");
    check(lost_count == 1, "lost_count");
    // D: lane group 2 bypassed
    grp_en = 4'b1011;
    send_frame(14, 2);
    drain();
    begin
      iq_t a = {0, 1, 2, 3, 4, 5, 6, 7, 12, 13, 14, 15};
      for (int o = 0; o < N_OUT; o++) expect_pkt(o, 1, range_q(o * C_OUT, C_OUT), a, 14, 0, none, "D");
    end
    grp_en = '1;
    // E: interleaved table: channel c -> stream c%2, slot c/2
    for (int c = 0; c < C_IN; c++) begin
      @(negedge clk);
      map_wr_en = 1; map_wr_addr = 3'(c);
      map_wr_data = '{valid: 1'b1, dest: 6'(c % 2), slot: 12'(c / 2)};
    end
    @(negedge clk); map_wr_en = 0;
    send_frame(15);
    drain();
    expect_pkt(0, 1, {0, 2, 4, 6}, all_ants, 15, 0, none, "E");
    expect_pkt(1, 1, {1, 3, 5, 7}, all_ants, 15, 0, none, "E");
    // F: back-pressure on stream 0 -> overflow
    m_ready[0] = 0;
    send_frame(16); drain(40); send_frame(17);
    drain(200);
    check(buf_ovf_count == 1, $sformatf("buffer overflow counted (%0d)", buf_ovf_count));
    m_ready[0] = 1;
    drain(60);
    send_frame(18);
    drain();
    expect_pkt(0, 1, {0, 2, 4, 6}, all_ants, 16, 0, none, "F0");
    expect_pkt(0, 1, {0, 2, 4, 6}, all_ants, 18, 32'h0000_0200, none, "F0-ovf");
    expect_pkt(1, 1, {1, 3, 5, 7}, all_ants, 16, 0, none, "F1");
    expect_pkt(1, 1, {1, 3, 5, 7}, all_ants, 17, 0, none, "F1");
    expect_pkt(1, 1, {1, 3, 5, 7}, all_ants, 18, 0, none, "F1");
    check(got[0].size() == 0 && got[1].size() == 0, "no extra packets");
    check(geom_err_count == 0 && fifo_ovf_count == 0, "no geometry or FIFO errors");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (30000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
