// tb_ct_channel_selector: self-checking test of one channel selector at a
// tiny size: 2 input lanes of 4 channels x 2 antennas, selector OUT_ID 0 of 2,
// 2 channels per output packet, up to 2 frames per packet.
//
// The testbench plays the stage around the selector: it cuts each aligned
// input frame into beats (two data words, one flag word, one ADC word, the
// status word), decodes every element of a beat itself (frame, antenna,
// channel) and supplies the channel-table entries (channel c goes to stream
// c / 2 at slot c % 2). The output packet is compared with the reference
// model. Covered: one and two frames per packet, a lost lane (status bit and
// count), a lane error, a bypassed antenna group (smaller packet), an
// overflow under back-pressure with the overflow flag in the next packet,
// and the output rate of one word per clock.
module tb_ct_channel_selector;
  import ct_tb_pkg::*;
  import ct_pkg::*;

  localparam int N_IN = 2, A_IN = 2, C_IN = 4, C_OUT = 2, NE = 32, STG = 2;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  logic [N_IN-1:0]            grp_en = '1;
  logic [3:0]                 frames_out = 1;
  logic                       beat = 0, sof = 0, last = 0;
  seg_t                       seg = SEG_DATA;
  elem_t      [NE-1:0]        elem = '0;
  map_entry_t [0:0][NE-1:0]   ent = '0;
  logic       [N_IN-1:0][31:0] words = '0;
  logic       [N_IN-1:0]      lost = '0, err = '0;
  ct_header_t                 hdr = '0;
  logic                       m_valid, m_last;
  logic                       m_ready = 1;
  logic [31:0]                m_data, pkt_count, ovf_count;
  logic [15:0]                m_len;

  ct_channel_selector #(.STAGE(STG), .OUT_ID(0), .N_IN(N_IN), .CH_GROUPS(1), .A_IN(A_IN),
                        .C_OUT(C_OUT), .MAX_FRAMES(2), .NE(NE))
    dut (.clk, .rst_n, .crate(4'd2), .slot(4'd9), .grp_en, .frames_out, .beat, .sof, .last,
         .seg, .elem, .ent, .words, .lost, .err, .hdr, .m_valid, .m_ready, .m_data, .m_last,
         .m_len, .pkt_count, .ovf_count);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------ output capture
  wq_t got[$];
  wq_t cur;
  int  t0, stall;
  int  dur[$];
  always @(posedge clk) if (rst_n) begin
    if (m_valid && !m_ready && cur.size() > 0) stall++;
    if (m_valid && m_ready) begin
      if (cur.size() == 0) begin t0 = cyc; stall = 0; end
      cur.push_back(m_data);
      if (m_last) begin
        check(m_len == 16'(cur.size()), "m_len");
        got.push_back(cur);
        dur.push_back(cyc - t0 + 1 - stall);
        cur.delete();
      end
    end
  end

  // ------------------------------------------------ beat driver
  // one input frame (ts) of every lane; lane l holds antennas 2l, 2l+1
  task automatic send(longint ts, int lost_lane = -1, int err_lane = -1, logic [31:0] st = 0);
    wq_t lp[N_IN];
    for (int l = 0; l < N_IN; l++)
      lp[l] = build_pkt(1, 2, l, 9, 1, range_q(0, C_IN), range_q(A_IN * l, A_IN), ts, st);
    hdr = '0;
    hdr.nframes = 1; hdr.nfreq = 12'(C_IN); hdr.nant = 12'(A_IN); hdr.timestamp = ts;
    hdr.cookie = CT_COOKIE;
    for (int k = 0; k < 5; k++) begin
      @(negedge clk);
      beat = 1; sof = (k == 0); last = (k == 4);
      seg = k < 2 ? SEG_DATA : k == 2 ? SEG_FLAG : k == 3 ? SEG_ADC : SEG_STATUS;
      for (int j = 0; j < NE; j++) begin
        int idx, ch;
        idx = (k < 2 ? 4 * k : 0) + j;
        elem[j] = '0;
        ch = 0;
        if (seg == SEG_DATA && j < 4 || seg == SEG_FLAG && j < 8) begin
          elem[j].valid = 1;
          elem[j].f = 0;
          elem[j].a = 12'(idx % A_IN);
          ch = (idx / A_IN) % C_IN;
        end else if (seg == SEG_ADC && j < A_IN) begin
          elem[j].valid = 1;
          elem[j].a = 12'(j);
        end
        ent[0][j] = '{valid: 1'b1, dest: 6'(ch / C_OUT), slot: 12'(ch % C_OUT)};
      end
      for (int l = 0; l < N_IN; l++) begin
        words[l] = lp[l][4 + k];
        if (l == lost_lane) words[l] = seg == SEG_DATA || seg == SEG_STATUS ? '0 : '1;
        lost[l] = (l == lost_lane);
        err[l]  = (l == err_lane);
      end
    end
    @(negedge clk);
    beat = 0; sof = 0; last = 0; lost = '0; err = '0;
  endtask

  task automatic expect_pkt(int nf, iq_t ants, longint ts, logic [31:0] st, iq_t lost_ant, string tag);
    wq_t e, g;
    int d;
    e = build_pkt(STG, 2, 9, 0, nf, range_q(0, C_OUT), ants, ts, st, lost_ant);
    if (got.size() == 0) begin check(0, {tag, ": no packet"}); return; end
    g = got.pop_front();
    d = dur.pop_front();
    check(same(g, e), $sformatf("%s: content (%0d words, want %0d)", tag, g.size(), e.size()));
    if (!same(g, e))
      for (int i = 0; i < g.size() && i < e.size(); i++)
        if (g[i] !== e[i]) begin $display("  word %0d got %h want %h", i, g[i], e[i]); break; end
    check(d == e.size(), $sformatf("%s: one word per clock (%0d)", tag, d));
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    iq_t a4, none;
    a4 = range_q(0, 4);
    repeat (3) @(posedge clk);
    rst_n = 1;
    // one frame per packet; the input status words are merged
    send(100, -1, -1, 32'h0000_0001);
    repeat (30) @(posedge clk);
    expect_pkt(1, a4, 100, 32'h0000_0001, none, "single frame");
    // two frames per packet
    frames_out = 2;
    send(101); send(102);
    repeat (40) @(posedge clk);
    expect_pkt(2, a4, 101, 0, none, "two frames");
    frames_out = 1;
    // lane 1 lost, lane 0 with an error
    send(103, 1, 0);
    repeat (30) @(posedge clk);
    expect_pkt(1, a4, 103, 32'h0001_0000 | (1 << (ST_LOST + STG - 1)) | (1 << (ST_ERR + STG - 1)),
               range_q(2, 2), "lost lane and error");
    // antenna group 0 bypassed
    grp_en = 2'b10;
    send(104);
    repeat (30) @(posedge clk);
    expect_pkt(1, range_q(2, 2), 104, 0, none, "bypassed group");
    grp_en = '1;
    // back-pressure: second packet is dropped, third reports it
    m_ready = 0;
    send(105); send(106);
    repeat (10) @(posedge clk);
    check(ovf_count == 1, $sformatf("overflow counted (%0d)", ovf_count));
    m_ready = 1;
    repeat (30) @(posedge clk);
    send(107);
    repeat (30) @(posedge clk);
    expect_pkt(1, a4, 105, 0, none, "before overflow");
    expect_pkt(1, a4, 107, 1 << (ST_OVF + STG - 1), none, "after overflow");
    check(got.size() == 0, "no extra packet");
    check(pkt_count == 6, $sformatf("pkt_count %0d", pkt_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
