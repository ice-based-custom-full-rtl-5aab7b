// tb_ct_frame_aligner: self-checking test of the frame alignment module.
// Four lanes deliver packets with different skews. Checked: lockstep output
// of matching packets, the header passed on, the wait for the last lane (in
// clocks), giving up on a missing lane after TIMEOUT clocks with the lane's
// words zeroed and flagged, discarding a stale packet and a bad-cookie
// packet, the per-lane error flag, and the FIFO overflow counter.
module tb_ct_frame_aligner;
  import ct_tb_pkg::*;
  import ct_pkg::*;

  localparam int N = 4, DEPTH = 32, TIMEOUT = 20, PL = 12;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;
  int cyc = 0;
  always @(posedge clk) cyc++;

  logic [N-1:0]       lane_en = '1, s_valid = '0, s_last = '0, s_err = '0;
  logic [N-1:0][31:0] s_data = '0;
  logic a_valid, a_sof, a_last;
  logic [N-1:0][31:0] a_data;
  logic [N-1:0] a_lost, a_err;
  ct_header_t a_hdr;
  logic [31:0] lost_count, drop_count, ovf_count;

  ct_frame_aligner #(.N(N), .DEPTH(DEPTH), .TIMEOUT(TIMEOUT)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // per-lane schedule of {valid, last, err, data}
  logic [34:0] sched[N][$];
  function automatic wq_t pkt(int lane, longint ts, bit badck = 0);
    wq_t q;
    q.push_back({16'h4000 | 16'(lane), 4'h1, 4'd4, badck ? 8'h00 : 8'hC5});
    q.push_back({4'h1, 4'd1, 12'd8, 12'd16});
    q.push_back({16'h0, 16'(ts >> 32)});
    q.push_back(32'(ts));
    for (int i = 0; i < PL; i++) q.push_back({8'(lane), 8'(ts), 16'(i)});
    return q;
  endfunction
  task automatic put(int lane, int skew, wq_t q, bit err_last = 0);
    repeat (skew) sched[lane].push_back('0);
    foreach (q[i]) sched[lane].push_back({1'b1, i == q.size() - 1, err_last && i == q.size() - 1, q[i]});
  endtask
  task automatic pad_all(int n);
    int m = 0;
    for (int l = 0; l < N; l++) if (sched[l].size() > m) m = sched[l].size();
    for (int l = 0; l < N; l++) while (sched[l].size() < m + n) sched[l].push_back('0);
  endtask

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < N; l++) begin
      logic [34:0] e;
      e = (sched[l].size() > 0) ? sched[l].pop_front() : '0;
      s_valid[l] <= e[34]; s_last[l] <= e[33]; s_err[l] <= e[32]; s_data[l] <= e[31:0];
    end
  end

  // capture aligned packets
  typedef struct { longint ts; logic [N-1:0] lost, err; wq_t w[N]; int sof_cyc; } apkt_t;
  apkt_t got[$];
  apkt_t cur;
  always @(posedge clk) if (rst_n && a_valid) begin
    if (a_sof) begin for (int l = 0; l < N; l++) cur.w[l] = {}; cur.err = 0; cur.ts = longint'(a_hdr.timestamp); cur.lost = a_lost; cur.sof_cyc = cyc; end
    for (int l = 0; l < N; l++) cur.w[l].push_back(a_data[l]);
    if (a_last) begin cur.err = a_err; got.push_back(cur); end
  end

  function automatic bit lane_ok(apkt_t p, int l, longint ts, bit lost);
    wq_t e = pkt(l, ts);
    if (p.w[l].size() != PL) return 0;
    for (int i = 0; i < PL; i++)
      if (p.w[l][i] !== (lost ? 32'd0 : e[4+i])) return 0;
    return 1;
  endfunction

  initial begin
    int t0;
    repeat (3) @(posedge clk);
    rst_n = 1;
    // 1: all lanes, skews 0,3,5,1
    put(0, 0, pkt(0, 100)); put(1, 3, pkt(1, 100)); put(2, 5, pkt(2, 100)); put(3, 1, pkt(3, 100));
    pad_all(10);
    // 2: lane 2 missing
    put(0, 0, pkt(0, 101)); put(1, 2, pkt(1, 101)); put(3, 0, pkt(3, 101), 1);
    pad_all(40);
    // 3: lane 1 sends a stale packet (100) before the right one (102)
    put(1, 0, pkt(1, 100));
    put(0, 2, pkt(0, 102)); put(1, 0, pkt(1, 102)); put(2, 1, pkt(2, 102)); put(3, 0, pkt(3, 102));
    pad_all(10);
    // 4: lane 3 has a bad cookie
    put(0, 0, pkt(0, 103)); put(1, 0, pkt(1, 103)); put(2, 0, pkt(2, 103)); put(3, 0, pkt(3, 103, 1));
    pad_all(40);
    t0 = cyc;
    wait (got.size() == 4);
    repeat (5) @(posedge clk);
    check(got.size() == 4, "four aligned packets");
    if (got.size() == 4) begin
      check(got[0].ts == 100 && got[0].lost == 0, "packet 100 complete");
      for (int l = 0; l < N; l++) check(lane_ok(got[0], l, 100, 0), $sformatf("packet 100 lane %0d", l));
      check(got[1].ts == 101 && got[1].lost == 4'b0100, "packet 101 lane 2 lost");
      for (int l = 0; l < N; l++) check(lane_ok(got[1], l, 101, l == 2), $sformatf("packet 101 lane %0d", l));
      check(got[1].err == 4'b1000, "packet 101 lane 3 error flag");
      check(got[2].ts == 102 && got[2].lost == 0, "packet 102 complete after stale drop");
      for (int l = 0; l < N; l++) check(lane_ok(got[2], l, 102, 0), $sformatf("packet 102 lane %0d", l));
      check(got[3].ts == 103 && got[3].lost == 4'b1000, "packet 103 bad cookie lane lost");
    end
    check(lost_count == 2, $sformatf("lost_count %0d", lost_count));
    check(drop_count == 2, $sformatf("drop_count %0d", drop_count));
    check(ovf_count == 0, "no overflow yet");
    // 5: overflow: one lane sends more than DEPTH words with the others silent
    lane_en = 4'b0001;
    begin
      wq_t big = pkt(0, 200);
      for (int i = 0; i < DEPTH; i++) big.push_back(32'hAA);
      put(0, 0, big);
    end
    // with only lane 0 enabled the packet is released without waiting
    repeat (DEPTH + 100) @(posedge clk);
    check(ovf_count == 0, "enabled single lane streams through without overflow");
    check(got.size() == 5 && got[4].lost == 0 && got[4].w[0].size() == PL + DEPTH, "single-lane packet");
    // now stop the consumer: lanes 0 and 1 enabled, lane 1 silent, lane 0 floods
    lane_en = 4'b0011;
    begin
      wq_t big = pkt(0, 300);
      for (int i = 0; i < 2 * DEPTH; i++) big.push_back(32'hBB);
      put(0, 0, big);
    end
    repeat (10) @(posedge clk);
    check(ovf_count == 0, "no overflow while the wait is short");
    repeat (3 * DEPTH) @(posedge clk);
    check(got.size() == 6 && got[5].lost == 4'b0010, "timeout releases lane 0 alone");
    // lane 1 stalls in the middle of its packet while lane 0 keeps sending:
    // the lockstep read stops and lane 0's FIFO overflows
    begin
      wq_t p1 = pkt(1, 400);
      wq_t p0 = pkt(0, 400);
      for (int i = 0; i < 6; i++) sched[1].push_back({1'b1, 1'b0, 1'b0, p1[i]});
      repeat (3 * DEPTH) sched[1].push_back('0);
      for (int i = 6; i < p1.size(); i++) sched[1].push_back({1'b1, i == p1.size() - 1, 1'b0, p1[i]});
      for (int i = 0; i < 2 * DEPTH; i++) p0.push_back(32'hCC);
      put(0, 0, p0);
    end
    repeat (5 * DEPTH) @(posedge clk);
    check(ovf_count > 0, $sformatf("FIFO overflow counted (%0d)", ovf_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
