// tb_ice_ct_top: end-to-end test of one motherboard FPGA's corner-turn, at
// the full default size (16 channelizers of 1024 channels, 16-slot mesh,
// 4 inter-crate links, 8 GPU links), with no parameter overridden.
//
// The board under test sits in crate 0, slot 5. The testbench plays the rest
// of the system: it drives the 16 channelizer streams of this board, the 15
// backplane links from the other boards of the crate (each carrying what
// that board's stage 1 sends to slot 5), and the 4 inter-crate links from
// slot 5 of crate 1 (carrying that board's stage-2 streams 4-7, which hold
// channels 0-31 of the slot because crate 1's table swaps the halves). Remote
// packets are started when the matching local packet appears inside the
// board, with a different skew per link, as the neighbours would deliver
// them.
//
// Every GPU Ethernet frame is decoded (preamble, FCS, UDP payload) and its
// payload compared word for word with the packet the reference model
// predicts; the backplane and inter-crate transmit links are decoded and
// compared as well. Phases:
//   P1  dual-crate mode, 4 frames per GPU packet, frames at the nominal
//       2.56 us (615 clocks at 240 MHz): no packet may be lost.
//   P2  dual-crate mode, 1 frame per packet: a backplane link missing for one
//       frame (lost lane: zero data, flags set, status bit and count), a
//       backplane packet with a CRC error (error bit in the status word).
//   P3  mode switch to single crate (stage 3 bypassed), then frames sent
//       twice as fast as the GPU links can carry them (buffer overflow).
//   P4  mode switch to single board (backplane lanes bypassed).
// Each mechanism is counted (skewed alignment, lost lane, CRC error, frame
// combining, stall, overflow, mode switch, bypass) and one that never
// happened is a failure.
module tb_ice_ct_top;
  import ct_tb_pkg::*;
  import ct_pkg::*;

  localparam int SLOTS = 16, INPUTS = 16, CHANNELS = 1024, QL = 4, GL = 8;
  localparam int S = 5;            // slot of the board under test
  localparam int PERIOD = 615;     // 2.56 us at 240 MHz

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0, cyc = 0;
  always @(posedge clk) cyc++;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // ------------------------------------------------------------ DUT
  logic [1:0]             mode = 2;
  logic [2:0][3:0]        frames_out = {4'd4, 4'd1, 4'd1};
  logic [1:0]             map_wr_stage = 0;
  logic                   map_wr_en = 0;
  logic [9:0]             map_wr_addr = 0;
  map_entry_t             map_wr_data = '0;
  logic [GL-1:0][47:0]    gpu_mac;
  logic [GL-1:0][31:0]    gpu_ip;
  logic [INPUTS-1:0]      chan_valid = '0, chan_last = '0;
  logic [INPUTS-1:0][31:0] chan_data = '0;
  logic [SLOTS-1:0][31:0] mesh_txd, mesh_rxd;
  logic [SLOTS-1:0][3:0]  mesh_txc, mesh_rxc;
  logic [QL-1:0][31:0]    qsfp_txd, qsfp_rxd;
  logic [QL-1:0][3:0]     qsfp_txc, qsfp_rxc;
  logic [GL-1:0][31:0]    gpu_txd;
  logic [GL-1:0][3:0]     gpu_txc;
  logic [31:0]            crc_err_count;
  logic [2:0][31:0]       lost_count, buf_ovf_count, fifo_ovf_count;
  logic [GL-1:0][31:0]    gpu_pkt_count;

  initial
    for (int g = 0; g < GL; g++) begin
      gpu_mac[g] = 48'h02_00_00_00_10_00 + 48'(g);
      gpu_ip[g]  = 32'h0A_00_10_00 + 32'(g);
    end

  ice_ct_top dut (
    .clk, .rst_n, .mode, .crate_id(4'd0), .slot_id(4'(S)), .frames_out,
    .map_wr_stage, .map_wr_en, .map_wr_addr, .map_wr_data,
    .src_mac(48'h02_00_00_00_00_05), .src_ip(32'h0A_00_00_05), .udp_port(16'd5000),
    .gpu_mac, .gpu_ip, .chan_valid, .chan_data, .chan_last,
    .mesh_txd, .mesh_txc, .mesh_rxd, .mesh_rxc,
    .qsfp_txd, .qsfp_txc, .qsfp_rxd, .qsfp_rxc,
    .gpu_txd, .gpu_txc, .crc_err_count, .lost_count, .buf_ovf_count,
    .fifo_ovf_count, .gpu_pkt_count
  );

  // ---------------------------------------------------- mechanism counters
  int n_skew = 0, n_lost = 0, n_crc = 0, n_combine = 0, n_stall = 0;
  int n_ovf = 0, n_mode = 0, n_bypass3 = 0, n_bypass_board = 0;

  // ---------------------------------------------------- reference helpers
  function automatic iq_t crate_ants(int crate);
    iq_t q;
    for (int s = 0; s < SLOTS; s++)
      for (int i = 0; i < INPUTS; i++) q.push_back(gin(crate, s, i));
    return q;
  endfunction
  function automatic iq_t board_ants(int crate, int slot);
    iq_t q;
    for (int i = 0; i < INPUTS; i++) q.push_back(gin(crate, slot, i));
    return q;
  endfunction
  function automatic iq_t cat_q(iq_t a, iq_t b);
    iq_t q;
    q = a;
    foreach (b[i]) q.push_back(b[i]);
    return q;
  endfunction

  // ---------------------------------------------------- drivers
  logic [33:0] csched[INPUTS][$];
  lq_t         msched[SLOTS];
  lq_t         qsched[QL];

  always @(posedge clk) if (rst_n) begin
    for (int l = 0; l < INPUTS; l++) begin
      logic [33:0] e;
      e = csched[l].size() ? csched[l].pop_front() : '0;
      chan_valid[l] <= e[33]; chan_last[l] <= e[32]; chan_data[l] <= e[31:0];
    end
    for (int l = 0; l < SLOTS; l++) begin
      logic [35:0] e;
      e = msched[l].size() ? msched[l].pop_front() : {4'hF, 32'h07070707};
      mesh_rxc[l] <= e[35:32]; mesh_rxd[l] <= e[31:0];
    end
    for (int k = 0; k < QL; k++) begin
      logic [35:0] e;
      e = qsched[k].size() ? qsched[k].pop_front() : {4'hF, 32'h07070707};
      qsfp_rxc[k] <= e[35:32]; qsfp_rxd[k] <= e[31:0];
    end
  end
  initial begin
    mesh_rxc = '1; mesh_rxd = {SLOTS{32'h07070707}};
    qsfp_rxc = '1; qsfp_rxd = {QL{32'h07070707}};
  end

  // channelizer packets of one frame, lanes skewed by up to 12 clocks
  task automatic send_chan(longint ts);
    for (int i = 0; i < INPUTS; i++) begin
      wq_t q;
      q = build_pkt(0, 0, S, i, 1, range_q(0, CHANNELS), '{gin(0, S, i)}, ts, 0);
      repeat ((i * 5) % 13) csched[i].push_back('0);
      foreach (q[k]) csched[i].push_back({1'b1, k == q.size() - 1, q[k]});
    end
    n_skew++;
  endtask

  // plan of what the neighbours send for each frame
  typedef struct { longint ts; int miss; int crc; } plan_t;
  plan_t mesh_plan[$];
  plan_t qsfp_plan[$];

  // local stage-2 lane starts a packet -> the 15 other boards send theirs
  logic s2_in_busy = 0;
  always @(posedge clk) if (rst_n && dut.s2_in_valid[S]) begin
    if (!s2_in_busy && mesh_plan.size()) begin
      plan_t p;
      p = mesh_plan.pop_front();
      for (int l = 0; l < SLOTS; l++) if (l != S && l != p.miss) begin
        wq_t q;
        lq_t e;
        q = build_pkt(1, 0, l, S, 1, range_q(S * 64, 64), board_ants(0, l), p.ts, 0);
        e = link_encode(q, l == p.crc);
        repeat ((l * 7) % 23) msched[l].push_back({4'hF, 32'h07070707});
        foreach (e[k]) msched[l].push_back(e[k]);
      end
      if (p.miss >= 0) n_lost++;
      if (p.crc >= 0)  n_crc++;
    end
    s2_in_busy <= !dut.s2_in_last[S];
  end

  // local stage-3 lane 0 starts a packet -> crate 1 sends its stage-2 streams 4-7
  logic s3_in_busy = 0;
  always @(posedge clk) if (rst_n && dut.s3_in_valid[0]) begin
    if (!s3_in_busy && qsfp_plan.size()) begin
      plan_t p;
      p = qsfp_plan.pop_front();
      for (int k = 0; k < QL; k++) begin
        wq_t q;
        lq_t e;
        q = build_pkt(2, 1, S, QL + k, 1, range_q(S * 64 + 8 * k, 8), crate_ants(1), p.ts, 0);
        e = link_encode(q);
        repeat (k * 9) qsched[k].push_back({4'hF, 32'h07070707});
        foreach (e[i]) qsched[k].push_back(e[i]);
      end
    end
    s3_in_busy <= !dut.s3_in_last[0];
  end

  // ---------------------------------------------------- link monitors
  // backplane / inter-crate transmit links: link code, CRC checked here
  wq_t mesh_got[SLOTS][$];
  wq_t qsfp_got[QL][$];
  wq_t mcur[SLOTS], qcur[QL];
  bit  min_[SLOTS], qin_[QL];
  task automatic link_end(wq_t cur, string tag, output wq_t body);
    logic [31:0] crc;
    crc = cur[cur.size() - 1];
    body = cur;
    void'(body.pop_back());
    check(crc == crc_words(body), {tag, ": link CRC"});
  endtask
  always @(posedge clk) if (rst_n) begin
    for (int s = 0; s < SLOTS; s++) if (s != S) begin
      if (mesh_txc[s] == 4'h1 && mesh_txd[s] == 32'h555555FB) begin
        min_[s] = 1; mcur[s].delete();
      end else if (min_[s] && mesh_txc[s] == 4'h0) begin
        mcur[s].push_back(mesh_txd[s]);
      end else if (min_[s]) begin
        wq_t body;
        min_[s] = 0;
        link_end(mcur[s], "mesh tx", body);
        mesh_got[s].push_back(body);
      end
    end
    for (int k = 0; k < QL; k++) begin
      if (qsfp_txc[k] == 4'h1 && qsfp_txd[k] == 32'h555555FB) begin
        qin_[k] = 1; qcur[k].delete();
      end else if (qin_[k] && qsfp_txc[k] == 4'h0) begin
        qcur[k].push_back(qsfp_txd[k]);
      end else if (qin_[k]) begin
        wq_t body;
        qin_[k] = 0;
        link_end(qcur[k], "qsfp tx", body);
        qsfp_got[k].push_back(body);
      end
    end
  end

  // GPU links: Ethernet frames, FCS checked, UDP payload kept
  wq_t gpu_got[GL][$];
  logic [7:0] gbytes[GL][$];
  bit gin_[GL], gsfd[GL];
  always @(posedge clk) if (rst_n)
    for (int g = 0; g < GL; g++)
      for (int b = 0; b < 4; b++) begin
        logic [7:0] d;
        logic       c;
        d = gpu_txd[g][8*b +: 8];
        c = gpu_txc[g][b];
        if (!gin_[g]) begin
          if (c && d == 8'hFB) begin gin_[g] = 1; gsfd[g] = 0; gbytes[g].delete(); end
        end else if (c) begin
          if (d == 8'hFD) begin
            logic [7:0] body[$];
            logic [31:0] fcs;
            wq_t w;
            int n;
            gin_[g] = 0;
            body.delete();
            w.delete();
            n = gbytes[g].size();
            for (int i = 0; i < n - 4; i++) body.push_back(gbytes[g][i]);
            fcs = {gbytes[g][n-1], gbytes[g][n-2], gbytes[g][n-3], gbytes[g][n-4]};
            check(fcs == crc_bytes(body), $sformatf("gpu %0d: FCS", g));
            check({body[36], body[37]} == 16'(5000 + g), $sformatf("gpu %0d: UDP port", g));
            for (int i = 42; i + 3 < n - 4; i += 4)
              w.push_back({body[i+3], body[i+2], body[i+1], body[i]});
            gpu_got[g].push_back(w);
          end
        end else if (!gsfd[g]) begin
          if (d == 8'hD5) gsfd[g] = 1;
        end else begin
          gbytes[g].push_back(d);
        end
      end

  // stalls: an output stream of stage 2 waiting for its link
  always @(posedge clk) if (rst_n)
    for (int k = 0; k < 8; k++)
      if (dut.s2_valid[k] && !dut.s2_ready[k]) n_stall++;

  // ---------------------------------------------------- comparison
  // which: 0 gpu, 1 mesh, 2 qsfp
  function automatic bit pop_got(int which, int i, output wq_t g);
    if (which == 0 && gpu_got[i].size())  begin g = gpu_got[i].pop_front();  return 1; end
    if (which == 1 && mesh_got[i].size()) begin g = mesh_got[i].pop_front(); return 1; end
    if (which == 2 && qsfp_got[i].size()) begin g = qsfp_got[i].pop_front(); return 1; end
    return 0;
  endfunction
  task automatic cmp(int which, int i, wq_t exp, string tag, bit status_only = 0);
    wq_t g;
    if (!pop_got(which, i, g)) begin
      check(0, {tag, ": packet missing"});
      return;
    end
    if (status_only) begin
      check(g.size() == exp.size() && g[g.size()-1] == exp[exp.size()-1],
            $sformatf("%s: length %0d/%0d, status %h want %h", tag, g.size(), exp.size(),
                      g[g.size()-1], exp[exp.size()-1]));
      return;
    end
    check(same(g, exp), $sformatf("%s: content (%0d words, want %0d)", tag, g.size(), exp.size()));
    if (!same(g, exp))
      for (int k = 0; k < g.size() && k < exp.size(); k++)
        if (g[k] !== exp[k]) begin $display("  word %0d got %h want %h", k, g[k], exp[k]); break; end
  endtask

  task automatic wait_idle(int n);
    repeat (n) @(posedge clk);
  endtask

  // frame sender: channelizers now, neighbours when the local packets appear
  task automatic frame(longint ts, bit pair, int miss = -1, int crc = -1, int gap = PERIOD);
    plan_t p;
    p.ts = ts; p.miss = miss; p.crc = crc;
    send_chan(ts);
    if (mode != 2'd0) mesh_plan.push_back(p);
    if (pair) qsfp_plan.push_back(p);
    wait_idle(gap);
  endtask

  // ---------------------------------------------------- watchdog
  initial begin
    repeat (60000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog at cycle %0d", cyc);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // ---------------------------------------------------- test sequence
  initial begin
    iq_t a0, a1, a01, none;
    a0  = crate_ants(0);
    a1  = crate_ants(1);
    a01 = cat_q(a0, a1);
    repeat (4) @(posedge clk);
    rst_n = 1;
    repeat (4) @(posedge clk);

    // the paired crate (crate 1) would get the swapped stage-2 table; this
    // board (crate 0) keeps the default one

    // ======== P1: dual crate, 4 frames per GPU packet, nominal frame rate
    for (int t = 0; t < 4; t++) frame(t, 1);
    wait_idle(4000);
    for (int g = 0; g < GL; g++)
      cmp(0, g, build_pkt(3, 0, S, g, 4, range_q(S * 64 + 4 * g, 4), a01, 0, 0),
          $sformatf("P1 gpu %0d", g));
    n_combine++;
    for (int s = 0; s < SLOTS; s++) if (s != S)
      for (int t = 0; t < 4; t++)
        cmp(1, s, build_pkt(1, 0, S, s, 1, range_q(s * 64, 64), board_ants(0, S), t, 0),
            $sformatf("P1 mesh tx %0d ts %0d", s, t));
    for (int k = 0; k < QL; k++)
      for (int t = 0; t < 4; t++)
        cmp(2, k, build_pkt(2, 0, S, QL + k, 1, range_q(S * 64 + 32 + 8 * k, 8), a0, t, 0),
            $sformatf("P1 qsfp tx %0d ts %0d", k, t));
    check(buf_ovf_count == '0 && fifo_ovf_count == '0, "P1: no overflow at the nominal rate");
    check(lost_count == '0 && crc_err_count == 0, "P1: nothing lost");

    // ======== P2: 1 frame per packet; lost lane, CRC error
    frames_out = {4'd1, 4'd1, 4'd1};
    frame(8, 1, 2, -1, 700);
    frame(9, 1, -1, 3, 700);
    frame(10, 1, -1, -1, 700);
    wait_idle(2500);
    for (int g = 0; g < GL; g++) begin
      cmp(0, g, build_pkt(3, 0, S, g, 1, range_q(S * 64 + 4 * g, 4), a01, 8,
                                32'h0004_0002, board_ants(0, 2)), $sformatf("P2 lost gpu %0d", g));
      cmp(0, g, build_pkt(3, 0, S, g, 1, range_q(S * 64 + 4 * g, 4), a01, 9, 32'h0000_0020),
          $sformatf("P2 crc gpu %0d", g), 1);
      cmp(0, g, build_pkt(3, 0, S, g, 1, range_q(S * 64 + 4 * g, 4), a01, 10, 0),
          $sformatf("P2 clean gpu %0d", g));
    end
    check(lost_count[1] == 1, $sformatf("P2: stage-2 lost lane counted (%0d)", lost_count[1]));
    check(crc_err_count == 1, $sformatf("P2: CRC error counted (%0d)", crc_err_count));
    for (int s = 0; s < SLOTS; s++) mesh_got[s].delete();
    for (int k = 0; k < QL; k++) qsfp_got[k].delete();

    // ======== P3: single crate, stage 3 bypassed
    mode = 2'd1;
    n_mode++;
    frame(12, 0, -1, -1, 700);
    frame(13, 0, -1, -1, 700);
    wait_idle(1500);
    for (int g = 0; g < GL; g++)
      for (int t = 12; t < 14; t++)
        cmp(0, g, build_pkt(2, 0, S, g, 1, range_q(S * 64 + 8 * g, 8), a0, t, 0),
            $sformatf("P3 gpu %0d ts %0d", g, t));
    n_bypass3++;
    check(qsfp_got[0].size() == 0, "P3: inter-crate links silent");
    // frames twice as fast as the GPU links drain them
    for (int t = 14; t < 18; t++) frame(t, 0, -1, -1, 310);
    wait_idle(3000);
    // one more frame at the normal rate carries a still pending overflow flag
    frame(18, 0, -1, -1, 700);
    wait_idle(1000);
    check(buf_ovf_count[1] > 0, $sformatf("P3: buffer overflow counted (%0d)", buf_ovf_count[1]));
    if (buf_ovf_count[1] > 0) n_ovf++;
    begin
      bit seen;
      seen = 0;
      for (int g = 0; g < GL; g++)
        foreach (gpu_got[g][i]) if (gpu_got[g][i][gpu_got[g][i].size()-1][ST_OVF + 1]) seen = 1;
      check(seen, "P3: overflow reported in a status word");
    end
    for (int g = 0; g < GL; g++) gpu_got[g].delete();

    // ======== P4: single board, backplane lanes bypassed
    mode = 2'd0;
    n_mode++;
    frame(20, 0, -1, -1, 700);
    wait_idle(1500);
    for (int g = 0; g < GL; g++)
      cmp(0, g, build_pkt(2, 0, S, g, 1, range_q(S * 64 + 8 * g, 8), board_ants(0, S), 20, 0),
          $sformatf("P4 gpu %0d", g));
    n_bypass_board++;

    // ======== mechanisms
    $display("mechanisms: skew=%0d lost=%0d crc=%0d combine=%0d stall=%0d overflow=%0d mode_switch=%0d bypass_stage3=%0d bypass_board=%0d",
             n_skew, n_lost, n_crc, n_combine, n_stall, n_ovf, n_mode, n_bypass3, n_bypass_board);
    check(n_skew > 0, "mechanism: skewed alignment");
    check(n_lost > 0, "mechanism: lost lane");
    check(n_crc > 0, "mechanism: CRC error");
    check(n_combine > 0, "mechanism: frame combining");
    check(n_stall > 0, "mechanism: stall");
    check(n_ovf > 0, "mechanism: overflow");
    check(n_mode > 0, "mechanism: mode switch");
    check(n_bypass3 > 0, "mechanism: stage-3 bypass");
    check(n_bypass_board > 0, "mechanism: single-board bypass");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
