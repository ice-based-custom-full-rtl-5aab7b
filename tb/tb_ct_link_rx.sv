// tb_ct_link_rx: self-checking test of the link receiver.
// Feeds link-coded packets built by the reference encoder (with idle words
// inside a packet, a packet with one corrupted payload word, and a packet cut
// short by a new start) and checks the recovered payload, the last flag, the
// CRC error flag and the counters.
module tb_ct_link_rx;
  import ct_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic [31:0] rx_data = 32'h07070707;
  logic [3:0]  rx_ctrl = 4'hF;
  logic        m_valid, m_last, m_err;
  logic [31:0] m_data, pkt_count, crc_err_count;

  ct_link_rx dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  wq_t got[$];
  bit  got_err[$];
  wq_t cur;
  always @(posedge clk) if (rst_n && m_valid) begin
    cur.push_back(m_data);
    if (m_last) begin got.push_back(cur); got_err.push_back(m_err); cur = {}; end
  end

  task automatic drive(lq_t l, int idle_at);
    foreach (l[i]) begin
      if (i == idle_at) begin
        rx_ctrl <= 4'hF; rx_data <= 32'h07070707; @(posedge clk);
      end
      rx_ctrl <= l[i][35:32]; rx_data <= l[i][31:0];
      @(posedge clk);
    end
  endtask

  initial begin
    wq_t p[4];
    lq_t l;
    for (int k = 0; k < 4; k++) begin
      p[k] = {};
      for (int i = 0; i < 16 + 3 * k; i++) p[k].push_back($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    drive(link_encode(p[0]), -1);
    drive(link_encode(p[1]), 7);
    drive(link_encode(p[2], 1), -1);
    // broken packet: start, 5 words, then a new start
    l = link_encode(p[3]);
    for (int i = 0; i < 6; i++) begin rx_ctrl <= l[i][35:32]; rx_data <= l[i][31:0]; @(posedge clk); end
    drive(link_encode(p[0]), -1);
    repeat (8) @(posedge clk);
    check(got.size() == 5, $sformatf("packets out: %0d", got.size()));
    if (got.size() == 5) begin
      check(same(got[0], p[0]) && !got_err[0], "packet 0 intact");
      check(same(got[1], p[1]) && !got_err[1], "packet 1 with idle inside");
      check(got[2].size() == p[2].size() && got_err[2], "corrupted packet flagged");
      check(got_err[3], "packet cut by new start flagged");
      check(same(got[4], p[0]) && !got_err[4], "packet after broken one intact");
    end
    check(pkt_count == 4, "pkt_count");
    check(crc_err_count == 2, $sformatf("crc_err_count %0d", crc_err_count));
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
