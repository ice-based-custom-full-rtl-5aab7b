// tb_ct_link_tx: self-checking test of the link transmitter.
// Sends three packets (one with a source gap in the middle), decodes the
// link words independently and checks the start and terminate codes, the
// payload, the CRC-32 (against a bit-serial reference that is first checked
// on the standard "123456789" vector) and the 4-word framing overhead.
module tb_ct_link_tx;
  import ct_tb_pkg::*;

  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic        s_valid = 0, s_ready, s_last = 0;
  logic [31:0] s_data = 0;
  logic [31:0] tx_data, pkt_count;
  logic [3:0]  tx_ctrl;

  ct_link_tx dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // capture link words
  logic [35:0] cap[$];
  always @(posedge clk) if (rst_n) cap.push_back({tx_ctrl, tx_data});

  task automatic send(wq_t w, int gap_at);
    int i = 0;
    while (i < w.size()) begin
      if (i == gap_at) begin
        s_valid <= 0;
        repeat (3) @(posedge clk);
        gap_at = -1;
      end
      s_valid <= 1; s_data <= w[i]; s_last <= (i == w.size() - 1);
      @(posedge clk);
      if (s_ready) i++;
    end
    s_valid <= 0; s_last <= 0;
  endtask

  initial begin
    wq_t p[3];
    logic [7:0] v[$];
    int sent_cycles;
    v = '{8'h31,8'h32,8'h33,8'h34,8'h35,8'h36,8'h37,8'h38,8'h39};
    check(crc_bytes(v) == 32'hCBF43926, "reference CRC vector");
    for (int k = 0; k < 3; k++) begin
      p[k] = {};
      for (int i = 0; i < 20 + 7 * k; i++) p[k].push_back($urandom);
    end
    repeat (3) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    send(p[0], -1);
    send(p[1], 6);
    send(p[2], -1);
    repeat (10) @(posedge clk);
    // decode
    begin
      int k = 0, i = 0;
      wq_t cur;
      bit in_f = 0;
      int n_idle_in = 0;
      while (i < cap.size()) begin
        logic [3:0] c;
        logic [31:0] d;
        c = cap[i][35:32];
        d = cap[i][31:0];
        if (!in_f) begin
          if (c == 4'h1) begin
            check(d == 32'h555555FB, "start word");
            in_f = 1; cur = {};
          end else check(c == 4'hF && d == 32'h07070707, "idle between packets");
        end else if (c == 4'h0) cur.push_back(d);
        else if (c == 4'hF && d[7:0] == 8'hFD) begin
          logic [31:0] crc;
          crc = cur.pop_back();
          check(k < 3 && same(cur, p[k]), $sformatf("payload of packet %0d", k));
          check(k < 3 && crc == crc_words(p[k]), $sformatf("CRC of packet %0d", k));
          check(d == 32'h070707FD, "terminate word");
          k++; in_f = 0;
        end else n_idle_in++;
        i++;
      end
      check(k == 3, "three packets decoded");
      check(n_idle_in == 3, "source gap filled with idles");
      check(pkt_count == 3, "packet counter");
      // overhead: packet 0 occupies payload + 4 link words from start to idle
      check(cap.size() >= 3 * 4 + 20 + 27 + 34, "link word count");
    end
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
