// tb_ct_channel_map: self-checking test of the programmable channel table.
// Checks the contiguous default split after reset (including keys beyond
// the last stream, which must be invalid), reprogramming through the write
// port, reads on several ports at once, and that a reset restores the default.
module tb_ct_channel_map;
  import ct_pkg::*;
  localparam int KEYS = 80, N_OUT = 8, C_OUT = 8, NPORT = 4;
  logic clk = 0, rst_n = 0;
  always #2 clk = ~clk;
  int checks = 0, failures = 0;

  logic wr_en = 0;
  logic [$clog2(KEYS)-1:0] wr_addr = '0;
  map_entry_t wr_data = '0;
  logic [NPORT-1:0][$clog2(KEYS)-1:0] rd_addr = '0;
  map_entry_t [NPORT-1:0] rd_data;

  ct_channel_map #(.KEYS(KEYS), .N_OUT(N_OUT), .C_OUT(C_OUT), .NPORT(NPORT)) dut (.*);

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  map_entry_t shadow[KEYS];

  task automatic check_all(string tag);
    for (int k = 0; k < KEYS; k += NPORT) begin
      for (int p = 0; p < NPORT; p++) rd_addr[p] = 7'((k + p) % KEYS);
      #1;
      for (int p = 0; p < NPORT; p++)
        check(rd_data[p] == shadow[(k + p) % KEYS], $sformatf("%s key %0d", tag, k + p));
    end
  endtask

  initial begin
    for (int k = 0; k < KEYS; k++)
      shadow[k] = '{valid: (k < N_OUT * C_OUT), dest: 6'(k / C_OUT), slot: 12'(k % C_OUT)};
    repeat (2) @(posedge clk);
    rst_n = 1;
    @(posedge clk);
    check_all("default");
    // reverse the channel order of stream 2 and disable key 5
    for (int c = 0; c < C_OUT; c++) begin
      @(negedge clk);
      wr_en = 1; wr_addr = 7'(2 * C_OUT + c);
      wr_data = '{valid: 1'b1, dest: 6'd2, slot: 12'(C_OUT - 1 - c)};
      shadow[2 * C_OUT + c] = wr_data;
    end
    @(negedge clk); wr_addr = 7'd5; wr_data = '0; shadow[5] = '0;
    @(negedge clk); wr_en = 0;
    check_all("programmed");
    rst_n = 0; #3; rst_n = 1;
    for (int k = 0; k < KEYS; k++)
      shadow[k] = '{valid: (k < N_OUT * C_OUT), dest: 6'(k / C_OUT), slot: 12'(k % C_OUT)};
    check_all("after reset");
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
