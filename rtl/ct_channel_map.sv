// ct_channel_map: the programmable table of one corner-turn stage that
// decides which frequency channels are gathered into each output stream.
//
// The table has one entry per input channel key (see ct_stage for how the key
// is formed from lane and channel). An entry names the output stream (dest)
// and the position of the channel inside that stream (slot), or is invalid,
// in which case the channel is not forwarded. That tables are programmable and
// choose the channels of each output stream follows the design; the entry
// format and the default contents are this design's choice. After reset the
// table holds the contiguous split used by CHIME: key k goes to stream
// k / C_OUT, slot k % C_OUT, so stream s carries channels s*C_OUT ...
// s*C_OUT+C_OUT-1. Software rewrites any entry through the write port.
//
// Interface: one synchronous write port, NPORT combinational read ports.
module ct_channel_map
  import ct_pkg::*;
#(
  parameter int unsigned KEYS  = 1024,  // table entries
  parameter int unsigned N_OUT = 16,    // output streams of the stage
  parameter int unsigned C_OUT = 64,    // channels per output stream
  parameter int unsigned NPORT = 32     // read ports
)(
  input  logic                            clk,
  input  logic                            rst_n,
  input  logic                            wr_en,
  input  logic [$clog2(KEYS)-1:0]         wr_addr,
  input  map_entry_t                      wr_data,
  input  logic [NPORT-1:0][$clog2(KEYS)-1:0] rd_addr,
  output map_entry_t [NPORT-1:0]          rd_data
);

  map_entry_t table_q [KEYS];

  function automatic map_entry_t default_entry(input int unsigned k);
    map_entry_t e;
    e.valid = (k / C_OUT) < N_OUT;
    e.dest  = 6'(k / C_OUT);
    e.slot  = 12'(k % C_OUT);
    return e;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int k = 0; k < KEYS; k++) table_q[k] <= default_entry(k);
    end else if (wr_en) begin
      table_q[wr_addr] <= wr_data;
    end
  end

  always_comb
    for (int p = 0; p < NPORT; p++) rd_data[p] = table_q[rd_addr[p]];

endmodule
