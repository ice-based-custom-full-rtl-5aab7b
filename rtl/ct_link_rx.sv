// ct_link_rx: receive side of the FPGA-to-FPGA link protocol (see
// ct_link_tx for the code words).
//
// The receiver hunts for a start word, then forwards payload words. Because
// the CRC word is only recognisable once the terminate word arrives, the two
// most recent link words are held back: when terminate arrives, the older
// one is the last payload word and the newer one is the CRC. The last
// payload word leaves with m_last=1 and m_err=1 if the CRC did not match.
// Packets with a bad CRC are not removed from the stream (that would take a
// whole-packet buffer per link); they are marked, and the corner-turn stage
// records the error in the status word that follows the data to the GPU
// nodes. This is this design's choice; the design only says that CRC errors
// are counted. Idle words inside a packet are skipped. A start word inside a
// packet closes the broken packet with m_err=1 when a word is held.
//
// Interface: rx_data/rx_ctrl one link word per clock; output m_valid/m_data/
// m_last/m_err has no back-pressure (a serial link cannot be stalled).
// Latency: a payload word leaves three clocks after it arrives at most.
module ct_link_rx
  import ct_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [31:0] rx_data,
  input  logic [3:0]  rx_ctrl,
  output logic        m_valid,
  output logic [31:0] m_data,
  output logic        m_last,
  output logic        m_err,
  output logic [31:0] pkt_count,     // packets received
  output logic [31:0] crc_err_count  // packets with a CRC error or broken framing
);

  logic        in_frame;
  logic [1:0]  held;
  logic [31:0] h0, h1, crc;

  wire is_start = (rx_ctrl == 4'h1) && (rx_data[7:0] == XG_START);
  wire is_term  = (rx_ctrl == 4'hF) && (rx_data[7:0] == XG_TERM);
  wire is_data  = (rx_ctrl == 4'h0);
  wire [31:0] crc_next = crc32_word(crc, h0);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      in_frame      <= 1'b0;
      held          <= '0;
      h0            <= '0;
      h1            <= '0;
      crc           <= '1;
      m_valid       <= 1'b0;
      m_data        <= '0;
      m_last        <= 1'b0;
      m_err         <= 1'b0;
      pkt_count     <= '0;
      crc_err_count <= '0;
    end else begin
      m_valid <= 1'b0;
      m_last  <= 1'b0;
      m_err   <= 1'b0;
      if (is_start) begin
        if (in_frame) begin
          crc_err_count <= crc_err_count + 1;
          if (held != 0) begin
            m_valid <= 1'b1;
            m_data  <= h0;
            m_last  <= 1'b1;
            m_err   <= 1'b1;
          end
        end
        in_frame <= 1'b1;
        held     <= '0;
        crc      <= '1;
      end else if (in_frame) begin
        if (is_data) begin
          if (held == 2'd2) begin
            m_valid <= 1'b1;
            m_data  <= h0;
            crc     <= crc_next;
            h0      <= h1;
            h1      <= rx_data;
          end else if (held == 2'd1) begin
            h1   <= rx_data;
            held <= 2'd2;
          end else begin
            h0   <= rx_data;
            held <= 2'd1;
          end
        end else if (is_term) begin
          in_frame <= 1'b0;
          held     <= '0;
          if (held == 2'd2) begin
            m_valid   <= 1'b1;
            m_data    <= h0;
            m_last    <= 1'b1;
            m_err     <= (~crc_next != h1);
            pkt_count <= pkt_count + 1;
            if (~crc_next != h1) crc_err_count <= crc_err_count + 1;
          end else begin
            crc_err_count <= crc_err_count + 1;
          end
        end
      end
    end
  end

endmodule
