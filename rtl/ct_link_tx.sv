// ct_link_tx: transmit side of the FPGA-to-FPGA serial link protocol used
// by the backplane full-mesh links and the inter-crate QSFP+ links.
//
// The protocol is a stripped-down 10G Ethernet: it knows only a start-of-frame
// code, an end-of-frame (terminate) code, idle codes and a CRC-32 word that
// protects the payload. This follows the design; the exact code words are this
// design's choice and use the XGMII character values:
//   idle      : ctrl=4'hF, data=07070707
//   start     : ctrl=4'h1, data=555555FB (start in the lowest byte)
//   payload   : ctrl=4'h0, one packet word per link word
//   CRC       : ctrl=4'h0, complemented IEEE CRC-32 over the payload bytes
//   terminate : ctrl=4'hF, data=070707FD
// After a terminate at least one idle word follows. If the source has no word
// ready in the middle of a packet an idle word is sent and skipped by the
// receiver. The 64b/66b coding and serialisation of the transceiver are not
// part of this block.
//
// Interface: AXI-Stream style input (s_valid/s_ready/s_data/s_last); s_ready
// is high only while the payload is being sent. Output is registered: one
// link word per clock. Overhead per packet: start, CRC, terminate, idle = 4
// words.
module ct_link_tx
  import ct_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic        s_valid,
  output logic        s_ready,
  input  logic [31:0] s_data,
  input  logic        s_last,
  output logic [31:0] tx_data,
  output logic [3:0]  tx_ctrl,
  output logic [31:0] pkt_count     // packets sent
);

  typedef enum logic [2:0] {S_IDLE, S_DATA, S_CRC, S_TERM, S_IPG} state_t;
  state_t state;
  logic [31:0] crc;

  assign s_ready = (state == S_DATA);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      crc       <= '1;
      tx_data   <= XG_IDLE_WORD;
      tx_ctrl   <= 4'hF;
      pkt_count <= '0;
    end else begin
      unique case (state)
        S_IDLE, S_IPG: begin
          if (s_valid && state == S_IDLE) begin
            tx_data <= XG_START_WORD;
            tx_ctrl <= 4'h1;
            crc     <= '1;
            state   <= S_DATA;
          end else begin
            tx_data <= XG_IDLE_WORD;
            tx_ctrl <= 4'hF;
            state   <= S_IDLE;
          end
        end
        S_DATA: begin
          if (s_valid) begin
            tx_data <= s_data;
            tx_ctrl <= 4'h0;
            crc     <= crc32_word(crc, s_data);
            if (s_last) state <= S_CRC;
          end else begin
            tx_data <= XG_IDLE_WORD;
            tx_ctrl <= 4'hF;
          end
        end
        S_CRC: begin
          tx_data <= ~crc;
          tx_ctrl <= 4'h0;
          state   <= S_TERM;
        end
        S_TERM: begin
          tx_data   <= {XG_IDLE, XG_IDLE, XG_IDLE, XG_TERM};
          tx_ctrl   <= 4'hF;
          pkt_count <= pkt_count + 1;
          state     <= S_IPG;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
