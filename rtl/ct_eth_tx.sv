// ct_eth_tx: transmit-only 10G Ethernet MAC for the links from the
// motherboard to the GPU nodes (stage four of the corner-turn).
//
// Each packet from a stage-3 output stream is sent as the payload of one
// UDP/IPv4 datagram in one Ethernet frame, as the design does (industry
// standard 10G Ethernet, payload in UDP packets, custom transmit-only MAC for a
// small footprint). The framing details are standard Ethernet; the choices
// left open are this design's: no VLAN tag, IPv4 without options, DF set,
// TTL 64, identification 0, UDP checksum 0 (allowed for IPv4), and no pause
// or receive logic at all.
//
// Output is a 32-bit XGMII-style stream (txd/txc, lane 0 = first byte):
//   start word FB 55 55 55, then 55 55 55 D5 (preamble + SFD)
//   42 bytes of Ethernet/IPv4/UDP header, the payload, the 4-byte FCS
//   terminate FD, then idles; three idle words keep the gap above 12 bytes.
// The 42-byte header leaves the payload two bytes off the word grid, so
// every output payload word is made of the upper half of the previous input
// word and the lower half of the current one.
//
// Interface: s_valid/s_ready/s_data/s_last with s_len (payload length in
// 32-bit words) valid with the first word. The payload must arrive without
// gaps once started (an Ethernet frame cannot pause); a gap is counted in
// underrun_count and filled with zero words. Per frame the link spends
// 2 + 10 + len + 2 + 3 words.
module ct_eth_tx
  import ct_pkg::*;
(
  input  logic        clk,
  input  logic        rst_n,
  input  logic [47:0] src_mac,
  input  logic [47:0] dst_mac,
  input  logic [31:0] src_ip,
  input  logic [31:0] dst_ip,
  input  logic [15:0] src_port,
  input  logic [15:0] dst_port,
  input  logic        s_valid,
  output logic        s_ready,
  input  logic [31:0] s_data,
  input  logic        s_last,
  input  logic [15:0] s_len,
  output logic [31:0] txd,
  output logic [3:0]  txc,
  output logic [31:0] pkt_count,
  output logic [31:0] underrun_count
);

  typedef enum logic [2:0] {E_IDLE, E_PRE, E_HDR, E_PAY, E_END1, E_END2, E_IPG} estate_t;
  estate_t state;
  logic [7:0]  hb [44];     // header bytes (42 used, 2 spare)
  logic [3:0]  hcnt;
  logic [15:0] residue;
  logic [31:0] crc;
  logic [1:0]  ipg;

  // header bytes for a payload of len words
  function automatic logic [15:0] ip_csum(input logic [15:0] totlen,
                                          input logic [31:0] sip,
                                          input logic [31:0] dip);
    logic [19:0] s;
    s = 20'h4500 + 20'(totlen) + 20'h4000 + 20'h4011 +
        20'(sip[31:16]) + 20'(sip[15:0]) + 20'(dip[31:16]) + 20'(dip[15:0]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    s = 20'(s[15:0]) + 20'(s[19:16]);
    return ~s[15:0];
  endfunction

  logic [7:0] hb_n [44];
  always_comb begin
    logic [15:0] plen, totlen, udplen, cs;
    plen   = {s_len[13:0], 2'b00};
    totlen = plen + 16'd28;
    udplen = plen + 16'd8;
    cs     = ip_csum(totlen, src_ip, dst_ip);
    for (int i = 0; i < 6; i++) begin
      hb_n[i]     = dst_mac[47 - 8*i -: 8];
      hb_n[6 + i] = src_mac[47 - 8*i -: 8];
    end
    hb_n[12] = 8'h08; hb_n[13] = 8'h00;                      // IPv4
    hb_n[14] = 8'h45; hb_n[15] = 8'h00;                      // version, IHL, DSCP
    hb_n[16] = totlen[15:8]; hb_n[17] = totlen[7:0];
    hb_n[18] = 8'h00; hb_n[19] = 8'h00;                      // identification
    hb_n[20] = 8'h40; hb_n[21] = 8'h00;                      // DF
    hb_n[22] = 8'h40; hb_n[23] = 8'h11;                      // TTL 64, UDP
    hb_n[24] = cs[15:8]; hb_n[25] = cs[7:0];
    for (int i = 0; i < 4; i++) begin
      hb_n[26 + i] = src_ip[31 - 8*i -: 8];
      hb_n[30 + i] = dst_ip[31 - 8*i -: 8];
    end
    hb_n[34] = src_port[15:8]; hb_n[35] = src_port[7:0];
    hb_n[36] = dst_port[15:8]; hb_n[37] = dst_port[7:0];
    hb_n[38] = udplen[15:8];   hb_n[39] = udplen[7:0];
    hb_n[40] = 8'h00; hb_n[41] = 8'h00;                      // UDP checksum
    hb_n[42] = 8'h00; hb_n[43] = 8'h00;
  end

  assign s_ready = (state == E_PAY);

  logic [31:0] hword, pword, fcs;
  always_comb begin
    hword = {hb[4*hcnt + 3], hb[4*hcnt + 2], hb[4*hcnt + 1], hb[4*hcnt]};
    pword = {(s_valid ? s_data[15:0] : 16'h0), residue};
    fcs   = ~crc32_bytes(crc, {16'h0, residue}, 2);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state          <= E_IDLE;
      hcnt           <= '0;
      residue        <= '0;
      crc            <= '1;
      ipg            <= '0;
      txd            <= XG_IDLE_WORD;
      txc            <= 4'hF;
      pkt_count      <= '0;
      underrun_count <= '0;
      for (int i = 0; i < 44; i++) hb[i] <= '0;
    end else begin
      unique case (state)
        E_IDLE: begin
          txd <= XG_IDLE_WORD;
          txc <= 4'hF;
          if (s_valid) begin
            hb    <= hb_n;
            txd   <= XG_START_WORD;
            txc   <= 4'h1;
            state <= E_PRE;
          end
        end
        E_PRE: begin
          txd   <= {XG_SFD, XG_PRE, XG_PRE, XG_PRE};
          txc   <= 4'h0;
          hcnt  <= '0;
          crc   <= '1;
          state <= E_HDR;
        end
        E_HDR: begin
          txd  <= hword;
          txc  <= 4'h0;
          crc  <= crc32_word(crc, hword);
          hcnt <= hcnt + 1'b1;
          if (hcnt == 4'd9) begin
            residue <= {hb[41], hb[40]};
            state   <= E_PAY;
          end
        end
        E_PAY: begin
          txd <= pword;
          txc <= 4'h0;
          crc <= crc32_word(crc, pword);
          if (s_valid) begin
            residue <= s_data[31:16];
            if (s_last) state <= E_END1;
          end else begin
            residue        <= '0;
            underrun_count <= underrun_count + 1;
          end
        end
        E_END1: begin
          txd   <= {fcs[15:0], residue};
          txc   <= 4'h0;
          crc   <= fcs;
          state <= E_END2;
        end
        E_END2: begin
          txd       <= {XG_IDLE, XG_TERM, crc[31:16]};
          txc       <= 4'b1100;
          ipg       <= '0;
          pkt_count <= pkt_count + 1;
          state     <= E_IPG;
        end
        E_IPG: begin
          txd <= XG_IDLE_WORD;
          txc <= 4'hF;
          ipg <= ipg + 1'b1;
          if (ipg == 2'd2) state <= E_IDLE;
        end
        default: state <= E_IDLE;
      endcase
    end
  end

endmodule
