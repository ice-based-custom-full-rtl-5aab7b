// ice_ct_top: corner-turn firmware of one ICE motherboard FPGA in the CHIME
// F-engine (16 digitizer inputs per board, 16 boards per crate, crates in
// pairs).
//
// Data path (all of it follows the design; names of ports are this design's):
//   stage 1  16 channelizer streams (1024 channels x 1 input each) are
//            reordered into 16 streams of 64 channels x 16 inputs. Stream s
//            goes to the board in slot s over the backplane full-mesh link s;
//            the stream for this board's own slot stays inside the FPGA.
//   stage 2  the 16 streams for this slot (15 mesh links + the local one;
//            lane l holds the data of slot l) are reordered into 8 streams
//            of 8 channels x 256 inputs. Streams 0-3 (one half of the
//            channels) stay; streams 4-7 (the other half) leave over the four
//            links of the inter-crate QSFP+ connection to the board in the
//            same slot of the paired crate.
//   stage 3  the 4 local and the 4 received streams are reordered into 8
//            streams of 4 channels x 512 inputs. The even crate's inputs come
//            first: in the odd crate the local lanes are antenna group 1.
//   stage 4  each of the 8 streams leaves as UDP over its own 10G Ethernet
//            link to a different GPU node.
// The odd crate must keep the other half of the channels: its stage-2 table
// is programmed so that streams 0-3 carry channels 32-63 of the slot and
// streams 4-7 channels 0-31 (see the README for the table contents).
//
// Configurations (mode), switched by software while no data flows:
//   MODE_BOARD (0)  single board: stage 2 uses only the local lane, stage 3
//                   is bypassed, stage-2 streams go straight to the GPU links.
//   MODE_CRATE (1)  single crate (256 inputs): all 16 mesh lanes, stage 3
//                   bypassed as above.
//   MODE_PAIR  (2)  dual crate (512 inputs), the CHIME configuration.
// That every stage has bypass paths for these three configurations follows
// the design; which paths exist and the routing is this design's choice.
//
// The serial transceivers, backplane, cables and channelizers are outside:
// their word streams are the ports. Everything runs on one clock (the design
// clocks its internal 32-bit streams at 240 MHz); the clock-domain crossings
// to the transceiver clocks are not modelled.
module ice_ct_top
  import ct_pkg::*;
#(
  parameter int unsigned SLOTS      = 16,    // boards per crate
  parameter int unsigned INPUTS     = 16,    // channelizers per board
  parameter int unsigned CHANNELS   = 1024,  // channels per channelizer
  parameter int unsigned QSFP_LINKS = 4,     // inter-crate links per board
  parameter int unsigned GPU_LINKS  = 8,     // 10G Ethernet links per board
  parameter int unsigned MAX_FRAMES = 4,     // frames per packet, at most
  parameter int unsigned FIFO_DEPTH = 128,
  parameter int unsigned TIMEOUT    = 96
)(
  input  logic                           clk,
  input  logic                           rst_n,
  // configuration
  input  logic [1:0]                     mode,
  input  logic [3:0]                     crate_id,
  input  logic [3:0]                     slot_id,
  input  logic [2:0][3:0]                frames_out,   // per stage 1..3 (index 0..2)
  input  logic [1:0]                     map_wr_stage, // 1..3
  input  logic                           map_wr_en,
  input  logic [9:0]                     map_wr_addr,
  input  map_entry_t                     map_wr_data,
  input  logic [47:0]                    src_mac,
  input  logic [31:0]                    src_ip,
  input  logic [15:0]                    udp_port,
  input  logic [GPU_LINKS-1:0][47:0]     gpu_mac,
  input  logic [GPU_LINKS-1:0][31:0]     gpu_ip,
  // channelizer streams
  input  logic [INPUTS-1:0]              chan_valid,
  input  logic [INPUTS-1:0][31:0]        chan_data,
  input  logic [INPUTS-1:0]              chan_last,
  // backplane full-mesh links, indexed by peer slot
  output logic [SLOTS-1:0][31:0]         mesh_txd,
  output logic [SLOTS-1:0][3:0]          mesh_txc,
  input  logic [SLOTS-1:0][31:0]         mesh_rxd,
  input  logic [SLOTS-1:0][3:0]          mesh_rxc,
  // inter-crate QSFP+ links
  output logic [QSFP_LINKS-1:0][31:0]    qsfp_txd,
  output logic [QSFP_LINKS-1:0][3:0]     qsfp_txc,
  input  logic [QSFP_LINKS-1:0][31:0]    qsfp_rxd,
  input  logic [QSFP_LINKS-1:0][3:0]     qsfp_rxc,
  // GPU links (XGMII-style)
  output logic [GPU_LINKS-1:0][31:0]     gpu_txd,
  output logic [GPU_LINKS-1:0][3:0]      gpu_txc,
  // monitoring
  output logic [31:0]                    crc_err_count,
  output logic [2:0][31:0]               lost_count,
  output logic [2:0][31:0]               buf_ovf_count,
  output logic [2:0][31:0]               fifo_ovf_count,
  output logic [GPU_LINKS-1:0][31:0]     gpu_pkt_count
);

  localparam logic [1:0] MODE_BOARD = 2'd0;
  localparam logic [1:0] MODE_CRATE = 2'd1;
  localparam logic [1:0] MODE_PAIR  = 2'd2;

  // geometry of the three stages
  localparam int unsigned C1 = CHANNELS / SLOTS;                 // 64
  localparam int unsigned A2 = INPUTS;                           // 16
  localparam int unsigned N2 = 2 * QSFP_LINKS;                   // 8 streams
  localparam int unsigned C2 = C1 / N2;                          // 8
  localparam int unsigned A3 = SLOTS * INPUTS;                   // 256
  localparam int unsigned C3 = C2 * QSFP_LINKS / GPU_LINKS;      // 4
  localparam int unsigned K1 = CHANNELS;
  localparam int unsigned K2 = C1;
  localparam int unsigned K3 = QSFP_LINKS * C2;

  wire pair = (mode == MODE_PAIR);

  // =========================================================== stage 1
  logic [SLOTS-1:0]        s1_valid, s1_ready, s1_last;
  logic [SLOTS-1:0][31:0]  s1_data;
  logic [SLOTS-1:0][15:0]  s1_len;
  logic [31:0]             s1_drop, s1_geom;
  logic [SLOTS-1:0][31:0]  s1_pkts;

  ct_stage #(
    .STAGE(1), .N_IN(INPUTS), .CH_GROUPS(1), .C_IN(CHANNELS), .A_IN(1),
    .N_OUT(SLOTS), .C_OUT(C1), .MAX_FRAMES(MAX_FRAMES),
    .FIFO_DEPTH(FIFO_DEPTH), .TIMEOUT(TIMEOUT)
  ) u_stage1 (
    .clk, .rst_n, .crate(crate_id), .slot(slot_id),
    .grp_en('1), .frames_out(frames_out[0]),
    .map_wr_en(map_wr_en && map_wr_stage == 2'd1),
    .map_wr_addr(map_wr_addr[$clog2(K1)-1:0]), .map_wr_data,
    .s_valid(chan_valid), .s_data(chan_data), .s_last(chan_last), .s_err('0),
    .m_valid(s1_valid), .m_ready(s1_ready), .m_data(s1_data),
    .m_last(s1_last), .m_len(s1_len),
    .lost_count(lost_count[0]), .drop_count(s1_drop),
    .fifo_ovf_count(fifo_ovf_count[0]), .buf_ovf_count(buf_ovf_count[0]),
    .geom_err_count(s1_geom), .pkt_count(s1_pkts)
  );

  // ============================================== backplane full mesh
  logic [SLOTS-1:0]        mrx_valid, mrx_last, mrx_err;
  logic [SLOTS-1:0][31:0]  mrx_data;
  logic [SLOTS-1:0][31:0]  mtx_pkts, mrx_pkts, mrx_crc;

  for (genvar s = 0; s < SLOTS; s++) begin : g_mesh
    logic own;
    logic tx_ready;
    assign own = (slot_id == 4'(s));
    ct_link_tx u_tx (
      .clk, .rst_n,
      .s_valid(s1_valid[s] && !own), .s_ready(tx_ready),
      .s_data(s1_data[s]), .s_last(s1_last[s]),
      .tx_data(mesh_txd[s]), .tx_ctrl(mesh_txc[s]), .pkt_count(mtx_pkts[s])
    );
    assign s1_ready[s] = own ? 1'b1 : tx_ready;
    ct_link_rx u_rx (
      .clk, .rst_n, .rx_data(mesh_rxd[s]), .rx_ctrl(mesh_rxc[s]),
      .m_valid(mrx_valid[s]), .m_data(mrx_data[s]), .m_last(mrx_last[s]),
      .m_err(mrx_err[s]), .pkt_count(mrx_pkts[s]), .crc_err_count(mrx_crc[s])
    );
  end

  // =========================================================== stage 2
  logic [SLOTS-1:0]        s2_in_valid, s2_in_last, s2_in_err;
  logic [SLOTS-1:0][31:0]  s2_in_data;
  always_comb begin
    for (int s = 0; s < SLOTS; s++) begin
      if (slot_id == 4'(s)) begin
        s2_in_valid[s] = s1_valid[s];
        s2_in_data[s]  = s1_data[s];
        s2_in_last[s]  = s1_last[s];
        s2_in_err[s]   = 1'b0;
      end else begin
        s2_in_valid[s] = mrx_valid[s];
        s2_in_data[s]  = mrx_data[s];
        s2_in_last[s]  = mrx_last[s];
        s2_in_err[s]   = mrx_err[s];
      end
    end
  end

  logic [SLOTS-1:0] s2_grp_en;
  assign s2_grp_en = (mode == MODE_BOARD) ? (SLOTS'(1) << slot_id) : '1;

  logic [N2-1:0]        s2_valid, s2_ready, s2_last;
  logic [N2-1:0][31:0]  s2_data;
  logic [N2-1:0][15:0]  s2_len;
  logic [31:0]          s2_drop, s2_geom;
  logic [N2-1:0][31:0]  s2_pkts;

  ct_stage #(
    .STAGE(2), .N_IN(SLOTS), .CH_GROUPS(1), .C_IN(C1), .A_IN(A2),
    .N_OUT(N2), .C_OUT(C2), .MAX_FRAMES(MAX_FRAMES),
    .FIFO_DEPTH(FIFO_DEPTH), .TIMEOUT(TIMEOUT)
  ) u_stage2 (
    .clk, .rst_n, .crate(crate_id), .slot(slot_id),
    .grp_en(s2_grp_en), .frames_out(frames_out[1]),
    .map_wr_en(map_wr_en && map_wr_stage == 2'd2),
    .map_wr_addr(map_wr_addr[$clog2(K2)-1:0]), .map_wr_data,
    .s_valid(s2_in_valid), .s_data(s2_in_data), .s_last(s2_in_last), .s_err(s2_in_err),
    .m_valid(s2_valid), .m_ready(s2_ready), .m_data(s2_data),
    .m_last(s2_last), .m_len(s2_len),
    .lost_count(lost_count[1]), .drop_count(s2_drop),
    .fifo_ovf_count(fifo_ovf_count[1]), .buf_ovf_count(buf_ovf_count[1]),
    .geom_err_count(s2_geom), .pkt_count(s2_pkts)
  );

  // ============================================== inter-crate QSFP+ links
  logic [QSFP_LINKS-1:0]        qrx_valid, qrx_last, qrx_err, qtx_ready;
  logic [QSFP_LINKS-1:0][31:0]  qrx_data, qtx_pkts, qrx_pkts, qrx_crc;

  for (genvar q = 0; q < QSFP_LINKS; q++) begin : g_qsfp
    ct_link_tx u_tx (
      .clk, .rst_n,
      .s_valid(s2_valid[QSFP_LINKS + q] && pair), .s_ready(qtx_ready[q]),
      .s_data(s2_data[QSFP_LINKS + q]), .s_last(s2_last[QSFP_LINKS + q]),
      .tx_data(qsfp_txd[q]), .tx_ctrl(qsfp_txc[q]), .pkt_count(qtx_pkts[q])
    );
    ct_link_rx u_rx (
      .clk, .rst_n, .rx_data(qsfp_rxd[q]), .rx_ctrl(qsfp_rxc[q]),
      .m_valid(qrx_valid[q]), .m_data(qrx_data[q]), .m_last(qrx_last[q]),
      .m_err(qrx_err[q]), .pkt_count(qrx_pkts[q]), .crc_err_count(qrx_crc[q])
    );
  end

  // =========================================================== stage 3
  localparam int unsigned N3 = 2 * QSFP_LINKS;
  logic [N3-1:0]        s3_in_valid, s3_in_last, s3_in_err;
  logic [N3-1:0][31:0]  s3_in_data;
  always_comb begin
    for (int k = 0; k < QSFP_LINKS; k++) begin
      // local lanes: antenna group crate_id[0]; remote lanes: the other group
      automatic int unsigned lo = crate_id[0] ? QSFP_LINKS + k : k;
      automatic int unsigned re = crate_id[0] ? k : QSFP_LINKS + k;
      s3_in_valid[lo] = s2_valid[k] && pair;
      s3_in_data[lo]  = s2_data[k];
      s3_in_last[lo]  = s2_last[k];
      s3_in_err[lo]   = 1'b0;
      s3_in_valid[re] = qrx_valid[k] && pair;
      s3_in_data[re]  = qrx_data[k];
      s3_in_last[re]  = qrx_last[k];
      s3_in_err[re]   = qrx_err[k];
    end
  end

  logic [GPU_LINKS-1:0]        s3_valid, s3_ready, s3_last;
  logic [GPU_LINKS-1:0][31:0]  s3_data;
  logic [GPU_LINKS-1:0][15:0]  s3_len;
  logic [31:0]                 s3_drop, s3_geom;
  logic [GPU_LINKS-1:0][31:0]  s3_pkts;

  ct_stage #(
    .STAGE(3), .N_IN(N3), .CH_GROUPS(QSFP_LINKS), .C_IN(C2), .A_IN(A3),
    .N_OUT(GPU_LINKS), .C_OUT(C3), .MAX_FRAMES(MAX_FRAMES),
    .FIFO_DEPTH(FIFO_DEPTH), .TIMEOUT(TIMEOUT)
  ) u_stage3 (
    .clk, .rst_n, .crate(crate_id), .slot(slot_id),
    .grp_en(2'b11), .frames_out(frames_out[2]),
    .map_wr_en(map_wr_en && map_wr_stage == 2'd3),
    .map_wr_addr(map_wr_addr[$clog2(K3)-1:0]), .map_wr_data,
    .s_valid(s3_in_valid), .s_data(s3_in_data), .s_last(s3_in_last), .s_err(s3_in_err),
    .m_valid(s3_valid), .m_ready(s3_ready), .m_data(s3_data),
    .m_last(s3_last), .m_len(s3_len),
    .lost_count(lost_count[2]), .drop_count(s3_drop),
    .fifo_ovf_count(fifo_ovf_count[2]), .buf_ovf_count(buf_ovf_count[2]),
    .geom_err_count(s3_geom), .pkt_count(s3_pkts)
  );

  // ============================================== stage 4: GPU links
  logic [GPU_LINKS-1:0]        e_valid, e_ready, e_last;
  logic [GPU_LINKS-1:0][31:0]  e_data, e_underrun;
  logic [GPU_LINKS-1:0][15:0]  e_len;

  always_comb begin
    for (int g = 0; g < GPU_LINKS; g++) begin
      e_valid[g]  = pair ? s3_valid[g] : s2_valid[g];
      e_data[g]   = pair ? s3_data[g]  : s2_data[g];
      e_last[g]   = pair ? s3_last[g]  : s2_last[g];
      e_len[g]    = pair ? s3_len[g]   : s2_len[g];
      s3_ready[g] = pair ? e_ready[g]  : 1'b1;
    end
    for (int k = 0; k < N2; k++) begin
      if (!pair)               s2_ready[k] = e_ready[k];
      else if (k < QSFP_LINKS) s2_ready[k] = 1'b1;          // into stage 3
      else                     s2_ready[k] = qtx_ready[k - QSFP_LINKS];
    end
  end

  for (genvar g = 0; g < GPU_LINKS; g++) begin : g_gpu
    ct_eth_tx u_eth (
      .clk, .rst_n,
      .src_mac, .dst_mac(gpu_mac[g]), .src_ip, .dst_ip(gpu_ip[g]),
      .src_port(udp_port), .dst_port(udp_port + 16'(g)),
      .s_valid(e_valid[g]), .s_ready(e_ready[g]), .s_data(e_data[g]),
      .s_last(e_last[g]), .s_len(e_len[g]),
      .txd(gpu_txd[g]), .txc(gpu_txc[g]),
      .pkt_count(gpu_pkt_count[g]), .underrun_count(e_underrun[g])
    );
  end

  // link CRC errors, all receivers
  always_comb begin
    crc_err_count = '0;
    for (int s = 0; s < SLOTS; s++)
      if (slot_id != 4'(s)) crc_err_count = crc_err_count + mrx_crc[s];
    for (int q = 0; q < QSFP_LINKS; q++)
      if (pair) crc_err_count = crc_err_count + qrx_crc[q];
  end

endmodule
