// ct_stage: one corner-turn stage, the configurable unit that the
// motherboard firmware instantiates three times (stage 1 inside the FPGA,
// stage 2 over the backplane mesh, stage 3 over the inter-crate links).
//
// Structure, as in the design: a frame alignment module at the input, a
// programmable channel table, and one channel selector per output stream.
// Parameters set the geometry:
//   N_IN lanes, each carrying C_IN channels x A_IN antennas per frame;
//   N_OUT output streams, each carrying C_OUT channels x A_OUT antennas,
//   A_OUT = (enabled antenna groups) x A_IN.
// Lanes are split into N_IN/CH_GROUPS antenna groups of CH_GROUPS lanes. Lane
// l belongs to antenna group l / CH_GROUPS and carries channel set
// l % CH_GROUPS; the channel table is indexed by the key
// (l % CH_GROUPS) * C_IN + channel. Stages 1 and 2 have CH_GROUPS = 1 (every
// lane carries the same channels for different antennas). Stage 3 has
// CH_GROUPS = 4: four local lanes and four remote lanes, lane k and lane k+4
// carrying the same 8 channels for the two crates. The grouping and key
// scheme are this design's way of serving all stages with one module.
//
// Bypass: grp_en enables antenna groups. A disabled group's lanes are
// ignored and the output streams shrink to the enabled groups, which gives
// the single-board and single-crate configurations (see ice_ct_top).
//
// Per aligned beat the stage decodes which block of the input packet the
// word belongs to and, for up to 32 elements of that word, the frame, channel
// and antenna; it looks the channels up in the table (CH_GROUPS x 32 read
// ports) and broadcasts the result to all selectors. A lane the aligner
// declared lost is replaced by zero data, all saturation flags set and both
// ADC flags set, so that the GPU side sees the missing data flagged. An
// aligned packet whose header geometry does not match the parameters is
// dropped and counted in geom_err_count.
//
// Timing: the aligned stream moves one word per lane per clock; each output
// stream leaves one word per clock while m_ready is high.
module ct_stage
  import ct_pkg::*;
#(
  parameter int unsigned STAGE      = 1,
  parameter int unsigned N_IN       = 16,
  parameter int unsigned CH_GROUPS  = 1,
  parameter int unsigned C_IN       = 1024,
  parameter int unsigned A_IN       = 1,
  parameter int unsigned N_OUT      = 16,
  parameter int unsigned C_OUT      = 64,
  parameter int unsigned MAX_FRAMES = 4,
  parameter int unsigned FIFO_DEPTH = 128,
  parameter int unsigned TIMEOUT    = 96,
  parameter int unsigned N_GRP      = N_IN / CH_GROUPS,
  parameter int unsigned KEYS       = CH_GROUPS * C_IN
)(
  input  logic                         clk,
  input  logic                         rst_n,
  input  logic [3:0]                   crate,
  input  logic [3:0]                   slot,
  input  logic [N_GRP-1:0]             grp_en,
  input  logic [3:0]                   frames_out,
  // channel table write port
  input  logic                         map_wr_en,
  input  logic [$clog2(KEYS)-1:0]      map_wr_addr,
  input  map_entry_t                   map_wr_data,
  // input lanes
  input  logic [N_IN-1:0]              s_valid,
  input  logic [N_IN-1:0][31:0]        s_data,
  input  logic [N_IN-1:0]              s_last,
  input  logic [N_IN-1:0]              s_err,
  // output streams
  output logic [N_OUT-1:0]             m_valid,
  input  logic [N_OUT-1:0]             m_ready,
  output logic [N_OUT-1:0][31:0]       m_data,
  output logic [N_OUT-1:0]             m_last,
  output logic [N_OUT-1:0][15:0]       m_len,
  // counters
  output logic [31:0]                  lost_count,
  output logic [31:0]                  drop_count,
  output logic [31:0]                  fifo_ovf_count,
  output logic [31:0]                  buf_ovf_count,
  output logic [31:0]                  geom_err_count,
  output logic [N_OUT-1:0][31:0]       pkt_count
);

  localparam int unsigned NE = 32;

  // ----------------------------------------------------------- alignment
  logic [N_IN-1:0] lane_en;
  always_comb
    for (int l = 0; l < N_IN; l++) lane_en[l] = grp_en[l / CH_GROUPS];

  logic                 a_valid, a_sof, a_last;
  logic [N_IN-1:0][31:0] a_data;
  logic [N_IN-1:0]      a_lost, a_err;
  ct_header_t           a_hdr;

  ct_frame_aligner #(.N(N_IN), .DEPTH(FIFO_DEPTH), .TIMEOUT(TIMEOUT)) u_align (
    .clk, .rst_n, .lane_en,
    .s_valid, .s_data, .s_last, .s_err,
    .a_valid, .a_sof, .a_last, .a_data, .a_lost, .a_err, .a_hdr,
    .lost_count, .drop_count, .ovf_count(fifo_ovf_count)
  );

  // header geometry check
  logic hdr_ok;
  assign hdr_ok = (a_hdr.nfreq == 12'(C_IN)) && (a_hdr.nant == 12'(A_IN)) &&
                  (a_hdr.nframes != 0) && (32'(a_hdr.nframes) <= MAX_FRAMES);

  // ------------------------------------------------------- word decoding
  logic [15:0] w;          // payload word index of the next beat
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                 w <= '0;
    else if (a_valid && a_last) w <= '0;
    else if (a_valid)           w <= (a_sof ? 16'd0 : w) + 16'd1;
  end
  logic [15:0] widx;
  assign widx = a_sof ? 16'd0 : w;

  int unsigned nf, dw, fw, aw;
  always_comb begin
    nf = 32'(a_hdr.nframes);
    dw = data_words(nf, C_IN, A_IN);
    fw = flag_words(nf, C_IN, A_IN);
    aw = adc_words(nf, A_IN);
  end

  seg_t                              seg;
  elem_t      [NE-1:0]               elem;
  logic       [NE-1:0][11:0]         chan;
  logic       [CH_GROUPS*NE-1:0][$clog2(KEYS)-1:0] rd_addr;
  map_entry_t [CH_GROUPS*NE-1:0]     rd_data;
  map_entry_t [CH_GROUPS-1:0][NE-1:0] ent;

  always_comb begin
    automatic int unsigned k = 32'(widx);
    automatic int unsigned base;
    automatic int unsigned nper;   // elements in this word
    automatic int unsigned limit;  // elements in this block
    if (a_last || a_hdr.nframes == 0) begin
      seg = SEG_STATUS; base = 0; nper = 0; limit = 0;
    end else if (k < dw) begin
      seg = SEG_DATA; base = 4 * k; nper = 4; limit = nf * C_IN * A_IN;
    end else if (k < dw + fw) begin
      seg = SEG_FLAG; base = 32 * (k - dw); nper = 32; limit = nf * C_IN * A_IN;
    end else if (k < dw + fw + aw) begin
      seg = SEG_ADC; base = 16 * (k - dw - fw); nper = 16; limit = nf * A_IN;
    end else begin
      seg = SEG_STATUS; base = 0; nper = 0; limit = 0;
    end
    for (int j = 0; j < NE; j++) begin
      automatic int unsigned idx = base + j;
      elem[j].valid = (j < nper) && (idx < limit) && hdr_ok;
      if (seg == SEG_ADC) begin
        elem[j].f = 4'(idx / A_IN);
        elem[j].a = 12'(idx % A_IN);
        chan[j]   = '0;
      end else begin
        elem[j].f = 4'(idx / (A_IN * C_IN));
        elem[j].a = 12'(idx % A_IN);
        chan[j]   = 12'((idx / A_IN) % C_IN);
      end
      for (int g = 0; g < CH_GROUPS; g++)
        rd_addr[g*NE + j] = ($clog2(KEYS))'(g * C_IN + 32'(chan[j]));
    end
  end

  always_comb
    for (int g = 0; g < CH_GROUPS; g++)
      for (int j = 0; j < NE; j++) ent[g][j] = rd_data[g*NE + j];

  ct_channel_map #(.KEYS(KEYS), .N_OUT(N_OUT), .C_OUT(C_OUT), .NPORT(CH_GROUPS*NE)) u_map (
    .clk, .rst_n,
    .wr_en(map_wr_en), .wr_addr(map_wr_addr), .wr_data(map_wr_data),
    .rd_addr, .rd_data
  );

  // lost lanes: zero data, flags raised
  logic [N_IN-1:0][31:0] words;
  logic [N_IN-1:0]       lost_eff;
  always_comb begin
    for (int l = 0; l < N_IN; l++) begin
      lost_eff[l] = a_lost[l];
      if (!lost_eff[l])            words[l] = a_data[l];
      else if (seg == SEG_DATA)    words[l] = '0;
      else if (seg == SEG_STATUS)  words[l] = '0;
      else                         words[l] = '1;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                                 geom_err_count <= '0;
    else if (a_valid && a_sof && !hdr_ok)       geom_err_count <= geom_err_count + 1;
  end

  // ------------------------------------------------------------ selectors
  logic [N_OUT-1:0][31:0] sel_ovf;
  for (genvar o = 0; o < N_OUT; o++) begin : g_sel
    ct_channel_selector #(
      .STAGE(STAGE), .OUT_ID(o), .N_IN(N_IN), .CH_GROUPS(CH_GROUPS),
      .A_IN(A_IN), .C_OUT(C_OUT), .MAX_FRAMES(MAX_FRAMES), .NE(NE)
    ) u_sel (
      .clk, .rst_n, .crate, .slot, .grp_en, .frames_out,
      .beat(a_valid && hdr_ok), .sof(a_sof), .last(a_last), .seg, .elem, .ent,
      .words, .lost(lost_eff), .err(a_err), .hdr(a_hdr),
      .m_valid(m_valid[o]), .m_ready(m_ready[o]), .m_data(m_data[o]),
      .m_last(m_last[o]), .m_len(m_len[o]),
      .pkt_count(pkt_count[o]), .ovf_count(sel_ovf[o])
    );
  end

  always_comb begin
    buf_ovf_count = '0;
    for (int o = 0; o < N_OUT; o++) buf_ovf_count = buf_ovf_count + sel_ovf[o];
  end

endmodule
