// ct_channel_selector: builds one output stream of a corner-turn stage.
//
// All input lanes of the stage arrive aligned (one word per lane per beat,
// see ct_frame_aligner). For every element of the current beat the stage has
// already looked up the channel table; this selector keeps the elements whose
// table entry names it (dest == OUT_ID) and writes them into its local
// buffer at the place the output packet needs them:
//   data byte   -> dmem[(f*C_OUT + slot)*A_OUT + ant]
//   flag bit    -> fmem[same index]
//   ADC flags   -> amem[f*A_OUT + ant]       (every stream keeps all of them)
// with ant = (rank of the lane's antenna group among the enabled groups) *
// A_IN + antenna within the lane, A_OUT = enabled groups * A_IN, and f the
// frame within the output packet. The buffer is grouped by frequency channel
// so that each channel leaves as one contiguous block, as the design asks,
// and frames_out frames are combined into one packet (1 to MAX_FRAMES; the
// packet drawing shows 1 to 4 frames per packet).
//
// The buffer has two banks. When a bank holds frames_out frames it is
// handed to the output side, which sends header, data block, flag block,
// ADC-flag block and status word; the next frames fill the other bank. If
// the output side is still busy with the previous packet, the new packet is
// dropped, counted in ovf_count and reported in the status word of the next
// packet ("buffer over/underflows" are among the status flags of the
// design). The status word ORs the status bits of the input lanes, adds the
// missing-lane counts and sets this stage's bits for missing lanes, lane
// errors and overflow. Double banking and drop-on-overflow are this design's
// choices.
//
// Output: AXI-Stream style m_valid/m_ready/m_data/m_last, with m_len the
// packet length in words, valid with every word. Output data is read
// combinationally from the bank, one word per clock while m_ready is high.
module ct_channel_selector
  import ct_pkg::*;
#(
  parameter int unsigned STAGE      = 1,
  parameter int unsigned OUT_ID     = 0,
  parameter int unsigned N_IN       = 16,
  parameter int unsigned CH_GROUPS  = 1,
  parameter int unsigned A_IN       = 1,
  parameter int unsigned C_OUT      = 64,
  parameter int unsigned MAX_FRAMES = 4,
  parameter int unsigned NE         = 32,   // elements decoded per beat
  parameter int unsigned N_GRP      = N_IN / CH_GROUPS
)(
  input  logic                             clk,
  input  logic                             rst_n,
  input  logic [3:0]                       crate,
  input  logic [3:0]                       slot,
  input  logic [N_GRP-1:0]                 grp_en,
  input  logic [3:0]                       frames_out,
  // aligned beat, decoded by the stage
  input  logic                             beat,
  input  logic                             sof,
  input  logic                             last,
  input  seg_t                             seg,
  input  elem_t      [NE-1:0]              elem,
  input  map_entry_t [CH_GROUPS-1:0][NE-1:0] ent,
  input  logic       [N_IN-1:0][31:0]      words,
  input  logic       [N_IN-1:0]            lost,
  input  logic       [N_IN-1:0]            err,
  input  ct_header_t                       hdr,
  // output packet stream
  output logic                             m_valid,
  input  logic                             m_ready,
  output logic [31:0]                      m_data,
  output logic                             m_last,
  output logic [15:0]                      m_len,
  output logic [31:0]                      pkt_count,
  output logic [31:0]                      ovf_count
);

  localparam int unsigned A_OUT_MAX = N_GRP * A_IN;
  localparam int unsigned BUF       = MAX_FRAMES * C_OUT * A_OUT_MAX;
  localparam int unsigned ABUF      = MAX_FRAMES * A_OUT_MAX;

  logic [7:0] dmem [2][BUF];
  logic       fmem [2][BUF];
  logic [1:0] amem [2][ABUF];

  // ---------------------------------------------------- antenna placement
  int unsigned grp_base [N_GRP];
  int unsigned a_out;
  always_comb begin
    a_out = 0;
    for (int g = 0; g < N_GRP; g++) begin
      grp_base[g] = a_out;
      if (grp_en[g]) a_out = a_out + A_IN;
    end
  end

  // ------------------------------------------------------------ write side
  logic        wbank;
  logic [3:0]  acc;         // frames already in the write bank
  logic [3:0]  fbase;       // frame offset of the packet being received
  logic [47:0] ts_first;
  logic [31:0] st_acc;      // status gathered for the write bank
  logic        ovf_pend;
  logic [3:0]  f_in;
  assign f_in = hdr.nframes;

  // status contribution of this beat (status word of every lane)
  logic [31:0] st_beat;
  always_comb begin
    logic [16:0] cnt;
    st_beat = '0;
    cnt     = '0;
    for (int l = 0; l < N_IN; l++) begin
      if (grp_en[l / CH_GROUPS] && !lost[l]) begin
        st_beat[15:0] = st_beat[15:0] | words[l][15:0];
        cnt = cnt + 17'(words[l][31:16]);
      end
      if (grp_en[l / CH_GROUPS] && lost[l]) begin
        st_beat[ST_LOST + STAGE - 1] = 1'b1;
        cnt = cnt + 17'd1;
      end
      if (grp_en[l / CH_GROUPS] && err[l]) st_beat[ST_ERR + STAGE - 1] = 1'b1;
    end
    st_beat[31:16] = cnt[16] ? 16'hFFFF : cnt[15:0];
  end

  function automatic logic [31:0] st_merge(input logic [31:0] a, input logic [31:0] b);
    logic [16:0] s;
    s = 17'(a[31:16]) + 17'(b[31:16]);
    return {s[16] ? 16'hFFFF : s[15:0], a[15:0] | b[15:0]};
  endfunction

  // ------------------------------------------------------------- read side
  logic        rd_busy, rbank;
  logic [15:0] rptr;
  logic [15:0] r_len;
  logic [3:0]  r_nf;
  logic [11:0] r_nant;
  logic [47:0] r_ts;
  logic [31:0] r_status;

  int unsigned r_dw, r_fw, r_aw;
  always_comb begin
    r_dw = data_words(32'(r_nf), C_OUT, 32'(r_nant));
    r_fw = flag_words(32'(r_nf), C_OUT, 32'(r_nant));
    r_aw = adc_words(32'(r_nf), 32'(r_nant));
  end

  wire [3:0]  nf_done  = acc + f_in;
  wire        complete = beat && last && (nf_done >= frames_out || nf_done >= 4'(MAX_FRAMES));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wbank     <= 1'b0;
      acc       <= '0;
      fbase     <= '0;
      ts_first  <= '0;
      st_acc    <= '0;
      ovf_pend  <= 1'b0;
      rd_busy   <= 1'b0;
      rbank     <= 1'b0;
      rptr      <= '0;
      r_len     <= '0;
      r_nf      <= '0;
      r_nant    <= '0;
      r_ts      <= '0;
      r_status  <= '0;
      pkt_count <= '0;
      ovf_count <= '0;
    end else begin
      // ---------------- element writes
      if (beat) begin
        if (sof) begin
          fbase <= acc;
          if (acc == 0) ts_first <= hdr.timestamp;
        end
        for (int l = 0; l < N_IN; l++) begin
          if (grp_en[l / CH_GROUPS]) begin
            for (int j = 0; j < NE; j++) begin
              automatic int unsigned fb  = sof ? 32'(acc) : 32'(fbase);
              automatic int unsigned ant = grp_base[l / CH_GROUPS] + 32'(elem[j].a);
              automatic map_entry_t  e   = ent[l % CH_GROUPS][j];
              automatic int unsigned pos = ((fb + 32'(elem[j].f)) * C_OUT + 32'(e.slot)) * a_out + ant;
              automatic int unsigned apos = (fb + 32'(elem[j].f)) * a_out + ant;
              if (elem[j].valid) begin
                if (seg == SEG_DATA && j < 4 && e.valid && e.dest == 6'(OUT_ID) && pos < BUF)
                  dmem[wbank][pos] <= words[l][8*j +: 8];
                if (seg == SEG_FLAG && e.valid && e.dest == 6'(OUT_ID) && pos < BUF)
                  fmem[wbank][pos] <= words[l][j];
                if (seg == SEG_ADC && j < 16 && apos < ABUF)
                  amem[wbank][apos] <= words[l][2*j +: 2];
              end
            end
          end
        end
        if (last) begin
          if (complete) begin
            acc <= '0;
            if (!rd_busy || (m_valid && m_ready && m_last)) begin
              rd_busy  <= 1'b1;
              rbank    <= wbank;
              wbank    <= ~wbank;
              rptr     <= '0;
              r_nf     <= nf_done;
              r_nant   <= 12'(a_out);
              r_ts     <= (acc == 0 && sof) ? hdr.timestamp : ts_first;
              r_len    <= 16'(packet_words(32'(nf_done), C_OUT, a_out));
              r_status <= st_merge(st_acc, st_beat) |
                          (ovf_pend ? (32'd1 << (ST_OVF + STAGE - 1)) : 32'd0);
              ovf_pend <= 1'b0;
            end else begin
              ovf_count <= ovf_count + 1;
              ovf_pend  <= 1'b1;
            end
            st_acc <= '0;
          end else begin
            acc    <= nf_done;
            st_acc <= st_merge(st_acc, st_beat);
          end
        end
      end

      // ---------------- output side
      if (m_valid && m_ready) begin
        if (m_last) begin
          pkt_count <= pkt_count + 1;
          // a bank handed over in this same clock keeps rd_busy set
          if (!(complete && beat)) rd_busy <= 1'b0;
        end else begin
          rptr <= rptr + 1'b1;
        end
      end
    end
  end

  // ----------------------------------------------------- output word mux
  ct_header_t oh;
  always_comb begin
    oh           = '0;
    oh.sid.stage = 2'(STAGE);
    oh.sid.crate = crate;
    oh.sid.slot  = slot;
    oh.sid.lane  = 6'(OUT_ID);
    oh.proto     = CT_PROTO;
    oh.hdr_len   = CT_HDR_LEN;
    oh.cookie    = CT_COOKIE;
    oh.enc       = CT_ENC_4P4;
    oh.nframes   = r_nf;
    oh.nfreq     = 12'(C_OUT);
    oh.nant      = r_nant;
    oh.ancillary = '0;
    oh.timestamp = r_ts;
  end

  always_comb begin
    automatic int unsigned k = 32'(rptr);
    m_valid = rd_busy;
    m_last  = rd_busy && (rptr == r_len - 16'd1);
    m_len   = r_len;
    m_data  = '0;
    if (k < CT_HDR_WORDS) begin
      m_data = oh[127 - 32*k -: 32];
    end else if (k < CT_HDR_WORDS + r_dw) begin
      for (int b = 0; b < 4; b++)
        m_data[8*b +: 8] = dmem[rbank][(4*(k - CT_HDR_WORDS) + b) % BUF];
    end else if (k < CT_HDR_WORDS + r_dw + r_fw) begin
      for (int b = 0; b < 32; b++) begin
        automatic int unsigned fi = 32*(k - CT_HDR_WORDS - r_dw) + b;
        if (fi < 32'(r_nf) * C_OUT * 32'(r_nant)) m_data[b] = fmem[rbank][fi % BUF];
      end
    end else if (k < CT_HDR_WORDS + r_dw + r_fw + r_aw) begin
      for (int b = 0; b < 16; b++) begin
        automatic int unsigned fl = 16*(k - CT_HDR_WORDS - r_dw - r_fw) + b;
        if (fl < 32'(r_nf) * 32'(r_nant)) m_data[2*b +: 2] = amem[rbank][fl % ABUF];
      end
    end else begin
      m_data = r_status;
    end
  end

endmodule
