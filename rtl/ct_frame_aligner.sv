// ct_frame_aligner: frame alignment at the input of a corner-turn stage.
//
// Each input lane (a channelizer output, or a link receiver) delivers one
// packet per frame group, each starting with the 4-word header that carries
// the 48-bit frame counter (timestamp). Lanes drift by a few clocks because
// the channelizers run on multi-phase clocks and the links have differential
// delays. Every lane is written into a small FIFO; the aligner waits until the
// enabled lanes all show a header with the same frame counter and then reads
// all of them in lockstep, one word per lane per beat. Because the whole array
// transmits synchronously, a late lane is given up quickly: TIMEOUT clocks
// after the first header was seen, the lanes that are still missing are
// declared lost for this frame group; their words are delivered as zero and
// marked in a_lost. This behaviour (small FIFOs, a short wait relative to a
// reference, giving up on missing packets, forwarding with flags) follows the
// design; how it is done here is this design's own:
//   * the reference frame counter is the largest one seen among the lanes,
//     so a lane still holding an older packet has that packet discarded;
//   * a header whose cookie is wrong is discarded with its packet;
//   * a lane that ends early, or not with the reference lane, is flagged in
//     a_err and resynchronised on its next packet;
//   * a word arriving at a full FIFO is dropped and counted in ovf_count.
//
// Output: a_valid for one beat per payload word (the header is consumed
// here and given in a_hdr, the header of the lowest aligned lane), a_sof on
// the first payload beat, a_last on the last (the status word), a_data per
// lane, a_lost per lane (constant during a packet), a_err per lane (valid
// with a_last). The aligned stream has no back-pressure: the consumers
// (channel selectors) always accept. Throughput: one word per lane per clock.
module ct_frame_aligner
  import ct_pkg::*;
#(
  parameter int unsigned N       = 16,   // lanes
  parameter int unsigned DEPTH   = 128,  // words per lane FIFO (power of 2)
  parameter int unsigned TIMEOUT = 96    // clocks to wait for late lanes
)(
  input  logic                clk,
  input  logic                rst_n,
  input  logic [N-1:0]        lane_en,
  input  logic [N-1:0]        s_valid,
  input  logic [N-1:0][31:0]  s_data,
  input  logic [N-1:0]        s_last,
  input  logic [N-1:0]        s_err,
  output logic                a_valid,
  output logic                a_sof,
  output logic                a_last,
  output logic [N-1:0][31:0]  a_data,
  output logic [N-1:0]        a_lost,
  output logic [N-1:0]        a_err,
  output ct_header_t          a_hdr,
  output logic [31:0]         lost_count,   // lane packets declared missing
  output logic [31:0]         drop_count,   // stale or bad-cookie packets dropped
  output logic [31:0]         ovf_count     // words dropped at a full FIFO
);

  localparam int unsigned AW = $clog2(DEPTH);

  typedef struct packed {
    logic        err;
    logic        last;
    logic [31:0] data;
  } entry_t;

  entry_t         mem   [N][DEPTH];
  logic [AW:0]    wr_ptr[N];
  logic [AW:0]    rd_ptr[N];
  logic [AW:0]    count [N];
  logic [N-1:0]   flush;           // lane is discarding the rest of a packet
  logic [N-1:0]   ready_q;         // lane takes part in the current packet
  logic [N-1:0]   err_q;

  typedef enum logic [1:0] {A_IDLE, A_WAIT, A_STREAM} astate_t;
  astate_t state;
  logic [47:0] target;
  logic [$clog2(TIMEOUT+1)-1:0] timer;

  // ------------------------------------------------------ header peeking
  logic [N-1:0]        hdr_av, ck_ok;
  logic [N-1:0][47:0]  hdr_ts;
  logic [N-1:0][127:0] hdr_w;

  always_comb begin
    for (int l = 0; l < N; l++) begin
      count[l] = wr_ptr[l] - rd_ptr[l];
      for (int k = 0; k < 4; k++)
        hdr_w[l][127-32*k -: 32] = mem[l][AW'(rd_ptr[l][AW-1:0] + AW'(k))].data;
      hdr_av[l] = lane_en[l] && !flush[l] && (count[l] >= (AW+1)'(4));
      ck_ok[l]  = (hdr_w[l][103:96] == CT_COOKIE);
      hdr_ts[l] = {hdr_w[l][47:32], hdr_w[l][31:0]};
    end
  end

  // largest frame counter among valid headers (and the current target)
  logic [47:0] cur_max;
  logic        any_hdr;
  always_comb begin
    cur_max = (state == A_WAIT) ? target : '0;
    any_hdr = 1'b0;
    for (int l = 0; l < N; l++)
      if (hdr_av[l] && ck_ok[l]) begin
        any_hdr = 1'b1;
        if (hdr_ts[l] > cur_max) cur_max = hdr_ts[l];
      end
  end

  logic [N-1:0] match, stale, badck;
  logic         all_ready, release_now;
  always_comb begin
    all_ready = 1'b1;
    for (int l = 0; l < N; l++) begin
      match[l] = hdr_av[l] && ck_ok[l] && (hdr_ts[l] == cur_max);
      stale[l] = hdr_av[l] && ck_ok[l] && (hdr_ts[l] <  cur_max) && (state != A_STREAM);
      badck[l] = hdr_av[l] && !ck_ok[l] && (state != A_STREAM);
      if (lane_en[l] && !match[l]) all_ready = 1'b0;
    end
    release_now = (state == A_WAIT) &&
                  (all_ready || (32'(timer) >= TIMEOUT));
  end

  // lowest matching lane gives the header
  logic [$clog2(N+1)-1:0] ref_sel;
  always_comb begin
    ref_sel = '0;
    for (int l = N - 1; l >= 0; l--) if (match[l]) ref_sel = l[$clog2(N+1)-1:0];
  end

  // ------------------------------------------------------ streaming beat
  logic   beat;
  entry_t head [N];
  logic   ref_last;
  always_comb begin
    beat     = (state == A_STREAM);
    ref_last = 1'b0;
    for (int l = 0; l < N; l++) begin
      head[l] = mem[l][rd_ptr[l][AW-1:0]];
      if (ready_q[l] && count[l] == 0) beat = 1'b0;
    end
    for (int l = N - 1; l >= 0; l--)
      if (ready_q[l]) ref_last = head[l].last;
  end

  always_comb begin
    a_valid = beat;
    a_last  = beat && ref_last;
    for (int l = 0; l < N; l++) begin
      a_data[l] = ready_q[l] ? head[l].data : 32'd0;
      a_err[l]  = err_q[l] || (ready_q[l] && head[l].err) ||
                  (ready_q[l] && ref_last && !head[l].last);
    end
  end

  // ------------------------------------------------------ sequential part
  logic first_beat;
  assign a_sof = beat && first_beat;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state      <= A_IDLE;
      target     <= '0;
      timer      <= '0;
      flush      <= '0;
      ready_q    <= '0;
      err_q      <= '0;
      a_lost     <= '0;
      a_hdr      <= '0;
      first_beat <= 1'b0;
      lost_count <= '0;
      drop_count <= '0;
      ovf_count  <= '0;
      for (int l = 0; l < N; l++) begin
        wr_ptr[l] <= '0;
        rd_ptr[l] <= '0;
      end
    end else begin
      // writes
      for (int l = 0; l < N; l++) begin
        if (s_valid[l] && lane_en[l]) begin
          if (count[l] < (AW+1)'(DEPTH)) begin
            mem[l][wr_ptr[l][AW-1:0]] <= '{err: s_err[l], last: s_last[l], data: s_data[l]};
            wr_ptr[l] <= wr_ptr[l] + 1'b1;
          end else begin
            ovf_count <= ovf_count + 1;
          end
        end
      end

      // flushing lanes discard one word per clock up to their last word
      for (int l = 0; l < N; l++) begin
        if (flush[l] && count[l] != 0) begin
          rd_ptr[l] <= rd_ptr[l] + 1'b1;
          if (head[l].last) flush[l] <= 1'b0;
        end
        if (!lane_en[l]) flush[l] <= 1'b0;
        if (stale[l] || badck[l]) begin
          flush[l]   <= 1'b1;
          drop_count <= drop_count + 1;
        end
      end

      unique case (state)
        A_IDLE: if (any_hdr) begin
          state  <= A_WAIT;
          target <= cur_max;
          timer  <= '0;
        end
        A_WAIT: begin
          target <= cur_max;
          timer  <= timer + 1'b1;
          if (release_now) begin
            state      <= A_STREAM;
            ready_q    <= match & lane_en;
            a_lost     <= lane_en & ~match;
            err_q      <= '0;
            first_beat <= 1'b1;
            lost_count <= lost_count + 32'($countones(lane_en & ~match));
            a_hdr      <= ct_header_t'(hdr_w[ref_sel]);
            for (int l = 0; l < N; l++)
              if (match[l]) rd_ptr[l] <= rd_ptr[l] + (AW+1)'(4);
          end
        end
        A_STREAM: if (beat) begin
          first_beat <= 1'b0;
          for (int l = 0; l < N; l++) begin
            if (ready_q[l]) begin
              rd_ptr[l] <= rd_ptr[l] + 1'b1;
              // lane ended early: keep it out for the rest of the packet
              if (head[l].last && !ref_last) begin
                ready_q[l] <= 1'b0;
                err_q[l]   <= 1'b1;
              end
              // reference ended, lane did not: discard the rest of it
              if (ref_last && !head[l].last) flush[l] <= 1'b1;
            end
          end
          if (ref_last) begin
            state   <= A_IDLE;
            ready_q <= '0;
          end
        end
        default: state <= A_IDLE;
      endcase
    end
  end

endmodule
