// ct_tb_pkg: reference model shared by the corner-turn testbenches.
//
// It describes every packet of the corner-turn by what it should contain:
// a list of global channel numbers (one per channel slot), a list of global
// input numbers (one per antenna slot), the number of frames and the first
// frame counter. The test pattern of the channelizers is a fixed function of
// (input, channel, frame), so the expected content of any packet at any stage
// can be written down without looking at the design. The package also has a
// bit-serial CRC-32, a link-code encoder/decoder and an Ethernet frame parser
// written independently of the RTL.
package ct_tb_pkg;

  typedef logic [31:0] wq_t[$];
  typedef int          iq_t[$];

  // ---------------------------------------------------- test pattern
  function automatic logic [7:0] ev(int ant, int ch, longint fr);
    int unsigned h;
    h = ant * 131 + ch * 7 + int'(fr) * 29 + (ant >> 3) * 17;
    return 8'(h ^ (h >> 8));
  endfunction
  function automatic logic fv(int ant, int ch, longint fr);
    return ((ant + 3 * ch + 5 * int'(fr)) % 7) == 0;
  endfunction
  function automatic logic [1:0] av(int ant, longint fr);
    return 2'((ant * 5 + int'(fr)) % 4);
  endfunction

  // global input number of input i of board (crate, slot)
  function automatic int gin(int crate, int slot, int i);
    return crate * 256 + slot * 16 + i;
  endfunction

  function automatic iq_t range_q(int first, int n);
    iq_t q;
    for (int i = 0; i < n; i++) q.push_back(first + i);
    return q;
  endfunction

  // ---------------------------------------------------- packet builder
  // lost_ant: input numbers whose data is expected as missing
  function automatic wq_t build_pkt(int stage, int crate, int slot, int lane,
                                    int nf, iq_t chans, iq_t ants, longint ts,
                                    logic [31:0] status, iq_t lost_ant = {});
    wq_t q;
    int nc = chans.size();
    int na = ants.size();
    logic [7:0] bytes[$];
    logic       bits[$];
    logic [1:0] adc[$];
    q.push_back({2'(stage), 4'(crate), 4'(slot), 6'(lane), 4'h1, 4'd4, 8'hC5});
    q.push_back({4'h1, 4'(nf), 12'(nc), 12'(na)});
    q.push_back({16'h0, 16'(ts >> 32)});
    q.push_back(32'(ts));
    for (int f = 0; f < nf; f++)
      for (int c = 0; c < nc; c++)
        for (int a = 0; a < na; a++) begin
          bit lost = 0;
          foreach (lost_ant[k]) if (lost_ant[k] == ants[a]) lost = 1;
          bytes.push_back(lost ? 8'h00 : ev(ants[a], chans[c], ts + f));
          bits.push_back(lost ? 1'b1 : fv(ants[a], chans[c], ts + f));
        end
    for (int f = 0; f < nf; f++)
      for (int a = 0; a < na; a++) begin
        bit lost = 0;
        foreach (lost_ant[k]) if (lost_ant[k] == ants[a]) lost = 1;
        adc.push_back(lost ? 2'b11 : av(ants[a], ts + f));
      end
    for (int i = 0; i < bytes.size(); i += 4)
      q.push_back({bytes[i+3], bytes[i+2], bytes[i+1], bytes[i]});
    for (int i = 0; i < bits.size(); i += 32) begin
      logic [31:0] w = '0;
      for (int b = 0; b < 32; b++) if (i + b < bits.size()) w[b] = bits[i+b];
      q.push_back(w);
    end
    for (int i = 0; i < adc.size(); i += 16) begin
      logic [31:0] w = '0;
      for (int b = 0; b < 16; b++) if (i + b < adc.size()) w[2*b +: 2] = adc[i+b];
      q.push_back(w);
    end
    q.push_back(status);
    return q;
  endfunction

  // ---------------------------------------------------- CRC-32 (bit serial)
  function automatic logic [31:0] crc_bytes(logic [7:0] b[$]);
    logic [31:0] c = 32'hFFFFFFFF;
    foreach (b[i]) begin
      for (int k = 0; k < 8; k++) begin
        logic bit_in = b[i][k] ^ c[0];
        c = {1'b0, c[31:1]};
        if (bit_in) c = c ^ 32'hEDB88320;
      end
    end
    return ~c;
  endfunction

  function automatic logic [31:0] crc_words(wq_t w);
    logic [7:0] b[$];
    foreach (w[i]) for (int k = 0; k < 4; k++) b.push_back(w[i][8*k +: 8]);
    return crc_bytes(b);
  endfunction

  // ---------------------------------------------------- link code
  // returns {ctrl, data} words: start, payload, CRC, terminate, idle
  typedef logic [35:0] lq_t[$];
  function automatic lq_t link_encode(wq_t w, bit corrupt = 0);
    lq_t q;
    q.push_back({4'h1, 32'h555555FB});
    foreach (w[i]) q.push_back({4'h0, (corrupt && i == 5) ? ~w[i] : w[i]});
    q.push_back({4'h0, crc_words(w)});
    q.push_back({4'hF, 32'h070707FD});
    q.push_back({4'hF, 32'h07070707});
    return q;
  endfunction

  function automatic bit same(wq_t a, wq_t b, int skip_last = 0);
    if (a.size() != b.size()) return 0;
    for (int i = 0; i < a.size() - skip_last; i++) if (a[i] !== b[i]) return 0;
    return 1;
  endfunction

endpackage
