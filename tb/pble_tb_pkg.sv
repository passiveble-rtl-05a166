// pble_tb_pkg -- reference models for the PassiveBLE tag testbenches.
//
// Written from the BLE link-layer rules, independently of the RTL:
//   * ref_crc: the BLE CRC-24 LFSR as the specification draws it (positions
//     0..23, feedback from position 23 into positions 0,1,3,4,6,9,10), started
//     from any CRC_Init; returns the 24 CRC bits in air order.
//   * ref_whiten: the BLE whitening LFSR x^7+x^4+1, position 0 set to 1 and
//     positions 1..6 set to the channel index (MSB in position 1).
//   * excitation-source model (build_excitation): the pre-modulated packet a
//     PassiveBLE excitation source sends for one tag in one connection event,
//     with E_seq = CRC(CRC_Init, header||0) XOR whitening in the tag's CRC
//     field and the whitening sequence in the tag's payload field.
//   * tag-address code: each of the 32/n address bits spans n symbols; a 1
//     makes every symbol differ from the one before it, a 0 keeps it.
// All bit streams are in air order, one entry per symbol.
package pble_tb_pkg;

  typedef bit bitq_t[$];

  function automatic bitq_t bytes_to_bits(input byte unsigned b[$]);
    bitq_t q;
    foreach (b[i]) for (int k = 0; k < 8; k++) q.push_back(b[i][k]);
    return q;
  endfunction

  function automatic bitq_t ref_crc(input bit [23:0] init, input bitq_t data);
    bit pos [24];
    bitq_t out;
    for (int i = 0; i < 24; i++) pos[i] = init[i];
    foreach (data[n]) begin
      bit fb, nxt [24];
      fb = pos[23] ^ data[n];
      for (int i = 23; i > 0; i--) nxt[i] = pos[i-1];
      nxt[0] = fb;
      nxt[1] ^= fb; nxt[3] ^= fb; nxt[4] ^= fb; nxt[6] ^= fb;
      nxt[9] ^= fb; nxt[10] ^= fb;
      pos = nxt;
    end
    for (int i = 23; i >= 0; i--) out.push_back(pos[i]);
    return out;
  endfunction

  function automatic bitq_t ref_whiten(input int unsigned chan, input int unsigned len);
    bit r [7];
    bitq_t w;
    r[0] = 1'b1;
    for (int i = 1; i <= 6; i++) r[i] = chan[6-i];
    for (int n = 0; n < int'(len); n++) begin
      bit o;
      o = r[6];
      w.push_back(o);
      for (int i = 6; i > 0; i--) r[i] = r[i-1];
      r[0] = o;
      r[4] = r[4] ^ o;
    end
    return w;
  endfunction

  // Symbols of the Access Address carrying tag address 'id' with n symbols
  // per address bit, given the last preamble symbol.
  function automatic bitq_t addr_symbols(input int unsigned id, input int unsigned n,
                                         input bit last);
    bitq_t q;
    bit cur = last;
    for (int b = 0; b < 32 / int'(n); b++)
      for (int k = 0; k < int'(n); k++) begin
        if (id[b]) cur = !cur;
        q.push_back(cur);
      end
    return q;
  endfunction

  typedef struct {
    bitq_t sym;        // excitation symbols from the first preamble symbol
    int    pre_syms;   // preamble length
    int    tag_start;  // index of the first tag-packet symbol in sym
    int    pay_start;  // index of the first tag payload symbol
    int    crc_start;  // index of the first tag CRC symbol
    int    tag_end;    // index one past the tag CRC
  } exc_pkt_t;

  // Tag packet header: LLID = 2 (start of L2CAP), length L; the rest zero.
  function automatic bitq_t tag_header(input int unsigned len);
    byte unsigned h[$];
    h.push_back(8'h02);
    h.push_back(8'(len));
    return bytes_to_bits(h);
  endfunction

  function automatic exc_pkt_t build_excitation(
      input bit phy2m, input int unsigned id, input int unsigned n,
      input int unsigned chan, input bit [23:0] crc_init,
      input bit [31:0] tag_aa, input int unsigned len, input int unsigned seed);
    exc_pkt_t p;
    bitq_t    aa, hdr, w, cexc, pre, zeros, tmp;
    int       npre = phy2m ? 16 : 8;
    int       unsigned s = seed;
    byte unsigned aab[$];
    // Excitation preamble, alternating; its last symbol is 0.
    for (int i = 0; i < npre; i++) p.sym.push_back(bit'((npre - 1 - i) % 2));
    p.pre_syms = npre;
    aa = addr_symbols(id, n, 1'b0);
    foreach (aa[i]) p.sym.push_back(aa[i]);
    // Excitation header: arbitrary bits (whitened by the source).
    for (int i = 0; i < 16; i++) begin s = s * 1103515245 + 12345; p.sym.push_back(s[16]); end
    // Re-allocated bytes: the tag packet's preamble, AA, whitened header.
    p.tag_start = p.sym.size();
    for (int i = 0; i < npre; i++) p.sym.push_back(bit'((tag_aa[0] ^ i[0]) ^ 1'b1));
    for (int i = 0; i < 4; i++) aab.push_back(tag_aa[8*i +: 8]);
    tmp = bytes_to_bits(aab);
    foreach (tmp[i]) p.sym.push_back(tmp[i]);
    hdr = tag_header(len);
    w = ref_whiten(chan, 16 + 8 * len + 24);
    for (int i = 0; i < 16; i++) p.sym.push_back(hdr[i] ^ w[i]);
    // Tag payload field: whitening only. Tag CRC field: CRC_Init share.
    p.pay_start = p.sym.size();
    for (int i = 0; i < int'(8 * len); i++) p.sym.push_back(w[16 + i]);
    p.crc_start = p.sym.size();
    zeros = hdr;
    for (int i = 0; i < int'(8 * len); i++) zeros.push_back(1'b0);
    cexc = ref_crc(crc_init, zeros);
    for (int i = 0; i < 24; i++) p.sym.push_back(cexc[i] ^ w[16 + 8 * len + i]);
    p.tag_end = p.sym.size();
    // Excitation CRC (dropped by the receiver): arbitrary bits.
    for (int i = 0; i < 24; i++) begin s = s * 1103515245 + 12345; p.sym.push_back(s[16]); end
    return p;
  endfunction

  // Receiver check of the symbols the commodity device decodes in the tag
  // packet (rx[0] = first tag-packet preamble symbol). Returns 1 if the
  // preamble, Access Address, header, payload and CRC are all correct.
  function automatic bit receiver_ok(input bit phy2m, input bitq_t rx,
      input int unsigned chan, input bit [23:0] crc_init, input bit [31:0] tag_aa,
      input byte unsigned payload[$], output int unsigned bad_bits);
    int npre = phy2m ? 16 : 8;
    int len = payload.size();
    bitq_t w, pdu, crc, want;
    bit ok = 1;
    bad_bits = 0;
    if (rx.size() != npre + 32 + 16 + 8 * len + 24) begin bad_bits = 9999; return 0; end
    for (int i = 0; i < npre; i++) if (rx[i] != bit'((tag_aa[0] ^ i[0]) ^ 1'b1)) begin ok = 0; bad_bits++; end
    for (int i = 0; i < 32; i++) if (rx[npre + i] != tag_aa[i]) begin ok = 0; bad_bits++; end
    w = ref_whiten(chan, 16 + 8 * len + 24);
    for (int i = 0; i < 16 + 8 * len; i++) pdu.push_back(rx[npre + 32 + i] ^ w[i]);
    want = tag_header(len);
    want = {want, bytes_to_bits(payload)};
    foreach (want[i]) if (pdu[i] != want[i]) begin ok = 0; bad_bits++; end
    crc = ref_crc(crc_init, pdu);
    for (int i = 0; i < 24; i++)
      if ((rx[npre + 48 + 8 * len + i] ^ w[16 + 8 * len + i]) != crc[i]) begin ok = 0; bad_bits++; end
    return ok;
  endfunction

  // Comparator output, one entry per clock cycle, for a symbol stream: the
  // delay-and-mix front end gives a pulse of 'width' cycles wherever a symbol
  // differs from the previous one, 'delay' cycles after the symbol edge, with
  // a random timing error of up to +/-'jitter' cycles. Symbol i starts at
  // cycle lead + i*sps.
  function automatic bitq_t comp_wave(input bitq_t sym, input int sps, input int lead,
                                      input int delay, input int jitter, input int width);
    bitq_t w;
    int total = lead + sym.size() * sps + 4 * sps;
    for (int t = 0; t < total; t++) w.push_back(1'b0);
    for (int i = 1; i < sym.size(); i++)
      if (sym[i] != sym[i-1]) begin
        int j = (jitter > 0) ? int'($urandom % (2 * jitter + 1)) - jitter : 0;
        int t0 = lead + i * sps + delay + j;
        for (int k = 0; k < width; k++) w[t0 + k] = 1'b1;
      end
    return w;
  endfunction

endpackage
