// fed_tb_pkg: stimulus and reference model shared by the FED testbenches.
//
// Test frames are built from deterministic functions of (fibre, event, strip):
// a pedestal per strip, a common-mode shift per chip and event, a noise value
// per strip, and sparse hits whose density is set in hits per 1000 strips.
// The reference model computes from the same functions, without using the
// design's code, what the Front-End logic must produce: the median by sorting,
// the clusters by scanning run by run.
package fed_tb_pkg;

  localparam int HI_LEVEL  = 1000;  // header 1
  localparam int LO_LEVEL  = 150;   // header 0 and idle baseline
  localparam int TICK      = 768;   // tick_level programmed into the design
  localparam int THR_LO    = 8;     // S/N > 2
  localparam int THR_HI    = 20;    // S/N > 5

  function automatic int unsigned mix(int unsigned a, int unsigned b, int unsigned c);
    int unsigned h;
    h = a * 32'h9E3779B1 ^ (b + 32'h7F4A7C15) * 32'h85EBCA77 ^ (c + 32'h165667B1) * 32'hC2B2AE3D;
    h = h ^ (h >> 15);
    h = h * 32'h2C1B3C6D;
    h = h ^ (h >> 12);
    return h;
  endfunction

  function automatic int ped_of(int f, int s);   return 300 + (f * 37 + s * 11) % 64; endfunction
  function automatic int noise_of(int f, int s); return 4 + (f + s) % 4;               endfunction
  function automatic int cm_of(int f, int apv, int ev);
    return (f * 5 + apv * 13 + ev * 7) % 41 - 20;
  endfunction

  // signal of strip s (hits only), occupancy in hits per 1000 strips
  function automatic int sig_of(int f, int ev, int s, int occ);
    int unsigned h;
    h = mix(f, ev, s);
    if (h % 1000 >= occ) return 0;
    return 10 + int'((h >> 10) % 340);
  endfunction

  function automatic int sample_of(int f, int ev, int s, int occ);
    int v;
    v = ped_of(f, s) + cm_of(f, s / 128, ev) + sig_of(f, ev, s, occ);
    if (v < 0) v = 0;
    if (v > 1023) v = 1023;
    return v;
  endfunction

  // strip carried by data word idx of a frame (APV25 output order, two chips)
  function automatic int strip_of_word(int idx);
    int n, q;
    n = idx / 2;
    q = n % 4;             // which group of 32
    return (idx % 2) * 128 + q * 32 + (n / 16) + ((n / 4) % 4) * 8;
  endfunction

  // k-th smallest of a list (selection by counting; avoids built-in sort)
  function automatic int kth_smallest(int q[$], int k);
    for (int i = 0; i < q.size(); i++) begin
      int below = 0, same = 0;
      for (int j = 0; j < q.size(); j++) begin
        if (q[j] < q[i]) below++;
        else if (q[j] == q[i]) same++;
      end
      if (below <= k && k < below + same) return q[i];
    end
    return 0;
  endfunction

  // expected record bytes of a fibre for one event
  function automatic void expected_bytes(int f, int ev, int occ, bit raw, ref byte unsigned q[$]);
    int v [256];
    int srt [$];
    int cm [2];
    bit lo [256];
    bit hi [256];
    int s, e, t;
    q.delete();
    for (s = 0; s < 256; s++) v[s] = sample_of(f, ev, s, occ);
    if (raw) begin
      for (s = 0; s < 256; s++) begin
        q.push_back(byte'(v[s] >> 8));
        q.push_back(byte'(v[s] & 255));
      end
      return;
    end
    for (int a = 0; a < 2; a++) begin
      srt.delete();
      for (s = 0; s < 128; s++) srt.push_back(v[a*128 + s] - ped_of(f, a*128 + s));
      cm[a] = kth_smallest(srt, 63);
    end
    for (s = 0; s < 256; s++) begin
      t = v[s] - ped_of(f, s) - cm[s / 128];
      v[s] = t;
      lo[s] = (t > 0) && (4 * t > THR_LO * noise_of(f, s));
      hi[s] = (t > 0) && (4 * t > THR_HI * noise_of(f, s));
    end
    s = 0;
    while (s < 256) begin
      if (!lo[s]) begin s++; continue; end
      e = s;
      while (e + 1 < 256 && lo[e + 1] && (e + 1) % 128 != 0) e++;
      if (e > s || hi[s]) begin
        q.push_back(byte'(s));
        q.push_back(byte'(e - s + 1));
        for (int k = s; k <= e; k++) q.push_back(byte'(v[k] > 255 ? 255 : v[k]));
      end
      s = e + 1;
    end
  endfunction

  function automatic logic [15:0] crc16(logic [15:0] crc, logic [63:0] d);
    logic [15:0] c = crc;
    for (int i = 63; i >= 0; i--) begin
      c = (c[15] ^ d[i]) ? ({c[14:0], 1'b0} ^ 16'h1021) : {c[14:0], 1'b0};
    end
    return c;
  endfunction

endpackage
