// puf_pkg: constants and the placement/delay model shared by the random-layout
// arbiter PUF design.
//
// Sizes: 64 delay stages per PUF, 100 m-challenges per fingerprint, ten PUFs
// per configuration, a LUT region of 84 columns x 17 rows = 1428 LUTs, and an
// acceptance threshold of t = 12 differing bits. These are the published numbers.
//
// Placement model. A configuration (the "second challenge") places every LUT
// of every PUF at a random site of the 1428-LUT region. Here a configuration
// is a 32-bit seed, and a keyed 12-bit Feistel permutation with cycle walking
// maps LUT number k (0..1427) to a site. Being a permutation, it never puts two
// LUTs on one site, so the ten PUFs of one configuration never share a LUT.
//
// Delay model. Routing delay grows with the number of switches a net passes,
// so a net costs a fixed base plus a per-hop delay times the Manhattan distance
// between its two sites. On top of that, each physical LUT output and LUT input
// pin of a given chip gets a fixed manufacturing offset, drawn from the chip
// seed and the site. It depends on the hardware, not on the layout. The
// numbers are this design's own. The only guide is the measured ratio of about
// 30 between routing-induced and manufacturing-induced stage delay differences.
// All delays are in femtoseconds.
`timescale 1ps/1fs
package puf_pkg;

  // ---- published sizes ----
  localparam int unsigned N_STAGES    = 64;   // delay stages per PUF
  localparam int unsigned N_MCHAL     = 100;  // m-challenges per fingerprint
  localparam int unsigned N_PUFS      = 10;   // PUFs per configuration
  localparam int unsigned REGION_COLS = 84;
  localparam int unsigned REGION_ROWS = 17;
  localparam int unsigned REGION_LUTS = REGION_COLS * REGION_ROWS;  // 1428
  localparam int unsigned THRESH_T    = 12;   // accept if Hamming distance <= t

  // ---- delay model constants (this design's choice) ----
  localparam int unsigned T_BASE_FS   = 250_000;  // LUT plus local routing
  localparam int unsigned T_HOP_FS    = 30_000;   // per routing hop
  localparam int unsigned MFG_FS      = 35_000;   // manufacturing offset range +/-
  localparam int unsigned JITTER_FS   = 1_000;    // per-transition jitter, 0..JITTER_FS

  // LUTs one PUF occupies: 2 per stage (stage 0, tied straight, plus N stages),
  // one arbiter LUT and one launch cell.
  function automatic int unsigned luts_per_puf(int unsigned n_stages);
    return 2 * (n_stages + 1) + 2;
  endfunction

  // Routed nets of one PUF: 4 per stage (two sources x two destination LUTs),
  // plus 2 into the arbiter.
  function automatic int unsigned nets_per_puf(int unsigned n_stages);
    return 4 * (n_stages + 1) + 2;
  endfunction

  // 32-bit integer mixer (xorshift-multiply finaliser).
  function automatic logic [31:0] mix32(logic [31:0] x);
    x = x ^ (x >> 16);
    x = x * 32'h7feb_352d;
    x = x ^ (x >> 15);
    x = x * 32'h846c_a68b;
    x = x ^ (x >> 16);
    return x;
  endfunction

  // Keyed 4-round Feistel permutation of 0..4095.
  function automatic int unsigned perm12(logic [31:0] seed, int unsigned v);
    logic [5:0] l, r, t;
    logic [31:0] f;
    l = v[11:6];
    r = v[5:0];
    for (int rnd = 0; rnd < 4; rnd++) begin
      f = mix32(seed ^ (32'(rnd) << 24) ^ 32'(r));
      t = r;
      r = l ^ f[5:0];
      l = t;
    end
    return {20'd0, l, r};
  endfunction

  // Site (0..1427) of LUT number k (k < 1428) under configuration seed.
  function automatic int unsigned lut_site(logic [31:0] seed, int unsigned k);
    int unsigned v;
    v = perm12(seed, k);
    while (v >= REGION_LUTS) v = perm12(seed, v);
    return v;
  endfunction

  // Manufacturing offset (signed fs) of one physical resource of one chip:
  // pin 0..1 are the two data inputs of the LUT at site, pin 2 its output.
  function automatic int mfg_offset_fs(logic [31:0] chip_seed, int unsigned site,
                                       int unsigned pin);
    logic [31:0] h;
    h = mix32(chip_seed ^ mix32(32'(site) * 4 + 32'(pin) + 32'h9e37_79b9));
    return int'(h % (2 * MFG_FS + 1)) - int'(MFG_FS);
  endfunction

  // Local LUT number (within one PUF) of the source and destination of net n.
  // Stage s (0..n_stages) has upper LUT 2s and lower LUT 2s+1; the arbiter is
  // LUT 2(n_stages+1), the launch cell LUT 2(n_stages+1)+1. Net 4s+q feeds stage s:
  //   q=0 upper source -> upper LUT (straight)   q=1 lower source -> upper LUT (cross)
  //   q=2 upper source -> lower LUT (cross)      q=3 lower source -> lower LUT (straight)
  // For stage 0 both sources are the launch cell. Nets 4(n_stages+1)+0/1 run from
  // the last upper/lower LUT to the arbiter.
  function automatic int unsigned net_src(int unsigned n_stages, int unsigned n);
    int unsigned s, q;
    if (n >= 4 * (n_stages + 1)) return 2 * n_stages + (n - 4 * (n_stages + 1));
    s = n / 4;
    q = n % 4;
    if (s == 0) return 2 * (n_stages + 1) + 1;
    return 2 * (s - 1) + ((q == 1 || q == 3) ? 1 : 0);
  endfunction

  function automatic int unsigned net_dst(int unsigned n_stages, int unsigned n);
    int unsigned s, q;
    if (n >= 4 * (n_stages + 1)) return 2 * (n_stages + 1);
    s = n / 4;
    q = n % 4;
    return 2 * s + ((q >= 2) ? 1 : 0);
  endfunction

  // Input pin a net lands on: 0 for the own-path input, 1 for the other path.
  function automatic int unsigned net_pin(int unsigned n_stages, int unsigned n);
    if (n >= 4 * (n_stages + 1)) return n - 4 * (n_stages + 1);
    return ((n % 4) == 1 || (n % 4) == 2) ? 1 : 0;
  endfunction

  // Delay (fs) of net n of PUF puf_index in configuration layout_seed on chip chip_seed.
  function automatic int unsigned net_delay_fs(logic [31:0] layout_seed,
                                               logic [31:0] chip_seed,
                                               int unsigned n_stages,
                                               int unsigned puf_index,
                                               int unsigned n);
    int unsigned base, ss, sd, xs, ys, xd, yd, hops;
    int d;
    base = puf_index * luts_per_puf(n_stages);
    ss = lut_site(layout_seed, base + net_src(n_stages, n));
    sd = lut_site(layout_seed, base + net_dst(n_stages, n));
    xs = ss % REGION_COLS;  ys = ss / REGION_COLS;
    xd = sd % REGION_COLS;  yd = sd / REGION_COLS;
    hops = ((xs > xd) ? xs - xd : xd - xs) + ((ys > yd) ? ys - yd : yd - ys);
    d = int'(T_BASE_FS + T_HOP_FS * hops)
        + mfg_offset_fs(chip_seed, ss, 2)
        + mfg_offset_fs(chip_seed, sd, net_pin(n_stages, n));
    return unsigned'(d);
  endfunction

endpackage
