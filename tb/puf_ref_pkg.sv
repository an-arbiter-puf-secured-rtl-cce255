// puf_ref_pkg: reference model for the testbenches. Adds up the net delays
// along the two paths of an arbiter PUF for a given challenge. It uses only
// the delay table of puf_pkg, not the netlist, so it checks the chain's wiring,
// stage logic and arbiter independently.
`timescale 1ps/1fs
package puf_ref_pkg;

  typedef struct {
    longint t_above;  // arrival of the upper edge at the arbiter (fs after launch)
    longint t_below;  // arrival of the lower edge at the arbiter
  } arrival_t;

  function automatic arrival_t arrival(logic [31:0] layout_seed, logic [31:0] chip_seed,
                                       int unsigned n_stages, int unsigned puf_index,
                                       logic [63:0] c, bit dc);
    longint ta, tb, na, nb;
    bit crossed;
    arrival_t res;
    ta = 0;
    tb = 0;
    for (int unsigned s = 0; s <= n_stages; s++) begin
      crossed = dc || ((s > 0) && c[s-1]);
      if (!crossed) begin
        na = ta + longint'(puf_pkg::net_delay_fs(layout_seed, chip_seed, n_stages, puf_index, 4*s+0));
        nb = tb + longint'(puf_pkg::net_delay_fs(layout_seed, chip_seed, n_stages, puf_index, 4*s+3));
      end else begin
        na = tb + longint'(puf_pkg::net_delay_fs(layout_seed, chip_seed, n_stages, puf_index, 4*s+1));
        nb = ta + longint'(puf_pkg::net_delay_fs(layout_seed, chip_seed, n_stages, puf_index, 4*s+2));
      end
      ta = na;
      tb = nb;
    end
    res.t_above = ta + longint'(puf_pkg::net_delay_fs(layout_seed, chip_seed, n_stages, puf_index,
                                                      4*(n_stages+1)+0));
    res.t_below = tb + longint'(puf_pkg::net_delay_fs(layout_seed, chip_seed, n_stages, puf_index,
                                                      4*(n_stages+1)+1));
    return res;
  endfunction

  // Delay difference t_above - t_below in fs: positive means the lower edge
  // wins and the response is 1.
  function automatic longint delta_fs(logic [31:0] layout_seed, logic [31:0] chip_seed,
                                      int unsigned n_stages, int unsigned puf_index,
                                      logic [63:0] c);
    arrival_t a;
    a = arrival(layout_seed, chip_seed, n_stages, puf_index, c, 1'b0);
    return a.t_above - a.t_below;
  endfunction

  function automatic logic [63:0] rand64();
    return {$urandom(), $urandom()};
  endfunction

  // Server side, second selection method: model the reference chip, estimate
  // the spread of the delay difference over random challenges, and keep random
  // challenges whose predicted difference lies within bound_ratio times that
  // spread. The published bound b = 0.2 against a fitted spread of 6.78 gives
  // bound_ratio = 0.2 / 6.78. Returns the number of candidates tried.
  function automatic int select_mchallenges(logic [31:0] layout_seed, logic [31:0] ref_chip,
                                            int unsigned n_stages, int unsigned puf_index,
                                            int unsigned n_wanted, real bound_ratio,
                                            ref logic [63:0] list [$]);
    real sum2, sd, bound;
    longint d;
    int tries;
    sum2 = 0.0;
    for (int k = 0; k < 1000; k++) begin
      d = delta_fs(layout_seed, ref_chip, n_stages, puf_index, rand64());
      sum2 += real'(d) * real'(d);
    end
    sd = $sqrt(sum2 / 1000.0);
    bound = bound_ratio * sd;
    list.delete();
    tries = 0;
    while (list.size() < n_wanted && tries < 1_000_000) begin
      logic [63:0] ch;
      ch = rand64();
      tries++;
      d = delta_fs(layout_seed, ref_chip, n_stages, puf_index, ch);
      if (real'(d) < bound && real'(d) > -bound) list.push_back(ch);
    end
    return tries;
  endfunction

  function automatic int popcount100(logic [99:0] v);
    int n;
    n = 0;
    for (int i = 0; i < 100; i++) n += int'(v[i]);
    return n;
  endfunction

endpackage
