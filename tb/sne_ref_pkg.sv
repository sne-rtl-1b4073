// sne_ref_pkg: behavioural reference model of the SNE neuron array, used by
// the cluster, slice and top testbenches.
//
// It models one slice at the level of the algorithm, not of the hardware:
// every output neuron (cluster c, neuron n) sits at (base_x + n % TILE_W,
// base_y + n / TILE_W); an UPDATE event (ch, x, y, t) adds weight
// W[(ch + wset) mod 256][ky*3 + kx], kx = x - ox + 1, ky = y - oy + 1, to every
// neuron whose 3x3 window holds the event; at the first operation of a new
// time step every potential decays linearly toward zero by L per elapsed
// step; FIRE emits every neuron whose potential is strictly above Vth and
// sets it to zero; RST zeroes everything. There is no time-multiplexing,
// no per-cluster bookkeeping and no pipeline: the hardware has to agree with
// this plain description.
package sne_ref_pkg;
  import sne_pkg::*;

  function automatic int sat8(int v);
    if (v > 127)  return 127;
    if (v < -128) return -128;
    return v;
  endfunction

  function automatic int decay(int v, int amount);
    if (v > 0) return (v > amount) ? v - amount : 0;
    if (v < 0) return (-v > amount) ? v + amount : 0;
    return 0;
  endfunction

  class slice_model;
    int n_cl, n_nr, tile_w;
    int v [][];
    int w [256][9];
    int base_x [], base_y [], wset [], out_ch [];
    int vth, leak, last_t;
    int sops;

    function new(int n_cl, int n_nr, int tile_w);
      this.n_cl = n_cl; this.n_nr = n_nr; this.tile_w = tile_w;
      v = new[n_cl];
      foreach (v[c]) v[c] = new[n_nr];
      base_x = new[n_cl]; base_y = new[n_cl]; wset = new[n_cl]; out_ch = new[n_cl];
      foreach (v[c]) begin
        foreach (v[c][n]) v[c][n] = 0;
        base_x[c] = 0; base_y[c] = 0; wset[c] = 0; out_ch[c] = 0;
      end
      for (int s = 0; s < 256; s++) for (int k = 0; k < 9; k++) w[s][k] = 0;
      vth = 0; leak = 0; last_t = 0; sops = 0;
    endfunction

    function void advance(int t);
      if (t > last_t) begin
        foreach (v[c, n]) v[c][n] = decay(v[c][n], (t - last_t) * leak);
        last_t = t;
      end
    endfunction

    function void rst(int t);
      foreach (v[c, n]) v[c][n] = 0;
      last_t = t;
    endfunction

    function void update(int t, int ch, int x, int y);
      advance(t);
      foreach (v[c, n]) begin
        int ox, oy, kx, ky;
        ox = base_x[c] + n % tile_w;
        oy = base_y[c] + n / tile_w;
        kx = x - ox + 1;
        ky = y - oy + 1;
        if (kx >= 0 && kx < 3 && ky >= 0 && ky < 3) begin
          v[c][n] = sat8(v[c][n] + w[(ch + wset[c]) % 256][ky * 3 + kx]);
          sops++;
        end
      end
    endfunction

    // returns the spikes as 32-bit memory words {UPDATE, t, out_ch, x, y}
    function void fire(int t, ref logic [31:0] spikes [$]);
      advance(t);
      foreach (v[c, n]) begin
        if (v[c][n] > vth) begin
          spikes.push_back({OP_UPDATE, 8'(t), 8'(out_ch[c]),
                            7'(base_x[c] + n % tile_w), 7'(base_y[c] + n / tile_w)});
          v[c][n] = 0;
        end
      end
    endfunction
  endclass
endpackage
