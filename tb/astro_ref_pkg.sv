// astro_ref_pkg: integer reference models used by the testbenches of the cores, the tile
// and the chip. `astro_model` repeats the astrocyte's equations and random source with
// plain integer arithmetic; `lif_model` repeats a layer of leaky integrate-and-fire
// neurons. The constants are the RTL defaults.
package astro_ref_pkg;

  function automatic longint clampu(longint v);
    return (v < 0) ? 0 : (v > 65535) ? 65535 : v;
  endfunction
  function automatic longint clamps(longint v);
    return (v < -32768) ? -32768 : (v > 32767) ? 32767 : v;
  endfunction

  class astro_model;
    int G, in_sh;
    longint ag[];
    longint cyt, ip3, er, glu, esp;
    int unsigned rnd;

    function new(int g, int unsigned seed);
      G = g;
      in_sh = $clog2(g) + 2;
      ag = new[g];
      foreach (ag[j]) ag[j] = 0;
      cyt = 0; ip3 = 0; er = 0; glu = 0; esp = 0;
      rnd = (seed & 16'hFFFF) == 0 ? 1 : (seed & 16'hFFFF);
    endfunction

    // one timestep: spikes of the enclosed neurons in, gated site spikes out
    function automatic void step(input bit s[], output bit o[]);
      longint sum = 0, serca, cicr, n_cyt, n_ip3, n_er, n_glu, n_esp;
      o = new[G];
      for (int j = 0; j < G; j++) begin
        longint dse, delta, pr;
        ag[j] = clampu(ag[j] - (ag[j] / 16) + (s[j] ? 256 : 0));
        dse   = clamps(-((1600 * ag[j]) / 256));
        delta = ((longint'(32768) * (dse + esp)) * 655) >>> 24;
        pr    = clampu(32768 + delta);
        if (s[j]) o[j] = (rnd < pr);
        else      o[j] = (pr > 32768) && (rnd < pr - 32768);
        rnd   = (rnd & 1) ? ((rnd >> 1) ^ 16'hB400) : (rnd >> 1);
        sum  += ag[j];
      end
      serca = cyt / 8;
      cicr  = (ip3 * er) / 65536;
      n_cyt = clampu(cyt - cyt / 8 - serca + sum / (longint'(1) << in_sh) + cicr);
      n_ip3 = clampu(ip3 - ip3 / 8 + cyt / 4);
      n_er  = clampu(er + serca - cicr);
      n_glu = clampu(glu - glu / 16 + ((cyt >= 512) ? 256 : 0));
      n_esp = clamps(esp + ((((400 * glu) / 256) - esp) >>> 3));
      cyt = n_cyt; ip3 = n_ip3; er = n_er; glu = n_glu; esp = n_esp;
    endfunction
  endclass

  // A layer of astrocytes: neurons shared equally among na astrocytes.
  class astro_layer_model;
    astro_model a[];
    int N, NA;
    function new(int n, int na, int unsigned seed);
      N = n; NA = na;
      a = new[na];
      foreach (a[k]) a[k] = new(n / na, (seed ^ (k * 16'h1F35)) & 16'hFFFF);
    endfunction
    function automatic void step(input bit s[], output bit o[]);
      int g = N / NA;
      o = new[N];
      for (int k = 0; k < NA; k++) begin
        bit si[], so[];
        si = new[g];
        for (int j = 0; j < g; j++) si[j] = s[k*g + j];
        a[k].step(si, so);
        for (int j = 0; j < g; j++) o[k*g + j] = so[j];
      end
    endfunction
  endclass

  class lif_model;
    int N, th, leak;
    int v[];
    function new(int n, int t = 8, int l = 2);
      N = n; th = t; leak = l;
      v = new[n];
      foreach (v[i]) v[i] = 0;
    endfunction
    function automatic void step(input int cur[], input bit sil[], output bit o[]);
      o = new[N];
      for (int i = 0; i < N; i++) begin
        int nv = v[i] - (v[i] >>> leak) + cur[i];
        if (nv >= th) begin v[i] = 0; o[i] = !sil[i]; end
        else begin v[i] = (nv < 0) ? 0 : nv; o[i] = 0; end
      end
    endfunction
  endclass

endpackage
