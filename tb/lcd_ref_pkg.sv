// lcd_ref_pkg -- behavioural reference for the LCD testbenches.
//
// It clusters a syndrome the textbook way, with no PEs, slots or stages:
// repeat { find the connected components of the accessible edges (radius sum
// >= 2 or pre-grown; a boundary edge needs radius >= 2); a component is odd if
// it holds an odd number of defects and no accessible boundary edge; grow
// every vertex of every odd component by one (while radius <= 2) } until no
// component is odd. It returns the final radii, the number of growth rounds,
// and the cluster index every vertex must end with: 0 for a component that
// reached the boundary, {1, lowest vertex index} for any other component, and
// {1, own index} for a vertex in no cluster. Only the graph functions of
// lcd_pkg are shared with the design; the clustering itself is independent.
package lcd_ref_pkg;
  import lcd_pkg::*;

  typedef struct {
    int              rounds;
    int              radius [];
    logic [CIW-1:0]  cindex [];
    bit              incl   [];
  } ref_result_t;

  function automatic ref_result_t ref_cluster(input int d, input bit syn[], input bit en[],
                                              input bit pg[][]);
    ref_result_t r;
    int n;
    int lab [];
    bit bnd [];
    int par [];
    bit changed, any_odd;
    n = nvert_of(d);
    r.radius = new[n];
    r.cindex = new[n];
    r.incl   = new[n];
    lab      = new[n];
    bnd      = new[n];
    par      = new[n];
    foreach (r.radius[g]) r.radius[g] = 0;
    r.rounds = 0;
    forever begin
      // components by min-label propagation over accessible edges
      foreach (lab[g]) lab[g] = g;
      do begin
        changed = 0;
        for (int g = 0; g < n; g++) begin
          for (int k = 0; k < NSLOT_NBR; k++) begin
            int h;
            h = nbr_of(d, g, k);
            if (h >= 0 && acc(d, g, k, h, en, pg, r.radius) && lab[h] < lab[g]) begin
              lab[g]  = lab[h];
              changed = 1;
            end
          end
        end
      end while (changed);
      foreach (bnd[g]) begin bnd[g] = 0; par[g] = 0; end
      for (int g = 0; g < n; g++) begin
        r.incl[g] = en[g] && syn[g];
        for (int k = 0; k < NSLOT_NBR; k++) begin
          int h;
          h = nbr_of(d, g, k);
          if (h >= 0 && acc(d, g, k, h, en, pg, r.radius)) r.incl[g] = 1;
        end
        if (bacc(d, g, en, pg, r.radius)) begin
          r.incl[g]   = 1;
          bnd[lab[g]] = 1;
        end
        if (en[g] && syn[g]) par[lab[g]] ^= 1;
      end
      any_odd = 0;
      for (int g = 0; g < n; g++) begin
        if (r.incl[g] && (par[lab[g]] != 0) && (bnd[lab[g]] == 0)) begin
          any_odd = 1;
          if (r.radius[g] <= W_MAX) r.radius[g]++;
        end
      end
      if (!any_odd) break;
      r.rounds++;
    end
    for (int g = 0; g < n; g++) begin
      if (!r.incl[g])        r.cindex[g] = {1'b1, (CIW-1)'(g)};
      else if (bnd[lab[g]])  r.cindex[g] = '0;
      else                   r.cindex[g] = {1'b1, (CIW-1)'(lab[g])};
    end
    return r;
  endfunction

  function automatic bit acc(input int d, input int g, input int k, input int h, input bit en[],
                             input bit pg[][], input int radius[]);
    int o, f;
    if (!en[g] || !en[h]) return 0;
    o = edge_owner(d, g, k);
    f = edge_fidx(k);
    return (radius[g] + radius[h] >= W_MAX) || pg[o][f];
  endfunction

  function automatic bit bacc(input int d, input int g, input bit en[], input bit pg[][],
                              input int radius[]);
    if (!en[g] || !has_boundary(d, g)) return 0;
    return (radius[g] >= W_MAX) || pg[g][NFWD-1];
  endfunction

endpackage
