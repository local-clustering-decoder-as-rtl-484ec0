// lcd_pkg -- shared types, constants and the compile-time decoding graph of
// the Local Clustering Decoder (LCD).
//
// The decoder works on the unweighted Z-type decoding graph of a distance-D
// rotated surface code with patch wiggling, stacked over D+1 measurement
// layers. Every layer is drawn as a diamond: NC = D+1 columns of NV =
// (D-1)/2 vertices each, one column per processing element (PE), so a PE
// owns floor(D/2) vertices and the array has NC*NC PEs. Vertex numbering
// follows the d=5 example of the paper's PE-array figure (vertex 2c+j in
// PE c of a layer).
//
// Geometry (column c in 0..D, level l in 0..D-2, c+l odd; vertex j of a
// column sits at level l = D-2-2j-(c mod 2)):
//   * spatial edges join (c,l) and (c+-1,l+-1) in the same layer;
//   * a timelike edge joins the same (c,l) in adjacent layers;
//   * three hook edges join a vertex of layer t to (c+s,l+1), (c+s,l-1) and
//     (c+2s,l) of layer t+1, where s = -1 when t is even and +1 when t is
//     odd, so the hook links reverse direction every round (wiggling);
//   * vertices at level 0 or level D-2 own an edge to the virtual boundary.
// The hook-edge vertex endpoints and the boundary rule are this design's own
// reading of the figures; the paper gives only the PE-level links.
//
// Neighbour slots of a vertex (4 bits):
//   0 (c+1,l+1)  1 (c+1,l-1)  2 (c-1,l+1)  3 (c-1,l-1)    same layer
//   4 timelike up  5 timelike down
//   6,7,8 hooks to layer t+1    9,10,11 hooks to layer t-1
//   12 virtual boundary         15 self (parent pointer of a root)
// Slot k and slot rev_slot(k) name the same edge from its two ends.
// "Forward" slots 0,1,4,6,7,8 and 12 own the edge; an edge id is
// {vertex, forward index 0..6}.
package lcd_pkg;

  // Controller stages (Box 1 / state machine figure).
  typedef enum logic [2:0] {
    ST_IDLE    = 3'd0,
    ST_INITING = 3'd1,
    ST_GROWING = 3'd2,
    ST_MERGING = 3'd3,
    ST_PICKING = 3'd4,
    ST_SYNCING = 3'd5,
    ST_EXITING = 3'd6
  } stage_e;

  localparam int unsigned NSLOT_NBR  = 12;     // maximum vertex degree (paper: 12)
  localparam int unsigned NSLOT      = 13;     // neighbours plus the boundary
  localparam logic [3:0]  SLOT_BND   = 4'd12;
  localparam logic [3:0]  SLOT_SELF  = 4'd15;
  localparam int unsigned NFWD       = 7;      // forward slots per vertex
  localparam int unsigned W_MAX      = 2;      // unweighted graph: w_max = w_uv = 2
  localparam int unsigned SLOTS_PER_PART = 9;  // 3x3 PEs per part

  // Vertex record. cindex carries a "not boundary" flag above the vertex
  // index so that a cluster touching the boundary takes the lowest possible
  // cluster index (all zeros) and drains its parity into the boundary.
  localparam int unsigned CIW = 13;            // cluster index width (flag + 12-bit index)

  typedef struct packed {
    logic [CIW-1:0] cindex;
    logic [3:0]     parent;   // neighbour slot, SLOT_BND or SLOT_SELF
    logic [1:0]     radius;
    logic           defect;
    logic           parity;
    logic           active;
    logic           busy;
  } vertex_t;


  // ---------------------------------------------------------------- graph
  function automatic int nv_of(input int d);
    return (d - 1) / 2;
  endfunction

  function automatic int nc_of(input int d);
    return d + 1;
  endfunction

  function automatic int nvert_of(input int d);
    return (d + 1) * (d + 1) * ((d - 1) / 2);
  endfunction

  function automatic int npe_of(input int d);
    return (d + 1) * (d + 1);
  endfunction

  // Parts are 3x3 blocks of PEs (3 columns x 3 layers).
  function automatic int nblk_of(input int d);
    return (d + 1 + 2) / 3;
  endfunction

  function automatic int npart_of(input int d);
    return nblk_of(d) * nblk_of(d);
  endfunction

  // PE of (part, slot), or -1 if that position lies outside the array.
  // Slot order inside a part: slot = 3*(t mod 3) + (c mod 3).
  function automatic int pe_of_slot(input int d, input int part, input int slot);
    int bt, bc, t, c;
    bt = part / nblk_of(d);
    bc = part % nblk_of(d);
    t  = 3 * bt + slot / 3;
    c  = 3 * bc + slot % 3;
    if (t >= d + 1 || c >= d + 1) return -1;
    return t * (d + 1) + c;
  endfunction

  function automatic int level_of(input int d, input int c, input int j);
    return d - 2 - 2 * j - (c % 2);
  endfunction

  // Vertex index of (layer, column, level), or -1 if there is none.
  function automatic int vid(input int d, input int t, input int c, input int l);
    if (t < 0 || t > d || c < 0 || c > d || l < 0 || l > d - 2) return -1;
    if (((c + l) % 2) != 1) return -1;
    return (t * (d + 1) + c) * ((d - 1) / 2) + (d - 2 - l - (c % 2)) / 2;
  endfunction

  function automatic int hook_dir(input int t);   // lower layer t -> t+1
    return ((t % 2) == 0) ? -1 : 1;
  endfunction

  // Neighbour of vertex g through slot k (0..11), or -1.
  function automatic int nbr_of(input int d, input int g, input int k);
    int nv, pe, t, c, j, l, s;
    nv = (d - 1) / 2;
    pe = g / nv;
    j  = g % nv;
    t  = pe / (d + 1);
    c  = pe % (d + 1);
    l  = d - 2 - 2 * j - (c % 2);
    case (k)
      0:  return vid(d, t, c + 1, l + 1);
      1:  return vid(d, t, c + 1, l - 1);
      2:  return vid(d, t, c - 1, l + 1);
      3:  return vid(d, t, c - 1, l - 1);
      4:  return vid(d, t + 1, c, l);
      5:  return vid(d, t - 1, c, l);
      6:  begin s = hook_dir(t); return vid(d, t + 1, c + s, l + 1); end
      7:  begin s = hook_dir(t); return vid(d, t + 1, c + s, l - 1); end
      8:  begin s = hook_dir(t); return vid(d, t + 1, c + 2 * s, l); end
      9:  begin if (t == 0) return -1; s = hook_dir(t - 1); return vid(d, t - 1, c - s, l - 1); end
      10: begin if (t == 0) return -1; s = hook_dir(t - 1); return vid(d, t - 1, c - s, l + 1); end
      11: begin if (t == 0) return -1; s = hook_dir(t - 1); return vid(d, t - 1, c - 2 * s, l); end
      default: return -1;
    endcase
  endfunction

  function automatic bit has_boundary(input int d, input int g);
    int nv, pe, c, j, l;
    nv = (d - 1) / 2;
    pe = g / nv;
    j  = g % nv;
    c  = pe % (d + 1);
    l  = d - 2 - 2 * j - (c % 2);
    return (l == 0) || (l == d - 2);
  endfunction

  // Slot by which the neighbour sees this vertex.
  function automatic int rev_slot(input int k);
    case (k)
      0: return 3;   1: return 2;   2: return 1;   3: return 0;
      4: return 5;   5: return 4;
      6: return 9;   7: return 10;  8: return 11;
      9: return 6;   10: return 7;  11: return 8;
      default: return k;
    endcase
  endfunction

  function automatic bit is_fwd(input int k);
    return (k == 0) || (k == 1) || (k == 4) || (k == 6) || (k == 7) || (k == 8) || (k == 12);
  endfunction

  // Forward index (0..6) of a forward slot.
  function automatic int fwd_idx(input int k);
    case (k)
      0: return 0;  1: return 1;  4: return 2;
      6: return 3;  7: return 4;  8: return 5;
      default: return 6;  // boundary
    endcase
  endfunction

  // Edge-id owner and forward index of the edge seen by g through slot k.
  function automatic int edge_owner(input int d, input int g, input int k);
    if (k == 12 || is_fwd(k)) return g;
    return nbr_of(d, g, k);
  endfunction

  function automatic int edge_fidx(input int k);
    if (k == 12 || is_fwd(k)) return fwd_idx(k);
    return fwd_idx(rev_slot(k));
  endfunction

  function automatic int clog2i(input int v);
    int r;
    r = 0;
    while ((1 << r) < v) r++;
    return (r == 0) ? 1 : r;
  endfunction

endpackage
