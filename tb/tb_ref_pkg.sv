// tb_ref_pkg -- reference model used by the graph-builder testbenches.
//
// Rebuilds the candidate-edge list the slow way, as the design-time graph
// building of the method does it: every pair of wires (va < vb) of an
// L x W sector is tested against the hourglass neighbourhood, written here in
// half-pitch units (same layer: dx = +-2; next layer: dx = +-1; two layers
// away: |dx| <= 2, odd layers shifted by one half pitch).  The accepted pairs
// are ordered by (layer distance, lower layer, position along the layer,
// lower wire), which is the numbering the RTL uses for output positions.
// Static features are recomputed with real arithmetic (sqrt, floor).
package tb_ref_pkg;

  typedef struct {
    int unsigned va;
    int unsigned vb;
  } ends_t;

  // Same placeholder geometry as the RTL: 16 mm pitch in both directions,
  // coordinates in 1/16 mm, wire centres at half a pitch from the origin.
  localparam real PITCH_FINE = 256.0;

  function automatic int x_half(int unsigned v, int unsigned W);
    return 2*int'(v % W) + int'((v / W) % 2);
  endfunction

  function automatic bit is_candidate(int unsigned va, int unsigned vb, int unsigned W);
    int dl, dx;
    dl = int'(vb / W) - int'(va / W);
    dx = x_half(vb, W) - x_half(va, W);
    if (dx < 0) dx = -dx;
    case (dl)
      0:       return dx == 2;
      1:       return dx == 1;
      2:       return dx <= 2;
      default: return 0;
    endcase
  endfunction

  // Ordered candidate list of an L x W sector.
  function automatic void build_edges(int unsigned L, int unsigned W, ref ends_t list[$]);
    ends_t byk [longint];
    longint key;
    list.delete();
    for (int unsigned va = 0; va < L*W; va++) begin
      for (int unsigned vb = va + 1; vb < L*W && vb < va + 3*W; vb++) begin
        if (is_candidate(va, vb, W)) begin
          key = ((longint'(vb / W - va / W) * L + va / W) * (4*W + 4)
                 + x_half(va, W) + x_half(vb, W)) * W + (va % W);
          byk[key] = '{va, vb};
        end
      end
    end
    foreach (byk[k]) list.push_back(byk[k]);
  endfunction

  function automatic real x_fine(int unsigned v, int unsigned W);
    return (real'(x_half(v, W)) + 1.0) * PITCH_FINE / 2.0;
  endfunction

  function automatic real y_fine(int unsigned v, int unsigned W);
    return (real'(v / W) + 0.5) * PITCH_FINE;
  endfunction

  function automatic longint unsigned q(real fine, int unsigned width);
    return longint'($floor(fine * real'(longint'(1) << width) / 65536.0));
  endfunction

  // {xa, ya, xb, yb, dist}, COORD_W bits each, DIST_W for dist.
  function automatic logic [79:0] feat(int unsigned va, int unsigned vb, int unsigned W,
                                       int unsigned CW, int unsigned DW);
    logic [79:0] r;
    real dx, dy, d;
    dx = x_fine(va, W) - x_fine(vb, W);
    dy = y_fine(va, W) - y_fine(vb, W);
    d  = $floor($sqrt(dx*dx + dy*dy));
    r  = '0;
    r  = (r << CW) | 80'(q(x_fine(va, W), CW));
    r  = (r << CW) | 80'(q(y_fine(va, W), CW));
    r  = (r << CW) | 80'(q(x_fine(vb, W), CW));
    r  = (r << CW) | 80'(q(y_fine(vb, W), CW));
    r  = (r << DW) | 80'(q(d, DW));
    return r;
  endfunction

endpackage
