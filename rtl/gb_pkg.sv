// gb_pkg -- shared types and design-time graph description of the p-NN
// graph builder.
//
// The graph builder turns the per-wire readings of one drift-chamber sector
// into a fixed, sparse array of candidate edges.  Which wire pairs are
// candidates is decided at design time; this package holds that decision as
// constant functions, so every module can compute the wiring of its own part
// of the design during elaboration.
//
// Sensor reading (fixed widths, as in the case study): a 1-bit hit identifier,
// a 4-bit ADC readout and a 5-bit TDC readout per wire.
//
// Detector sector: N_LAYERS layers of N_WIRES wires, laid out as a hexagonal
// grid (odd layers shifted by half a wire pitch), with the layer direction
// playing the role of R and the wire direction the role of phi of a
// superlayer "rolled off" radially.  A wire is vertex v = layer*N_WIRES + wire.
//
// Candidate pattern (hourglass): a wire is connected to its two neighbours in
// the same layer, the two nearest wires of each adjacent layer (dx = +-1/2
// pitch) and the three nearest wires of each layer two away (dx = -1,0,+1).
// With 6 layers of 83, 131 and 163 wires this gives 2305, 3649 and 4545
// edges, the sector sizes reported for the case study.
//
// Edge numbering, used as the fixed output position of every edge:
//   group S : same layer,       per layer     N_WIRES-1 edges, layers 0..L-1
//   group D1: layers l and l+1, per pair    2*N_WIRES-1 edges, l = 0..L-2
//   group D2: layers l and l+2, per pair    3*N_WIRES-2 edges, l = 0..L-3
// Endpoint a is always the lower-numbered vertex.
//
// Static features (design-time, "rounded down, quantised equally spaced"):
// wire coordinates are kept in a fine grid of 1/16 mm (16 bits, range
// 4096 mm) and quantised to COORD_W bits by dropping low bits; the wire
// distance is the floor square root of the squared fine-grid distance,
// quantised the same way.  The pitches below are placeholders: the real
// wire positions come from the detector database, which is not part of this
// RTL.  Replace wire_x_fine / wire_y_fine to use real positions.
package gb_pkg;

  localparam int unsigned ADC_W = 4;
  localparam int unsigned TDC_W = 5;

  typedef struct packed {
    logic             hit;
    logic [ADC_W-1:0] adc;
    logic [TDC_W-1:0] tdc;
  } sensor_t;

  localparam int unsigned SENSOR_W = $bits(sensor_t);  // 10

  // Case-study defaults: largest sector (superlayer 6), 8 edges per
  // processing element, 8-bit coordinates and distance -> 60-bit edges.
  localparam int unsigned DEF_N_LAYERS = 6;
  localparam int unsigned DEF_N_WIRES  = 163;
  localparam int unsigned DEF_N_PER_PE = 8;
  localparam int unsigned DEF_COORD_W  = 8;
  localparam int unsigned DEF_DIST_W   = 8;

  // Fine geometry grid: 1/16 mm, 16 bits.
  localparam int unsigned FINE_W        = 16;
  localparam int unsigned WIRE_PITCH    = 256;  // 16 mm between wires of a layer
  localparam int unsigned LAYER_PITCH   = 256;  // 16 mm between layers

  // Total number of candidate edges of an L x W sector.
  function automatic int unsigned n_edges(int unsigned L, int unsigned W);
    return L*(W-1) + (L-1)*(2*W-1) + (L-2)*(3*W-2);
  endfunction

  function automatic int unsigned n_pe(int unsigned L, int unsigned W, int unsigned N);
    return (n_edges(L, W) + N - 1) / N;
  endfunction

  typedef struct packed {
    logic [31:0] va;
    logic [31:0] vb;
  } edge_ends_t;

  // Endpoints (vertex indices) of candidate edge e.
  function automatic edge_ends_t edge_ends(int unsigned e, int unsigned L, int unsigned W);
    edge_ends_t r;
    int unsigned s_cnt, d1_cnt, k, l, j, q, rr, wa, wb;
    s_cnt  = L*(W-1);
    d1_cnt = (L-1)*(2*W-1);
    r = '0;
    if (e < s_cnt) begin
      l = e / (W-1);
      j = e % (W-1);
      r.va = l*W + j;
      r.vb = l*W + j + 1;
    end else if (e < s_cnt + d1_cnt) begin
      k = e - s_cnt;
      l = k / (2*W-1);
      j = k % (2*W-1);
      if (l % 2 == 0) begin
        // upper layer shifted right: lower w meets upper w-1 and w
        wa = (j + 1) / 2;
        wb = j / 2;
      end else begin
        // lower layer shifted right: lower w meets upper w and w+1
        wa = j / 2;
        wb = (j + 1) / 2;
      end
      r.va = l*W + wa;
      r.vb = (l+1)*W + wb;
    end else begin
      k = e - s_cnt - d1_cnt;
      l = k / (3*W-2);
      j = k % (3*W-2);
      if (j == 0) begin
        wa = 0; wb = 0;
      end else begin
        q  = (j-1) / 3;
        rr = (j-1) % 3;
        wa = (rr == 0) ? q : q + 1;
        wb = (rr == 1) ? q : q + 1;
      end
      r.va = l*W + wa;
      r.vb = (l+2)*W + wb;
    end
    return r;
  endfunction

  function automatic int unsigned wire_x_fine(int unsigned v, int unsigned W);
    return (2*(v % W) + ((v / W) % 2)) * (WIRE_PITCH/2) + WIRE_PITCH/2;
  endfunction

  function automatic int unsigned wire_y_fine(int unsigned v, int unsigned W);
    return (v / W) * LAYER_PITCH + LAYER_PITCH/2;
  endfunction

  function automatic longint unsigned isqrt(longint unsigned x);
    longint unsigned r;
    r = 0;
    for (int b = 31; b >= 0; b--) begin
      if ((r + (64'd1 << b)) * (r + (64'd1 << b)) <= x) r = r + (64'd1 << b);
    end
    return r;
  endfunction

  // Fine-grid value -> `width` bits, rounded down (width <= FINE_W).
  function automatic logic [FINE_W-1:0] quantise(longint unsigned fine, int unsigned width);
    longint unsigned c;
    c = (fine >= (64'd1 << FINE_W)) ? (64'd1 << FINE_W) - 1 : fine;
    return FINE_W'(c >> (FINE_W - width));
  endfunction

  typedef struct packed {
    logic [FINE_W-1:0] xa;
    logic [FINE_W-1:0] ya;
    logic [FINE_W-1:0] xb;
    logic [FINE_W-1:0] yb;
    logic [FINE_W-1:0] dst;
  } static_feat_t;

  // Quantised static features of edge e (each field right-aligned).
  function automatic static_feat_t static_feat(int unsigned e, int unsigned L, int unsigned W,
                                               int unsigned CW, int unsigned DW);
    static_feat_t    f;
    edge_ends_t      p;
    longint unsigned xa, ya, xb, yb, dx2, dy2;
    p   = edge_ends(e, L, W);
    xa  = 64'(wire_x_fine(p.va, W));
    ya  = 64'(wire_y_fine(p.va, W));
    xb  = 64'(wire_x_fine(p.vb, W));
    yb  = 64'(wire_y_fine(p.vb, W));
    dx2 = (xa > xb) ? (xa - xb) * (xa - xb) : (xb - xa) * (xb - xa);
    dy2 = (ya > yb) ? (ya - yb) * (ya - yb) : (yb - ya) * (yb - ya);
    f.xa  = quantise(xa, CW);
    f.ya  = quantise(ya, CW);
    f.xb  = quantise(xb, CW);
    f.yb  = quantise(yb, CW);
    f.dst = quantise(isqrt(dx2 + dy2), DW);
    return f;
  endfunction

endpackage
