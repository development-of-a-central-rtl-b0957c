// tdscan_pkg: camera geometry and constants shared by the TDSCAN trigger core.
//
// The camera of the advanced SiPM LST camera holds 1141 trigger clusters of 7 pixels.
// 1141 = 3*19*20 + 1 is the centred hexagonal number of radius 19, so the clusters are taken
// here to fill a regular hexagon of 19 rings around a central cluster. Clusters are addressed
// with axial hexagon coordinates (q, r), |q| <= R, |r| <= R, |q + r| <= R. The L1 frame bit of a
// cluster is its position in row-major order: rows r = -R .. R, and inside a row q rising from
// its smallest legal value. That bit order is a choice of this design; the real order follows
// the front-end board cabling, which the camera map shows only as a picture. The neighbour
// offsets of a hexagonal kernel of radius E are all (dq, dr) with hexagon distance <= E,
// 3E(E+1)+1 of them (7 for E = 1). Everything here is a constant function evaluated when a
// module is elaborated; nothing of it becomes logic.
package tdscan_pkg;

  // Hexagon radius of the camera: hex_cells(19) = 1141 clusters.
  localparam int unsigned CAMERA_RADIUS = 19;

  // Number of cells in a hexagon of the given radius (centred hexagonal number).
  function automatic int hex_cells(input int radius);
    return 3 * radius * (radius + 1) + 1;
  endfunction

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction

  // Length of row r in a hexagon of radius rad.
  function automatic int hex_row_len(input int rad, input int r);
    return 2 * rad + 1 - iabs(r);
  endfunction

  // Smallest q in row r.
  function automatic int hex_qmin(input int rad, input int r);
    return (r < 0) ? (-rad - r) : -rad;
  endfunction

  // Index of the first cell of row r (closed form of the sum of the row lengths before it).
  function automatic int hex_row_start(input int rad, input int r);
    int n;
    if (r <= 0) begin
      n = r + rad;
      return n * (rad + 1) + (n * (n - 1)) / 2;
    end
    n = rad;
    return n * (rad + 1) + (n * (n - 1)) / 2 + r * (2 * rad + 1) - (r * (r - 1)) / 2;
  endfunction

  // Frame bit index of cell (q, r), or -1 if the cell lies outside the camera.
  function automatic int hex_index(input int rad, input int q, input int r);
    if (iabs(q) > rad || iabs(r) > rad || iabs(q + r) > rad) return -1;
    return hex_row_start(rad, r) + q - hex_qmin(rad, r);
  endfunction

  // Row r of frame bit index i.
  function automatic int hex_r_of(input int rad, input int i);
    for (int r = -rad; r <= rad; r++)
      if (i < hex_row_start(rad, r) + hex_row_len(rad, r)) return r;
    return rad + 1;
  endfunction

  // Column q of frame bit index i.
  function automatic int hex_q_of(input int rad, input int i);
    int r;
    r = hex_r_of(rad, i);
    return hex_qmin(rad, r) + i - hex_row_start(rad, r);
  endfunction

  // Offset number k (0 .. hex_cells(e)-1) of a kernel of radius e, ordered like the frame bits.
  function automatic int kernel_dq(input int e, input int k);
    return hex_q_of(e, k);
  endfunction

  function automatic int kernel_dr(input int e, input int k);
    return hex_r_of(e, k);
  endfunction

  // Bits needed to hold the values 0 .. v.
  function automatic int bits_for(input int v);
    int b;
    b = 1;
    while ((1 << b) <= v) b++;
    return b;
  endfunction

endpackage
