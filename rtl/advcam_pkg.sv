// advcam_pkg: sizes and camera geometry shared by the AdvCam trigger blocks.
//
// The trigger works on "flowers": groups of 7 hexagonal SiPM pixels (a seed
// pixel and its 6 neighbours). Flowers themselves tile the focal plane on a
// hexagonal lattice, so each flower has up to 6 neighbouring flowers. This
// package places the flowers on that lattice in axial coordinates (q, r) and
// numbers them column by column (q from -R to R, r ascending inside a
// column). The camera is modelled as a hexagon of flowers of radius R; with
// R = 19 it holds 3*19*20+1 = 1141 flowers, which is the 163 boards x 7
// flowers of the front-end readout. The exact outline of the real camera is
// not published, so the hexagonal outline is this design's choice.
//
// The functions below are constant functions used at elaboration time to
// wire neighbours; they are also usable in testbenches.
package advcam_pkg;

  // 14-bit ADC samples (1.024 GHz sampling in the camera).
  localparam int ADC_W           = 14;
  localparam int PIX_PER_FLOWER  = 7;
  localparam int FLOWERS_PER_FEB = 7;
  localparam int CAM_R           = 19;
  localparam int N_TEL           = 4;   // LSTs taking part in the stereo trigger
  localparam int WINDOW_SAMPLES  = 75;  // readout window, about 73.2 ns

  // Width of the signed axial coordinates and of shower positions.
  localparam int POS_W = 8;

  function automatic int hex_count(input int r);
    return 3 * r * (r + 1) + 1;
  endfunction

  function automatic int iabs(input int v);
    return (v < 0) ? -v : v;
  endfunction

  function automatic int imax(input int a, input int b);
    return (a > b) ? a : b;
  endfunction

  function automatic int imin(input int a, input int b);
    return (a < b) ? a : b;
  endfunction

  // Hexagonal (lattice) distance of axial offset (dq, dr) from the origin.
  function automatic int hex_dist(input int dq, input int dr);
    return imax(iabs(dq), imax(iabs(dr), iabs(dq + dr)));
  endfunction

  function automatic int col_len(input int r, input int q);
    return 2 * r + 1 - iabs(q);
  endfunction

  function automatic int col_rmin(input int r, input int q);
    return imax(-r, -q - r);
  endfunction

  // Index of the first flower of column q.
  function automatic int col_base(input int r, input int q);
    int b;
    b = 0;
    for (int k = -r; k < q; k++) b += col_len(r, k);
    return b;
  endfunction

  // Flower index of axial position (q, r_ax) in a camera of radius r, or -1
  // when the position lies outside the camera.
  function automatic int flower_index(input int r, input int q, input int r_ax);
    if (hex_dist(q, r_ax) > r) return -1;
    return col_base(r, q) + r_ax - col_rmin(r, q);
  endfunction

  function automatic int flower_q(input int r, input int idx);
    int b;
    b = 0;
    for (int k = -r; k <= r; k++) begin
      if (idx < b + col_len(r, k)) return k;
      b += col_len(r, k);
    end
    return 0;
  endfunction

  function automatic int flower_r(input int r, input int idx);
    int q;
    q = flower_q(r, idx);
    return col_rmin(r, q) + idx - col_base(r, q);
  endfunction

  // Axial offsets of the 6 lattice neighbours.
  function automatic int nb_dq(input int d);
    case (d)
      0: return 1;
      1: return 1;
      2: return 0;
      3: return -1;
      4: return -1;
      default: return 0;
    endcase
  endfunction

  function automatic int nb_dr(input int d);
    case (d)
      0: return 0;
      1: return -1;
      2: return -1;
      3: return 0;
      4: return 1;
      default: return 1;
    endcase
  endfunction

  // Index of the n-th member (0 .. hex_count(e)-1) of the hexagonal
  // neighbourhood of radius e around flower idx, or -1 when outside.
  // Members are enumerated dq ascending, then dr ascending.
  function automatic int hood_member(input int r, input int e, input int idx, input int n);
    int k;
    int q0;
    int r0;
    k = 0;
    q0 = flower_q(r, idx);
    r0 = flower_r(r, idx);
    for (int dq = -e; dq <= e; dq++) begin
      for (int dr = -e; dr <= e; dr++) begin
        if (hex_dist(dq, dr) <= e) begin
          if (k == n) return flower_index(r, q0 + dq, r0 + dr);
          k++;
        end
      end
    end
    return -1;
  endfunction

  // Camera-trigger controller states.
  typedef enum logic [1:0] {
    CT_IDLE    = 2'd0,
    CT_WAIT_GH = 2'd1,
    CT_RELEASE = 2'd2,
    CT_READOUT = 2'd3
  } ct_state_e;

  // Trigger record exchanged between telescopes: a Local L2 trigger and the
  // shower position (axial flower coordinates, rounded).
  typedef struct packed {
    logic                    valid;
    logic signed [POS_W-1:0] q;
    logic signed [POS_W-1:0] r;
  } trig_info_t;

endpackage
