// fimd_pkg: types and constants shared by the streaming isolated-marker
// detector.
//
// The detector works on 8-bit grey pixels, as the detection algorithm is
// stated for 8-bit images; the boundary minimum starts at 0xFF and the
// maximum at 0x00. The three thresholds are run-time configuration:
//   t_m  central pixel must exceed it to be a candidate at all,
//   t_s  a sun point's central pixel must exceed it,
//   t_d  differential threshold between the centre and its circle boundary.
// A detection record carries the kind (marker or sun point) and the
// coordinates of the centre of the tested circle. Field widths follow the
// 752 x 480 sensor used with the design; they are parameters of the modules
// and the package only fixes the pixel width.
package fimd_pkg;

  localparam int unsigned PIX_W = 8;
  typedef logic [PIX_W-1:0] pix_t;

  localparam pix_t PIX_MAX = '1;
  localparam pix_t PIX_MIN = '0;

  typedef struct packed {
    pix_t t_m;
    pix_t t_s;
    pix_t t_d;
  } thr_cfg_t;

  typedef enum logic [0:0] {
    DET_MARKER = 1'b0,
    DET_SUN    = 1'b1
  } det_kind_e;

  // Signed 4-bit relative coordinate, enough for radii up to 7.
  typedef logic signed [3:0] rel_t;

endpackage
