// gen_nerf_pkg: sizes, fixed-point formats and shared record types of the
// Gen-NeRF accelerator.
//
// Numbers printed in the paper: 40 systolic arrays of 16x16 INT8 PEs, a
// 256 KB local buffer, an 8 KB weight buffer, two 256 KB prefetch SRAMs,
// an 800x800 image, 6 source views (up to 10 evaluated), 64 focused points
// per ray on average, 4 source views for the coarse pass. The four SRAM banks
// per prefetch buffer follow the four banks drawn in the storage figure.
// Everything else here (feature width, depth segmentation, fixed-point
// formats, patch shape candidates) is this design's own choice.
//
// Fixed point: geometry uses signed Q16.16 (fix_t). Densities are unsigned
// Q8.8, hitting probabilities and transmittance unsigned Q0.16 (65536 = 1.0).
package gen_nerf_pkg;

  // ---------------- sizes ----------------
  localparam int unsigned IMG_H      = 800;  // rendered image height (paper)
  localparam int unsigned IMG_W      = 800;  // rendered image width  (paper)
  localparam int unsigned FEAT_H     = 200;  // source feature map height (assumed: 1/4 of 800)
  localparam int unsigned FEAT_W     = 200;  // source feature map width
  localparam int unsigned C_FEAT     = 32;   // feature channels (assumed, IBRNet-like)
  localparam int unsigned S_MAX      = 10;   // max source views (paper evaluates 4/6/10)
  localparam int unsigned S_DEFAULT  = 6;    // typical source views (paper)
  localparam int unsigned S_COARSE   = 4;    // views used by the coarse pass (paper)
  localparam int unsigned DSEG       = 8;    // depth segments of the workload cube (assumed)
  localparam int unsigned NC_SEG     = 4;    // coarse points per ray per segment (32 per ray)
  localparam int unsigned NF_SEG     = 8;    // focused points per ray per segment (64 per ray, paper)
  localparam int unsigned NBANK      = 4;    // banks per prefetch SRAM (storage figure)
  localparam int unsigned PF_BYTES   = 256*1024;           // per prefetch SRAM (paper)
  localparam int unsigned BANK_WORDS = PF_BYTES/(NBANK*C_FEAT); // 2048 feature vectors per bank
  localparam int unsigned MAX_R      = 64;   // max rays (pixels) per patch
  localparam int unsigned MAX_BINS   = 512;  // max coarse bins per patch
  localparam int unsigned MAX_RAY_BINS = DSEG*NC_SEG; // 32 coarse bins per ray max
  localparam int unsigned SA_N       = 16;   // systolic array side (paper)
  localparam int unsigned N_ARRAYS   = 40;   // arrays in the PE pool (paper)
  localparam int unsigned N_CAND     = 5;    // patch shape candidates (4 + fallback)

  // ---------------- types ----------------
  typedef logic signed [31:0] fix_t;                 // Q16.16
  typedef logic signed [7:0]  feat_t;
  typedef feat_t [C_FEAT-1:0] fvec_t;                // one feature vector
  typedef fix_t [2:0] vec3_t;
  typedef fix_t [2:0][3:0] mat34_t;                  // projection matrix rows

  // novel-view camera: ray direction of pixel (h,w) is d0 + w*dw + h*dh
  typedef struct packed {
    vec3_t o;
    vec3_t d0;
    vec3_t dw;
    vec3_t dh;
    fix_t  t_near;
    fix_t  seg_len;       // depth of one depth segment
  } cam_t;

  // prefetch window of one source view inside a patch
  typedef struct packed {
    logic        valid;
    logic [15:0] x_lo, x_hi, y_lo, y_hi;  // feature-map coordinates, inclusive
    logic [11:0] wb;                      // window width in bank words
    logic [11:0] base;                    // first bank word of this view
  } win_t;

  typedef struct packed {
    logic [9:0] h0, w0;       // top-left pixel
    logic [4:0] dh, dw;       // pixels in the patch
    logic [3:0] d0, dd;       // depth segments
    logic       last_slice;   // d0+dd == DSEG
    win_t [S_MAX-1:0] win;
  } patch_t;

  typedef struct packed {
    logic [4:0] dh, dw;
    logic [3:0] dd;
  } shape_t;

  // ---------------- helpers ----------------
  function automatic fix_t fmul(fix_t a, fix_t b);
    logic signed [63:0] p;
    p = 64'(a) * 64'(b);
    return fix_t'(p >>> 16);
  endfunction

  // DRAM word address of feature vector (s,y,x): spatially interleaved, the
  // two low address bits select the bank {y[0],x[0]} so that any 2x2
  // neighbourhood lies in four different banks.
  function automatic logic [31:0] feat_addr(int unsigned s, logic [15:0] y, logic [15:0] x);
    return ((32'(s) * (FEAT_H/2) + 32'(y >> 1)) * (FEAT_W/2) + 32'(x >> 1)) * 4
           + 32'({y[0], x[0]});
  endfunction
  localparam logic [31:0] WEIGHT_BASE = 32'(S_MAX*FEAT_H*FEAT_W);

endpackage
