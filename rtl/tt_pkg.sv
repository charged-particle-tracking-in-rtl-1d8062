// tt_pkg: types and widths shared by the track-trigger tower processor.
//
// A stub is the unit of detector data: the front end has already paired the
// hits of the two sensors of a module, so a stub carries its layer, module,
// strip, a coarse z segment and the bend (delta-s).  Stubs travel through the
// data-delivery network as stub words tagged with their bunch crossing (BX); a
// word with `eoe` set is an end-of-event marker that closes one BX on one
// stream.  All field widths are this design's own choice: the paper only says
// that a stub carries its local coordinates and delta-s.
package tt_pkg;

  localparam int N_LAYERS = 6;   // six barrel layers (paper, Sec. 2.2)
  localparam int LAYER_W  = 3;
  localparam int MOD_W    = 8;   // module index within a tower layer
  localparam int STRIP_W  = 10;  // strip number within a module
  localparam int ZSEG_W   = 4;   // segment along z within a module
  localparam int BEND_W   = 4;   // stub bend delta-s
  localparam int BX_W     = 12;  // bunch-crossing number
  localparam int SSID_W   = 18;  // superstrip identifier: module, z bin, superstrip

  // Track fit
  localparam int N_COORD  = 2 * N_LAYERS; // phi and z per layer
  localparam int N_PAR    = 4;            // 1/pt, phi0, cot(theta), z0
  localparam int N_CONS   = N_COORD - N_PAR; // constraints of a 6-layer fit
  localparam int N_CTYPE  = N_LAYERS + 1; // combination type: skipped layer 0..5, 6 = none
  localparam int COORD_W  = 16;
  localparam int COEF_W   = 18;
  localparam int FRAC_W   = 12;           // fraction bits of the coefficients
  localparam int PAR_W    = 20;
  localparam int CHI_W    = 32;

  // Data organizer / road packets
  localparam int STUB_IDX_W = 6;  // index of a stub in its layer memory
  localparam int K_PER_SS   = 4;  // stubs retrieved per layer per road
  localparam int KCNT_W     = 3;
  localparam int ROAD_W     = 16; // pattern (road) address

  typedef struct packed {
    logic [LAYER_W-1:0] layer;
    logic [MOD_W-1:0]   module_id;
    logic [STRIP_W-1:0] strip;
    logic [ZSEG_W-1:0]  zseg;
    logic [BEND_W-1:0]  bend;
  } stub_t;

  typedef struct packed {
    logic            eoe;   // end-of-event marker for `bx`
    logic [BX_W-1:0] bx;
    stub_t           stub;
  } stub_word_t;

  // A stub held in the data organizer, as returned for a road.
  typedef struct packed {
    logic [STUB_IDX_W-1:0] idx;
    stub_t                 stub;
  } do_stub_t;

  typedef struct packed {
    logic [KCNT_W-1:0]          n;        // stubs returned (<= K_PER_SS)
    logic                       trunc;    // more stubs matched than returned
    do_stub_t [K_PER_SS-1:0]    s;
  } do_layer_t;

  typedef struct packed {
    logic [ROAD_W-1:0]            road;
    do_layer_t [N_LAYERS-1:0]     layer;
  } road_local_t;

  // Global coordinates of one stub
  typedef struct packed {
    logic [STUB_IDX_W-1:0]      idx;
    logic signed [COORD_W-1:0]  phi;
    logic signed [COORD_W-1:0]  z;
  } gstub_t;

  typedef struct packed {
    logic [KCNT_W-1:0]       n;
    gstub_t [K_PER_SS-1:0]   s;
  } g_layer_t;

  typedef struct packed {
    logic [ROAD_W-1:0]          road;
    g_layer_t [N_LAYERS-1:0]    layer;
  } road_global_t;

  // One stub combination handed to a track fitter.
  typedef struct packed {
    logic [ROAD_W-1:0]          road;
    logic [2:0]                 ctype;    // skipped layer, or N_LAYERS for none
    logic [N_LAYERS-1:0]        present;
    gstub_t [N_LAYERS-1:0]      st;
  } combo_t;

  typedef struct packed {
    logic [ROAD_W-1:0]                       road;
    logic [2:0]                              ctype;
    logic [N_LAYERS-1:0]                     present;
    logic [N_LAYERS-1:0][STUB_IDX_W-1:0]     idx;
    logic signed [N_PAR-1:0][PAR_W-1:0]      par;
    logic [CHI_W-1:0]                        chi2;
    logic                                    pass;   // chi2 within the cut
  } track_t;

  // Degrees of freedom of a combination type (coordinates minus parameters).
  function automatic int unsigned ndof(input logic [2:0] ctype);
    return (ctype == 3'(N_LAYERS)) ? N_CONS : (N_CONS - 2);
  endfunction

endpackage
