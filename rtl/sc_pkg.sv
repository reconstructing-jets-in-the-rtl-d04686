// sc_pkg: types and constants shared by the seeded-cone jet finder.
//
// A particle (PUPPI candidate) and a jet are both a (pT, eta, phi) triple of
// fixed-point integers. Widths and scales are this design's choice, picked to
// match common Level-1 trigger conventions: pT in 0.25 GeV steps (16 bits),
// eta and phi in steps of pi/720 rad (12 and 11 bits, two's complement), so
// phi spans -720..719. A particle with pT = 0 is a null object.
//
// The sizes that come from the paper are the 128-entry particle list, 16 jets
// per event, 12 jets sent per collection, the two cone radii R = 0.4 and
// R = 0.8, and the 8-cycle loop. The radii are held as R^2 in (pi/720)^2
// units: (0.4*720/pi)^2 = 8404 and (0.8*720/pi)^2 = 33616; these are the
// reset values of the controller's radius registers.
package sc_pkg;

  localparam int PT_W   = 16;
  localparam int ETA_W  = 12;
  localparam int PHI_W  = 11;

  localparam int NPART      = 128;  // deregionizer output list size
  localparam int MAX_JETS   = 16;   // jets found per event and radius
  localparam int NOUT_JETS  = 12;   // jets sent per collection
  localparam int LOOP_LAT   = 8;    // cycles per jet-finding iteration

  localparam int PHI_PI     = 720;  // phi code of +pi
  localparam int PHI_2PI    = 1440;

  localparam int R2_W       = 17;
  localparam logic [R2_W-1:0] R2_SC4 = 17'd8404;   // R = 0.4
  localparam logic [R2_W-1:0] R2_SC8 = 17'd33616;  // R = 0.8

  localparam int EVID_W   = 8;   // event tag carried with each pass
  localparam int NSORT    = 6;   // 3 concurrent events x 2 radii
  localparam int SORT_W   = $clog2(NSORT);
  localparam int ITER_W   = $clog2(MAX_JETS);

  typedef logic        [PT_W-1:0]  pt_t;
  typedef logic signed [ETA_W-1:0] eta_t;
  typedef logic signed [PHI_W-1:0] phi_t;

  typedef struct packed {
    pt_t  pt;
    eta_t eta;
    phi_t phi;
  } particle_t;

  typedef struct packed {
    pt_t  pt;
    eta_t eta;
    phi_t phi;
  } jet_t;

  // Which cone radius a pass through the loop uses.
  typedef enum logic {CONE_R04 = 1'b0, CONE_R08 = 1'b1} cone_t;

  // Tag that travels with a list through the loop and with the jet it yields.
  // R2_W is declared above; the radius is stamped by the loop controller.
  typedef struct packed {
    logic                valid;
    logic [EVID_W-1:0]   evid;
    cone_t               cone;
    logic [ITER_W-1:0]   iter;
    logic [SORT_W-1:0]   sorter;
    logic [R2_W-1:0]     r2;      // cone radius squared used by this pass
  } pass_tag_t;

  // One completed, sorted jet collection.
  typedef struct packed {
    logic [EVID_W-1:0] evid;
    cone_t             cone;
    logic [$clog2(NOUT_JETS+1)-1:0] njets;
  } coll_hdr_t;

  // Difference a - b of two phi codes, wrapped into -720..719.
  function automatic logic signed [PHI_W+1:0] dphi_wrap(phi_t a, phi_t b);
    localparam logic signed [PHI_W+1:0] PI  = (PHI_W+2)'(PHI_PI);
    localparam logic signed [PHI_W+1:0] TPI = (PHI_W+2)'(PHI_2PI);
    logic signed [PHI_W+1:0] d;
    d = signed'((PHI_W+2)'(a)) - signed'((PHI_W+2)'(b));
    if (d >= PI)       d = d - TPI;
    else if (d < -PI)  d = d + TPI;
    return d;
  endfunction

endpackage
