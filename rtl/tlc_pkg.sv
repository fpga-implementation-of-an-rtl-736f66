// tlc_pkg: types shared by the traffic light controller.
//
// state_e names the four states of the controller. The state table (S0..S3)
// follows the paper; the two-bit binary encoding is this design's choice.
// lamp_t groups the three lamps of one road (green, amber, red) so that a
// road's signal head travels as one value; each lamp is active high.
package tlc_pkg;

  // S0: main green / side red     S1: main amber / side red
  // S2: main red / side green     S3: main red / side amber
  typedef enum logic [1:0] {
    S0 = 2'd0,
    S1 = 2'd1,
    S2 = 2'd2,
    S3 = 2'd3
  } state_e;

  typedef struct packed {
    logic g;  // green : proceed
    logic y;  // amber : slow down to stop
    logic r;  // red   : stop
  } lamp_t;

endpackage
