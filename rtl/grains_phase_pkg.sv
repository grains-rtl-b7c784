// grains_phase_pkg: the phases of the GRAINS control FSM, shared by the FSM
// and the datapath that it steers.
package grains_phase_pkg;
  typedef enum logic [2:0] {
    PH_CONV    = 3'd0,   // conventional SSD operation
    PH_PREP    = 3'd1,   // metadata swap after GRNS_Start
    PH_WAIT    = 3'd2,   // GRAINS mode, waiting for a batch
    PH_OFFSETS = 3'd3,   // Offsets lookups, GST fill
    PH_STRINGS = 3'd4,   // scheduled Strings comparisons
    PH_COLORS  = 3'd5    // Color Bitmap scan and Colors lookups
  } phase_e;
endpackage
