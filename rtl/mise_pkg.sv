// mise_pkg: constants and types shared by the MISE slowdown-estimation and
// bandwidth-allocation logic.
//
// Slowdowns and slowdown bounds are unsigned fixed-point numbers with SD_FRAC
// fractional bits (Q8.8 by default, so 1.0 is 16'h0100 and the largest value is
// just under 256).  Bandwidth is split in lottery tickets; TOTAL_TICKETS tickets
// make up the whole memory bandwidth.  All widths and the ticket total are this
// design's own choices; the method does not fix them.
package mise_pkg;

  // Default number of applications (one per core).  The main evaluation uses
  // 4-core workloads.
  localparam int unsigned N_APPS_DEF   = 4;

  // Width of the per-interval event counters (enough for a 5M-cycle interval).
  localparam int unsigned CNT_W        = 24;

  // Fixed-point slowdown format.
  localparam int unsigned SD_FRAC      = 8;
  localparam int unsigned SD_W         = 16;
  localparam logic [SD_W-1:0] SD_ONE   = SD_W'(1) << SD_FRAC;
  localparam logic [SD_W-1:0] SD_MAX   = '1;

  // Lottery tickets: the whole bandwidth is TOTAL_TICKETS tickets.
  localparam int unsigned TICKET_W      = 8;
  localparam int unsigned TOTAL_TICKETS = 100;

  typedef logic [SD_W-1:0]     sd_t;
  typedef logic [TICKET_W-1:0] ticket_t;
  typedef logic [CNT_W-1:0]    cnt_t;

  // Per-application counter snapshot taken at the end of an interval.
  typedef struct packed {
    cnt_t served;       // requests served during the interval (shared rate)
    cnt_t hp_cycles;    // cycles the application held highest priority
    cnt_t hp_served;    // requests served while it held highest priority
    cnt_t intf_cycles;  // highest-priority cycles lost to other applications
    cnt_t stall_cycles; // cycles its core stalled on memory
  } app_stats_t;

  // Bandwidth-allocation policy in force.
  typedef enum logic {
    MODE_QOS  = 1'b0,   // MISE-QoS: soft slowdown bound for one application
    MODE_FAIR = 1'b1    // MISE-Fair: minimise the maximum slowdown
  } mode_e;

endpackage
