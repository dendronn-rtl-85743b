// dendronn_pkg -- constants and types shared by the DendroNN sequence-detection accelerator.
//
// The accelerator detects three-spike sequences (N_S = 3 spines per unit, exact
// timing, acceptance window 0) with a time wheel of D = 256 slots (8-bit
// inter-spike intervals), 3000 hidden units spread over four update engines, and
// an int8 linear output layer.  The unit count and spine count follow the
// paper's SHD configuration; the channel count, router depth and class count are
// this design's own choices (SHD has 20 classes).
//
// A router target <u,s> names a hidden unit u and one of its spines s.  A router
// memory word carries N_UE such targets, lane i holding only units of bank i
// (u mod N_UE == i), so the engines never share a unit.
package dendronn_pkg;

  localparam int unsigned NS          = 3;      // spines per unit
  localparam int unsigned U_W         = 12;     // unit index width (up to 4096 units)
  localparam int unsigned S_W         = 2;      // spine index width
  localparam int unsigned W_W         = 8;      // output weight width (int8)

  // One connectivity target: valid flag, unit index and spine index.
  typedef struct packed {
    logic           valid;
    logic [U_W-1:0] unit;
    logic [S_W-1:0] spine;
  } target_t;

  localparam int unsigned TGT_W = $bits(target_t);

  // Configuration port: which memory a write goes to.
  typedef enum logic [1:0] {
    CFG_CHAN_PTR = 2'd0,   // chan_ptr[addr]        <- wdata[PTR_W-1:0]
    CFG_CONN     = 2'd1,   // conn_list[addr]       <- wdata[N_UE*TGT_W-1:0]
    CFG_USM_DT   = 2'd2,   // dt of row addr = {unit, stage} <- wdata[DT_W-1:0]
    CFG_OUT_W    = 2'd3    // weight row of unit addr <- wdata[N_CLASSES*W_W-1:0]
  } cfg_sel_e;

  localparam int unsigned CFG_AW = 16;
  localparam int unsigned CFG_DW = 160;  // wide enough for one 20-class int8 weight row

  // Activity counters of one sample, brought out of the top for monitoring.
  typedef struct packed {
    logic [31:0] ticks;          // time-wheel advances
    logic [15:0] wraps;          // wheel wraps (generation swaps)
    logic [31:0] clr_cycles;     // cycles spent in plane-clear sweeps
    logic [31:0] cr_words;       // router words streamed
    logic [31:0] lane_stalls;    // lane-cycles a target waited for its engine
    logic [31:0] sched;          // spine-0 schedules
    logic [31:0] wrap_sched;     // schedules placed in the next generation
    logic [31:0] match1;         // spine-1 matches
    logic [31:0] match2;         // spine-2 matches (sequence detections)
    logic [31:0] refr;           // detections suppressed by the refractory bit
    logic [31:0] merge_conflicts;// cycles with more than one engine spiking
    logic [31:0] hidden;         // hidden spikes sent to the output layer
    logic [31:0] out_spikes;     // output-neuron spikes
    logic [15:0] dropped;        // events with an address outside the channels
  } stats_t;

endpackage
