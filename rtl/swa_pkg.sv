// swa_pkg: types and widths shared by the blocks of the synergistic switch
// architecture (SWA) datapath.
//
// The switch does not move payload bytes here; every block works on a frame
// descriptor (frame_t) that carries the fields the forwarding steps need:
// flow-id, sequence, length, input port, arrival time and the iscopy flag,
// which are the fields the architecture names for its Frame structure. The
// output port, filled in by the table lookups, and a buffer handle that
// points at the payload in the switch's frame memory are additions of this
// design. All widths are this design's choice; the architecture fixes none.
// Time is in nanoseconds of the synchronised network clock.
package swa_pkg;

  localparam int FLOW_W = 8;   // up to 256 flow ids
  localparam int SEQ_W  = 32;  // sequence numbers, reset to 0
  localparam int LEN_W  = 11;  // payload length in bytes (up to 2047)
  localparam int PORT_W = 5;   // up to 32 switch ports
  localparam int TIME_W = 48;  // nanoseconds, about 78 hours before wrap
  localparam int BUF_W  = 12;  // frame-memory handle

  typedef logic [FLOW_W-1:0] flow_id_t;
  typedef logic [SEQ_W-1:0]  seq_t;
  typedef logic [LEN_W-1:0]  len_t;
  typedef logic [PORT_W-1:0] port_t;
  typedef logic [TIME_W-1:0] time_ns_t;

  // Frame descriptor.
  typedef struct packed {
    flow_id_t             flow_id;
    seq_t                 seq;
    len_t                 length;
    port_t                in_port;
    port_t                out_port;
    time_ns_t             arrival_time;
    logic                 iscopy;
    logic [BUF_W-1:0]     buf_id;
  } frame_t;

  // Schedule-table row without its sequence field (the sequence is state
  // that the forwarding steps update, the rest is configuration).
  typedef struct packed {
    logic     valid;
    len_t     length;
    port_t    in_port;
    port_t    out_port;
    time_ns_t period;
    time_ns_t arrival_start;  // relative to the start of the flow's period
    time_ns_t arrival_end;
    time_ns_t offset;         // departure time relative to the period start
  } sched_row_t;

  // Static-route-table row, derived from a schedule row.
  typedef struct packed {
    logic  valid;
    len_t  length;
    port_t in_port;
    port_t out_port;
  } route_row_t;

  // Event counters of one switch.
  typedef struct packed {
    logic [31:0] clones;          // copies made from TT frames
    logic [31:0] classifier_drops;// copies lost at a full BE path or with SWA off
    logic [31:0] route_drops;     // copies failing the static route check
    logic [31:0] tt_drops;        // TT frames failing the schedule check
    logic [31:0] seq_drops;       // copies failing sequence checking
    logic [31:0] filter_drops;    // later arrivals removed by arrival filtering
    logic [31:0] holds;           // copies held for the jitter bound
    logic [31:0] egress_drops;    // frames lost at a full egress queue
    logic [31:0] overruns;        // slot overwritten in the timer or the hold
  } swa_stats_t;

endpackage
