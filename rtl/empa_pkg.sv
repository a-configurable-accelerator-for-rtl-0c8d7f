// empa_pkg: types and constants shared by the EMPA supervisor and the per-core
// EMPA extensions.
//
// The word width and register-file shape are those of the 32-bit Y86 cores the
// architecture is built around (eight registers, %eax..%edi). The link register,
// through which a child returns its result to the parent, is %eax, as in the
// vector sum-up example. Metainstruction and mode encodings are this design's own:
// the architecture names the metainstructions (QCreate, QCall, QFCreate, QTerm,
// QWait, QAlloc, QIWait, ...) but gives no bit patterns.
package empa_pkg;

  localparam int unsigned XLEN       = 32;  // data and address width of a core
  localparam int unsigned NREGS      = 8;   // Y86 register file: %eax ... %edi
  localparam int unsigned LINK_REG   = 0;   // %eax carries the value cloned back
  localparam int unsigned WORD_BYTES = 4;   // address step between vector elements

  typedef logic [XLEN-1:0] word_t;
  typedef word_t           regfile_t [NREGS];

  // Metainstructions a core hands to the supervisor through its Meta signal.
  typedef enum logic [3:0] {
    Q_NONE    = 4'd0,
    Q_CREATE  = 4'd1,   // rent a core, clone the glue, child runs the inline QT body
    Q_CALL    = 4'd2,   // same as Q_CREATE, body placed outside the code flow
    Q_FCREATE = 4'd3,   // mass processing loop (FOR or SUMUP, per the parent's Mode)
    Q_TERM    = 4'd4,   // end of the QT; implies waiting for all children
    Q_WAIT    = 4'd5,   // wait for all children, then take the latched link value
    Q_ALLOC   = 4'd6,   // preallocate cores and set the Mode of the mass processing
    Q_IWAIT   = 4'd7    // wait, idle, for an interrupt line, then run its service
  } meta_op_e;

  // Operating mode of the pseudo registers and of the mass-processing loop.
  typedef enum logic [1:0] {
    MODE_NORMAL = 2'd0,
    MODE_FOR    = 2'd1,
    MODE_SUMUP  = 2'd2
  } mode_e;

  // Why the supervisor holds a core in Wait.
  typedef enum logic [1:0] {
    WAIT_NONE     = 2'd0,
    WAIT_CORE     = 2'd1,   // no core could be rented
    WAIT_CHILDREN = 2'd2,   // Children mask not yet empty
    WAIT_IRQ      = 2'd3    // interrupt-servicing core waiting for its line
  } wait_e;

  // What the supervisor did in a cycle (observation and statistics only).
  typedef enum logic [3:0] {
    EV_NONE          = 4'd0,
    EV_CREATE        = 4'd1,   // child rented for Q_CREATE / Q_CALL
    EV_ALLOC         = 4'd2,   // one core preallocated
    EV_LOOP_INIT     = 4'd3,   // Q_FCREATE loop registers initialised
    EV_FOR_STEP      = 4'd4,   // FOR iteration started
    EV_SUMUP_STEP    = 4'd5,   // SUMUP child launched
    EV_XFER          = 4'd6,   // SUMUP summand moved to the parent's adder
    EV_LOOP_DONE     = 4'd7,   // Q_FCREATE finished, parent released
    EV_TERM          = 4'd8,   // QT terminated, core back in the pool
    EV_WAIT_DONE     = 4'd9,   // Q_WAIT / Q_ALLOC satisfied
    EV_BLOCK_CORE    = 4'd10,  // requester put in Wait: no core to rent
    EV_BLOCK_CHILD   = 4'd11,  // requester put in Wait: children still running
    EV_IRQ           = 4'd12,  // interrupt arrived: waiting core starts its service
    EV_BLOCK_IRQ     = 4'd13   // requester put in Wait: its interrupt is not raised
  } sv_event_e;

  // A metainstruction as the core presents it while Meta is high.
  typedef struct packed {
    meta_op_e op;
    mode_e    mode;      // Q_ALLOC: mode of the preallocated cores
    word_t    target;    // address of the QT body (the child's Offset);
                         // Q_IWAIT: address of the interrupt service routine
    word_t    next_pc;   // address where the requester continues
    word_t    arg;       // Q_ALLOC: cores to preallocate; Q_FCREATE: iterations;
                         // Q_IWAIT: number of the interrupt line
  } meta_req_t;

  // One cycle's update of a core's EMPA registers, issued by the supervisor.
  // Bitmask updates (Parent, Children, Preallocated) travel beside this struct
  // because their width depends on the number of cores.
  typedef struct packed {
    logic  run_set;          // enable the core (rented)
    logic  run_clr;          // disable the core (QT finished)
    logic  rsv_set;          // core now preallocated to some parent
    logic  rsv_clr;          // preallocation released
    logic  offset_we;
    word_t offset;
    logic  mode_we;
    mode_e mode;
    logic  from_parent_we;   // latch the parent's ForChild at creation
    word_t from_parent;
    logic  for_child_step;   // advance ForChild by one element
    logic  from_child_we;
    word_t from_child;
    logic  from_child_dec;   // FOR mode: one iteration started
    logic  count_we;
    word_t count;
    logic  count_dec;        // SUMUP mode: one child launched
    logic  acc_clr;
    logic  acc_add;          // SUMUP mode: add 'from_child' to the partial sum
    logic  latch_we;         // link value of a terminated child
    word_t latch;
    logic  latch_clr;
    logic  fp_clr;           // ForParent consumed
    logic  pend_clr;         // SUMUP transfer done
    logic  loop_set;
    logic  loop_clr;
    logic  wait_we;
    wait_e wait_why;
  } core_cmd_t;

  localparam core_cmd_t CORE_CMD_IDLE = '0;

  // Everything the supervisor needs to see of one core's EMPA registers.
  typedef struct packed {
    logic  running;       // Enable
    logic  reserved;      // preallocated to a parent
    logic  avail;         // Avail: free, not reserved, not disabled
    word_t offset;
    mode_e mode;
    word_t for_child;
    word_t from_child;
    word_t for_parent;
    logic  fp_valid;      // ForParent written since the QT started
    logic  fp_pending;    // SUMUP: ForParent waits for transfer to the parent
    word_t from_parent;
    word_t latch;
    logic  latch_valid;
    word_t count;
    word_t acc;
    logic  loop;          // a Q_FCREATE loop is in progress
    wait_e wait_why;
  } core_state_t;

endpackage
