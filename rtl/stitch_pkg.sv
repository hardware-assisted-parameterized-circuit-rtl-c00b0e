// stitch_pkg: constants and bus types shared by the Stitch parameter-stitching
// module.
//
// The numbers that come from the published design are the qubit count (8),
// the 14-bit local bus split into a 3-bit memory select and an 11-bit word
// address, 2048 x 32-bit parameters per qubit, the 8-bit fproc ID and the ID
// value 10 that marks a parameter request. The control-register map, the
// shot-counter width and the request/reply strobes are this design's own.
package stitch_pkg;

  parameter int unsigned NQ        = 8;     // physical qubits / processor cores
  parameter int unsigned DATA_W    = 32;    // parameter word and fproc data width
  parameter int unsigned LB_AW     = 14;    // local-bus word address width
  parameter int unsigned MEM_AW    = 11;    // words per parameter memory = 2**MEM_AW
  parameter int unsigned SEL_W     = LB_AW - MEM_AW;  // memory-select bits (3 MSBs)
  parameter int unsigned ID_W      = 8;     // fproc core/function ID
  parameter logic [ID_W-1:0] PARAM_ID = 8'd10;  // ID of a parameter request
  parameter int unsigned SHOT_W    = 16;    // shot counter width
  parameter int unsigned SET_W     = 8;     // consecutive-set counter width

  // One access on the local bus, valid for exactly one 500 MHz cycle.
  // ctrl_sel routes it to the stitch control registers instead of a memory.
  typedef struct packed {
    logic              re;
    logic              we;
    logic              ctrl_sel;
    logic [LB_AW-1:0]  addr;
    logic [DATA_W-1:0] wdata;
  } lb_req_t;

  // One port of a parameter memory, as driven by its user.
  typedef struct packed {
    logic              en;
    logic              we;
    logic [MEM_AW-1:0] addr;
    logic [DATA_W-1:0] wdata;
  } mem_port_t;

  // Request from a distributed-processor core (the alu_fproc instruction).
  typedef struct packed {
    logic            valid;
    logic [ID_W-1:0] id;
  } fproc_req_t;

  // Reply to a core: a one-cycle ready strobe carrying the data.
  typedef struct packed {
    logic              ready;
    logic [DATA_W-1:0] data;
  } fproc_resp_t;

  // Control registers of one qubit channel, word offset addr[2:0] inside the
  // control space, qubit in addr[LB_AW-1:MEM_AW].
  typedef enum logic [2:0] {
    REG_BASE      = 3'd0,  // first word of the parameter set
    REG_COUNT     = 3'd1,  // parameters per circuit (per shot)
    REG_SHOTS     = 3'd2,  // shots per set
    REG_SETS      = 3'd3,  // consecutive sets of COUNT words
    REG_CTRL      = 3'd4,  // write bit 0 = start (re-arm) the channel
    REG_STATUS    = 3'd5,  // {.., overrun, done, running}
    REG_DELIVERED = 3'd6,  // parameters delivered since start
    REG_STALLS    = 3'd7   // requests that found the prefetch buffer empty
  } ctrl_reg_e;

  // Per-qubit channel configuration (the scheduler's control codes).
  typedef struct packed {
    logic [MEM_AW-1:0] base;
    logic [MEM_AW:0]   count;   // 0 .. 2**MEM_AW
    logic [SHOT_W-1:0] shots;
    logic [SET_W-1:0]  sets;
  } chan_cfg_t;

endpackage
