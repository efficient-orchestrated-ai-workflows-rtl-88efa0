// Shared types and constants of the Octopus scale-out spatial architecture.
// One chiplet is a 9x9 grid of Control Block Processing Units (CBUs) with an 8x8 grid of
// Task Block Processing Units (TBUs) in the gaps; every TBU touches the four CBUs at its
// corners (NW, NE, SW, SE). CBUs are linked to their N/E/S/W neighbours by two meshes of the
// same shape: a data network and a narrow control network. Task Flow (TF) ports on the west
// and east edges move streams between DRAM and the CBU queues.
// Grid sizes, 1024 PEs per TBU, 4 MB per CBU queue and 32-bit data follow the paper; field
// widths, encodings and the message set are this design's own choices.
// The constant PE_CFG_W is used only by the TBU modules, so files that import the package without them see it unused.
package octopus_pkg;

  localparam int DATA_W  = 32;   // 32-bit data types (benchmark table)
  localparam int TAG_W   = 8;    // stream tag carried with every packet (meta-segment)
  localparam int CO_W    = 4;    // mesh coordinate width
  localparam int NQ      = 8;    // logical task-flow queues per CBU
  localparam int QID_W   = $clog2(NQ);
  localparam int NSUB    = 4;    // sub-OWGs tracked by the cluster logic
  localparam int SUB_W   = $clog2(NSUB);
  localparam int NCFG    = 16;   // TB configurations held in a TBU (Table 2 needs up to 10)
  localparam int CIDX_W  = $clog2(NCFG);
  localparam int LOAD_W  = 20;   // queue occupancy / load counter width

  // Packet of a task flow: data word plus the stream meta-segment.
  typedef struct packed {
    logic              last;   // final packet of a stream
    logic [TAG_W-1:0]  tag;    // stream identification
    logic [DATA_W-1:0] data;
  } tf_word_t;

  // Corner directions between a TBU and its four CBUs (as seen from the TBU).
  typedef enum logic [1:0] {DIR_NW = 2'd0, DIR_NE = 2'd1, DIR_SW = 2'd2, DIR_SE = 2'd3} diag_e;

  // ---------------- processing element configuration ----------------
  typedef enum logic [3:0] {
    OP_PASS = 4'd0, OP_ADD = 4'd1, OP_SUB = 4'd2, OP_MUL = 4'd3, OP_AND = 4'd4,
    OP_OR   = 4'd5, OP_XOR = 4'd6, OP_SHL = 4'd7, OP_SHR = 4'd8, OP_MAX = 4'd9,
    OP_MIN  = 4'd10
  } pe_op_e;
  typedef enum logic [1:0] {SRC_W = 2'd0, SRC_N = 2'd1, SRC_REG = 2'd2, SRC_IMM = 2'd3} pe_src_e;
  typedef struct packed {
    pe_op_e     op;
    pe_src_e    a;
    pe_src_e    b;
    logic       wr_reg;   // also store the result in the PE register
    logic [6:0] imm;      // small constant operand
  } pe_cfg_t;             // 16 bits
  localparam int PE_CFG_W = $bits(pe_cfg_t);

  // Header of one TB configuration: where its streams come from and go to.
  typedef struct packed {
    diag_e            in_dir;   // CBU holding the input queue
    logic [QID_W-1:0] in_q;
    diag_e            out_dir;  // CBU receiving the output queue
    logic [QID_W-1:0] out_q;
    logic [7:0]       ii;       // issue interval in cycles (>=1)
    logic             dyn;      // add data[31:28] to the interval: data-dependent time
    logic [SUB_W-1:0] sub;      // sub-OWG the TB belongs to
  } tb_hdr_t;

  // ---------------- TBU <-> CBU control links ----------------
  typedef enum logic {RSN_IDLE = 1'b0, RSN_CONGESTED = 1'b1} reason_e;
  typedef struct packed {       // TBU -> CBU status report
    logic              valid;
    reason_e           reason;
    logic [CIDX_W-1:0] cur;
  } tbu_rpt_t;
  typedef struct packed {       // CBU -> TBU schedule response
    logic              valid;
    logic              sw;      // 1: switch to idx, 0: keep current TB
    logic [CIDX_W-1:0] idx;
  } tbu_cmd_t;

  // ---------------- network flits ----------------
  typedef struct packed {
    logic [CO_W-1:0]  dx, dy;   // destination
    logic [QID_W-1:0] q;        // destination queue
    tf_word_t         w;
  } dflit_t;

  typedef enum logic [1:0] {
    M_LOAD_XCHG = 2'd0,  // balancer -> corresponding CBU of a neighbour cluster
    M_LOAD_RPT  = 2'd1,  // balancer -> cluster leader
    M_TRIG      = 2'd2,  // member -> leader: scheduling trigger
    M_CL_CFG    = 2'd3   // leader -> member: run this sub-OWG
  } cmsg_e;
  typedef struct packed {
    logic [CO_W-1:0]   dx, dy;
    logic [CO_W-1:0]   sx, sy;
    cmsg_e             mt;
    logic [SUB_W-1:0]  sub;
    logic [LOAD_W-1:0] load;
  } cflit_t;

  // Move request: send cnt packets of local queue src_q to queue dq of CBU (dx,dy).
  typedef struct packed {
    logic [QID_W-1:0]  src_q;
    logic [LOAD_W-1:0] cnt;
    logic [CO_W-1:0]   dx, dy;
    logic [QID_W-1:0]  dq;
  } move_t;

  // Cluster configuration of one CBU.
  typedef struct packed {
    logic              en;
    logic              leader;
    logic [CO_W-1:0]   lx, ly;      // leader coordinates
    logic [3:0]        nb_valid;    // neighbour clusters present: N,E,S,W
    logic [3:0][CO_W-1:0] nbx, nby; // corresponding CBU of each neighbour cluster
  } cl_cfg_t;

  // Configuration bus from the host, broadcast to every TBU and CBU.
  localparam int CFG_DW = 512;   // one PE row: 32 PEs x 16 bits
  typedef enum logic [2:0] {
    CK_TBU_HDR   = 3'd0,  // addr: config index, data: tb_hdr_t
    CK_TBU_ROW   = 3'd1,  // addr: {config index, row}, data: PE row
    CK_TBU_START = 3'd2,  // addr: config index to start
    CK_CBU_ENTRY = 3'd3,  // addr: scheduler entry, data: sched_ent_t
    CK_CBU_RULE  = 3'd4,  // addr: CB engine rule, data: cb_rule_t
    CK_CBU_CLUST = 3'd5,  // data: cl_cfg_t (addr 0) or member coordinates (addr 1+m)
    CK_CBU_MOVE  = 3'd6,  // data: move_t, host-requested transfer
    CK_CBU_PARAM = 3'd7   // addr 0: period, 1: volume, 2: task threshold, 3: owned corners
  } cfg_kind_e;
  typedef struct packed {
    logic              valid;
    cfg_kind_e         kind;
    logic [CO_W-1:0]   x, y;     // target unit (grid position)
    logic [15:0]       addr;
    logic [CFG_DW-1:0] data;
  } cfg_bus_t;

  // Adaptive TBU scheduler table entry: a TB the CBU may hand to its TBUs.
  typedef struct packed {
    logic              valid;
    logic [CIDX_W-1:0] idx;
    logic [QID_W-1:0]  in_q;
    logic [QID_W-1:0]  out_q;
    logic [SUB_W-1:0]  sub;
  } sched_ent_t;

  // Control block rule of the CB engine.
  typedef enum logic [1:0] {CB_ROUTE = 2'd0, CB_MERGE = 2'd1, CB_EXPAND = 2'd2, CB_COLLAPSE = 2'd3} cb_op_e;
  typedef struct packed {
    logic             valid;
    cb_op_e           op;
    logic [QID_W-1:0] sq0, sq1, dq0, dq1;
    logic [15:0]      param;
  } cb_rule_t;

  // Event counters of one CBU, brought out for observation.
  typedef struct packed {
    logic [15:0] n_switch;   // adaptive scheduler: TBU told to switch TB
    logic [15:0] n_stay;     // adaptive scheduler: TBU told to keep its TB
    logic [15:0] n_trig;     // cluster scheduling triggers raised
    logic [15:0] n_sched;    // cluster decisions taken (leader)
    logic [15:0] n_rounds;   // load-exchange rounds
    logic [15:0] n_rebal;    // rebalancing moves requested
    logic [15:0] n_moved;    // packets sent over the data network
    logic [15:0] n_recv;     // packets received from the data network
    logic [15:0] n_cb;       // packets handled by the CB engine
  } cbu_stats_t;

  // Command of a TF (memory) port.
  typedef struct packed {
    logic              store_base; // 1: set the DRAM address where arriving packets go
    logic [31:0]       addr;       // DRAM word address
    logic [15:0]       len;        // load: packets to read (one stream)
    logic [CO_W-1:0]   dx, dy;     // load: destination CBU
    logic [QID_W-1:0]  q;          // load: destination queue
    logic [TAG_W-1:0]  tag;        // load: stream tag
  } tfp_cmd_t;

endpackage
