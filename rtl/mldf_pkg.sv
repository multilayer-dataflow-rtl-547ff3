// mldf_pkg: types and constants shared by the multilayer-dataflow array.
//
// The array is a 4x4 mesh of processing elements (PEs) fed by a multi-line
// scratchpad memory (SPM). Each PE holds up to MAX_NODES dataflow-graph
// (DFG) layer nodes; every node owns up to four micro code blocks, one per
// decoupled function unit (Load, Cal, Flow, Store). This package defines the
// micro instruction, the graph node record, the context packet used to
// configure the PEs, and the packets of the data and req/ack networks.
//
// Sizes that follow the paper: 4x4 PEs, fp16 data, SIMD16 vectors, 4 SPM
// banks of 8 lines, 4 MB of SPM. Everything else here (field widths, node
// count, buffering depth, encodings) is this design's own choice.
package mldf_pkg;

  // ---------------- array and data sizes ----------------
  localparam int NX      = 4;               // PE columns
  localparam int NY      = 4;               // PE rows
  localparam int NPE     = NX * NY;
  localparam int PE_AW   = 4;               // PE index width
  localparam int DW      = 16;              // fp16 element
  localparam int SIMD    = 16;              // lanes per vector
  localparam int VW      = DW * SIMD;       // 256-bit vector
  localparam int SPM_AW  = 17;              // SPM entry address (128K x 32 B = 4 MB)

  // ---------------- PE resources ----------------
  localparam int MAX_NODES = 16;            // DFG layer nodes per PE
  localparam int NODE_AW   = 4;
  localparam int NBUF      = 4;             // iterations in flight (register slots)
  localparam int SLOT_AW   = 2;
  localparam int SLOT_REGS = 32;            // registers per slot
  localparam int REG_AW    = 7;             // SIMD RAM address (128 vectors)
  localparam int IRAM_AW   = 8;             // instruction RAM address (256 instr.)
  localparam int ITER_W    = 16;

  // function units, in the order their blocks run inside one node
  localparam int U_LOAD  = 0;
  localparam int U_CAL   = 1;
  localparam int U_FLOW  = 2;
  localparam int U_STORE = 3;
  localparam int NUNIT   = 4;

  // ---------------- micro instructions ----------------
  typedef enum logic [3:0] {
    OP_NOP    = 4'd0,
    OP_LDN    = 4'd1,   // row-wise load of one SPM entry
    OP_LDC    = 4'd2,   // column-wise gather: one element from each of 16 lines
    OP_STN    = 4'd3,   // row-wise store
    OP_STC    = 4'd4,   // column-wise scatter
    OP_MADD   = 4'd5,   // rd = rd + ra*rb
    OP_MUL    = 4'd6,   // rd = ra*rb
    OP_ADD    = 4'd7,   // rd = ra+rb
    OP_SUB    = 4'd8,   // rd = ra-rb
    OP_COPY_I = 4'd9,   // rd = ra inside the PE (inner flow)
    OP_COPY_T = 4'd10   // ra -> register rd of node tnode in PE tpe (trans flow)
  } op_e;

  // register field: bit 7 set = absolute SIMD RAM address in [6:0];
  // clear = register [4:0] of the slot of the current iteration
  typedef logic [7:0] rfield_t;

  typedef struct packed {
    op_e                op;
    rfield_t            rd;
    rfield_t            ra;
    rfield_t            rb;
    logic [PE_AW-1:0]   tpe;
    logic [NODE_AW-1:0] tnode;
    logic [SPM_AW-1:0]  imm;    // SPM offset from the node's base
    logic [3:0]         lane;   // element index for column-wise access
  } inst_t;

  // ---------------- graph node record ----------------
  typedef struct packed {
    logic [ITER_W-1:0]            total_iter;
    logic [NUNIT-1:0][IRAM_AW-1:0] head;     // first instruction of each block
    logic [NUNIT-1:0][IRAM_AW-1:0] len;      // 0 = node has no block on that unit
    logic [SPM_AW-1:0]            spm_base;
    logic [SPM_AW-1:0]            spm_stride; // SPM address step per iteration
    logic [7:0]                   arr_per_iter; // remote vectors expected per iteration
    logic [PE_AW-1:0]             up_pe;       // remote sender, receives the acks
    logic [NODE_AW-1:0]           up_node;
    logic                         down_local;  // COPY_I feeds node+1 in this PE
    logic                         down_remote; // COPY_T feeds a remote node
  } node_info_t;

  // ---------------- context network ----------------
  typedef enum logic [1:0] {
    CTX_NODE  = 2'd0,   // addr = node index, data = node_info_t
    CTX_INST  = 2'd1,   // addr = instruction address, data = inst_t
    CTX_SIMD  = 2'd2,   // addr = SIMD RAM address, data = vector (static weights)
    CTX_START = 2'd3    // data[NODE_AW:0] = number of active nodes
  } ctx_kind_e;

  typedef struct packed {
    logic [PE_AW-1:0] pe;
    ctx_kind_e        kind;
    logic [7:0]       addr;
    logic [VW-1:0]    data;
  } ctx_pkt_t;
  localparam int CTX_W = $bits(ctx_pkt_t);

  // ---------------- mesh networks ----------------
  // Every network packet starts (MSBs) with a 5-bit route header.
  typedef struct packed {
    logic       to_spm;  // leave the array at the top of column dx
    logic [1:0] dx;
    logic [1:0] dy;
  } route_t;
  localparam int ROUTE_W = $bits(route_t);

  typedef enum logic [1:0] {
    PK_FLOW  = 2'd0,    // COPY_T data to a remote PE
    PK_LDREQ = 2'd1,    // load request to the SPM
    PK_LDRSP = 2'd2,    // load data back to the PE
    PK_ST    = 2'd3     // store data to the SPM
  } pkind_e;

  typedef struct packed {
    route_t              rt;
    pkind_e              kind;
    logic [PE_AW-1:0]    src_pe;
    logic [NODE_AW-1:0]  node;
    logic [REG_AW-1:0]   rg;
    logic                col;
    logic [3:0]          lane;
    logic [SPM_AW-1:0]   addr;
    logic [VW-1:0]       data;
  } dpkt_t;
  localparam int DPKT_W = $bits(dpkt_t);

  typedef struct packed {
    route_t             rt;
    logic [NODE_AW-1:0] node;   // sender node whose credit is returned
  } apkt_t;
  localparam int APKT_W = $bits(apkt_t);

  function automatic route_t route_to_pe(logic [PE_AW-1:0] pe);
    route_t r;
    r.to_spm = 1'b0;
    r.dx     = pe[1:0];
    r.dy     = pe[3:2];
    return r;
  endfunction

  function automatic logic [REG_AW-1:0] eff_reg(rfield_t f, logic [SLOT_AW-1:0] slot);
    return f[7] ? f[REG_AW-1:0] : {slot, f[4:0]};
  endfunction

endpackage
