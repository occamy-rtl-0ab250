// Shared types and constants of the Occamy RTL.
//
// Two memory networks run through the design: a 512-bit "wide" network for
// bulk DMA and instruction-refill traffic and a 64-bit "narrow" network for
// core messages, synchronisation and configuration. Both use the same
// single-beat request/response protocol, carried in one request struct
// (master -> slave) and one response struct (slave -> master):
//   q_valid/q_ready  handshake of the request channel (q)
//   p_valid/p_ready  handshake of the response channel (p)
// Every request receives exactly one response carrying the request's id.
// Crossbars prepend their master index to the id, so ids grow towards the
// slaves and are unwound on the way back. This single-beat protocol stands
// in for the AXI4 bursts of the silicon; it is a simplification of this RTL.
//
// Inside a cluster, cores and stream units reach the scratchpad (TCDM)
// through a grant-based port: a request is accepted in the cycle gnt is
// high and its read data returns exactly one cycle later.
package occamy_pkg;

  // ---------------- global sizes (defaults follow the paper) -------------
  localparam int unsigned AW          = 48;   // physical address width
  localparam int unsigned ID_W        = 32;   // transaction id width
  localparam int unsigned WIDE_DW     = 512;  // bulk network data width
  localparam int unsigned NARROW_DW   = 64;   // message network data width
  localparam int unsigned N_CHIPLETS  = 2;
  localparam int unsigned N_GROUPS    = 6;    // groups per chiplet
  localparam int unsigned N_CLUSTERS  = 4;    // clusters per group
  localparam int unsigned N_WORKERS   = 8;    // worker cores per cluster
  localparam int unsigned N_CORES     = 9;    // workers + DMA control core
  localparam int unsigned N_HBM_CH    = 8;    // HBM2E channels per chiplet
  localparam int unsigned TCDM_BYTES  = 128 * 1024;
  localparam int unsigned TCDM_BANKS  = 32;

  // ---------------- address map (own choice) ------------------------------
  // bit 40 selects the chiplet; each chiplet owns the same layout.
  localparam int unsigned CHIP_BIT        = 40;
  localparam logic [AW-1:0] CLUSTER_BASE  = 48'h00_1000_0000;
  localparam int unsigned   CLUSTER_SHIFT = 18;   // 256 KiB window per cluster
  localparam logic [AW-1:0] CLUSTER_PERIPH_OFS = 48'h2_0000; // regs after TCDM
  localparam logic [AW-1:0] SOC_REGS_BASE = 48'h00_0200_0000; // 64 KiB
  localparam logic [AW-1:0] PERIPH_BASE   = 48'h00_0300_0000; // 16 MiB, external
  localparam logic [AW-1:0] NSPM_BASE     = 48'h00_7000_0000; // 512 KiB narrow SPM
  localparam logic [AW-1:0] WSPM_BASE     = 48'h00_7100_0000; // 1 MiB wide SPM
  localparam logic [AW-1:0] HBM_BASE      = 48'h10_0000_0000; // 16 GiB HBM2E
  localparam int unsigned   HBM_BITS      = 34;

  // ---------------- bus structs -------------------------------------------
  typedef struct packed {
    logic [AW-1:0]        addr;
    logic                 write;
    logic [WIDE_DW-1:0]   wdata;
    logic [WIDE_DW/8-1:0] strb;
    logic [ID_W-1:0]      id;
  } wide_q_t;

  typedef struct packed {
    logic [WIDE_DW-1:0]   rdata;
    logic                 err;
    logic [ID_W-1:0]      id;
  } wide_p_t;

  typedef struct packed {
    logic q_valid;
    wide_q_t q;
    logic p_ready;
  } wide_req_t;

  typedef struct packed {
    logic q_ready;
    logic p_valid;
    wide_p_t p;
  } wide_rsp_t;

  typedef struct packed {
    logic [AW-1:0]          addr;
    logic                   write;
    logic [NARROW_DW-1:0]   wdata;
    logic [NARROW_DW/8-1:0] strb;
    logic [ID_W-1:0]        id;
  } narrow_q_t;

  typedef struct packed {
    logic [NARROW_DW-1:0]   rdata;
    logic                   err;
    logic [ID_W-1:0]        id;
  } narrow_p_t;

  typedef struct packed {
    logic q_valid;
    narrow_q_t q;
    logic p_ready;
  } narrow_req_t;

  typedef struct packed {
    logic q_ready;
    logic p_valid;
    narrow_p_t p;
  } narrow_rsp_t;

  // ---------------- TCDM port ---------------------------------------------
  typedef struct packed {
    logic        req;
    logic        we;
    logic [31:0] addr;   // byte address inside the cluster window
    logic [63:0] wdata;
    logic [7:0]  be;
  } tcdm_req_t;

  typedef struct packed {
    logic        gnt;
    logic        rvalid;  // one cycle after a granted read or write
    logic [63:0] rdata;
  } tcdm_rsp_t;

  // ---------------- stream unit configuration -----------------------------
  typedef enum logic [1:0] {
    IDX_8  = 2'd0,
    IDX_16 = 2'd1,
    IDX_32 = 2'd2
  } idx_size_e;

  typedef enum logic [1:0] {
    CMP_OFF   = 2'd0,
    CMP_INTER = 2'd1,   // sparse intersection
    CMP_UNION = 2'd2    // sparse union
  } cmp_mode_e;

  typedef struct packed {
    logic [31:0]      base;        // data pointer (affine) or data base (indirect)
    logic [3:0][31:0] bound;       // iterations per loop level minus one
    logic [3:0][31:0] stride;      // byte stride per loop level
    logic [1:0]       dims;        // number of loop levels minus one
    logic             write;       // 1: FPU -> memory
    logic             indir;       // indirect stream
    idx_size_e        idx_size;
    logic [31:0]      idx_base;    // index array pointer
    logic [31:0]      idx_len;     // number of indices
  } su_cfg_t;

  // actions sent by the index comparator to an indirect SU
  typedef enum logic [1:0] {
    ACT_NONE  = 2'd0,
    ACT_FETCH = 2'd1,  // pop the index and fetch its value
    ACT_SKIP  = 2'd2,  // pop the index, no value
    ACT_ZERO  = 2'd3   // keep the index, emit a zero value
  } su_act_e;

  // ---------------- DMA ---------------------------------------------------
  typedef struct packed {
    logic [AW-1:0] src;
    logic [AW-1:0] dst;
    logic [31:0]   len;        // bytes per row, multiple of 64
    logic [AW-1:0] src_stride;
    logic [AW-1:0] dst_stride;
    logic [31:0]   reps;       // rows (1 = 1D transfer)
  } dma_cmd_t;

  // ---------------- muldiv ------------------------------------------------
  typedef enum logic [2:0] {
    MD_MUL = 3'd0, MD_MULH = 3'd1, MD_MULHSU = 3'd2, MD_MULHU = 3'd3,
    MD_DIV = 3'd4, MD_DIVU = 3'd5, MD_REM = 3'd6, MD_REMU = 3'd7
  } md_op_e;

  // ---------------- D2D ---------------------------------------------------
  typedef enum logic [1:0] {
    PL_REQ    = 2'd0,
    PL_RSP    = 2'd1,
    PL_CREDIT = 2'd2
  } pl_type_e;


  // ---------------- signals of one core towards its cluster ---------------
  // The RV32 integer cores and their FPUs are not part of this RTL; these
  // structs carry everything a core exchanges with the cluster.
  typedef struct packed {
    logic             scfg_we;       // stream-unit configuration write
    logic [7:0]       scfg_addr;
    logic [31:0]      scfg_wdata;
    logic [2:0]       ft_rready;     // FPU reads ft0..ft2
    logic [2:0]       ft_wvalid;     // FPU writes ft0..ft2
    logic [2:0][63:0] ft_wdata;
    logic             off_valid;     // FP instruction offload
    logic [31:0]      off_instr;
    logic             off_is_frep;
    logic [31:0]      off_reps;
    logic [4:0]       off_n;
    logic             fpu_ready;     // FPU takes the next instruction
    tcdm_req_t        lsu;           // load/store port into the TCDM
    logic             md_valid;      // shared multiply-divide unit
    md_op_e           md_op;
    logic [31:0]      md_a;
    logic [31:0]      md_b;
    logic             barrier_arrive;
    narrow_req_t      fetch;         // instruction fetch (64 bit)
  } core_req_t;

  typedef struct packed {
    logic [31:0]      scfg_rdata;
    logic [2:0]       ft_rvalid;
    logic [2:0][63:0] ft_rdata;
    logic [2:0]       ft_wready;
    logic             off_ready;
    logic             fpu_valid;     // instruction for the FPU
    logic [31:0]      fpu_instr;
    tcdm_rsp_t        lsu;
    logic             md_ready;
    logic             md_rsp_valid;
    logic [31:0]      md_rsp_data;
    logic             barrier_release;
    narrow_rsp_t      fetch;
  } core_rsp_t;



  // ---------------- per-group control (from the chiplet registers) --------
  localparam int unsigned TLB_ENTRIES = 4;
  localparam int unsigned PAGE_BITS   = 12;
  typedef struct packed {
    logic clk_en;
    logic rst_n;
    logic isolate;
    logic [TLB_ENTRIES-1:0]                   tlb_valid;
    logic [TLB_ENTRIES-1:0][AW-PAGE_BITS-1:0] tlb_in;
    logic [TLB_ENTRIES-1:0][AW-PAGE_BITS-1:0] tlb_out;
    logic [TLB_ENTRIES-1:0][AW-PAGE_BITS-1:0] tlb_mask;
    logic [TLB_ENTRIES-1:0]                   tlb_r;
    logic [TLB_ENTRIES-1:0]                   tlb_w;
    logic          cc_enable;
    logic [AW-1:0] cc_base;
    logic [AW-1:0] cc_mask;
    logic          cc_flush;
  } group_cfg_t;

endpackage
