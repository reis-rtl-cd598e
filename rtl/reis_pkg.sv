// reis_pkg: types and constants shared by the REIS retrieval SSD.
//
// Geometry follows the worked example of the design: a 16 KB page holds
// 128 binary-quantised 1024-dimension embeddings, so a "slot" (the unit the
// page buffers, the fail-bit counter and the channel move) is 1024 bits and a
// mini-page address is the page address with a 7-bit slot offset appended.
// Every address in the controller (EADR, RADR, DADR) is such a slot address:
// logical page number * 128 + slot.  An INT8 embedding of 1024 dimensions
// occupies 8 slots (1 KB), a document chunk one 4 KB sub-page (32 slots).
//
// The per-slot out-of-band (OOB) word is 64 bits: {DADR, RADR} for a binary
// embedding, the 8-bit cluster tag in bits [7:0] for a centroid.  The OOB
// layout, the command encodings and all field widths beyond those quoted
// above are this implementation's choices.
package reis_pkg;

  // ---- page geometry ---------------------------------------------------
  localparam int PAGE_BYTES = 16384;
  localparam int EMB_BITS   = 1024;                     // one binary embedding
  localparam int SLOTS      = PAGE_BYTES * 8 / EMB_BITS; // 128 per page
  localparam int SLOT_W     = $clog2(SLOTS);            // 7-bit mini-page offset
  localparam int OOB_W      = 64;                       // OOB bits kept per slot
  localparam int DIST_W     = 16;                       // Hamming distance
  localparam int ADDR_W     = 32;                       // slot (mini-page) address
  localparam int LPAGE_W    = ADDR_W - SLOT_W;          // logical page number
  localparam int ROW_W      = 24;                       // page index inside a plane
  localparam int DIE_W      = 8;
  localparam int PLANE_W    = 4;
  localparam int PL_MAX     = 16;                       // widest plane mask
  localparam int INT8_SLOTS = 8;                        // 1024 x INT8 = 8 slots
  localparam int DOC_SLOTS  = 32;                       // 4 KB chunk = 32 slots
  localparam int RDIST_W    = 32;                       // INT8 squared L2

  typedef logic [EMB_BITS-1:0] slot_t;
  typedef logic [OOB_W-1:0]    oob_t;
  typedef logic [DIST_W-1:0]   dist_t;
  typedef logic [ADDR_W-1:0]   addr_t;

  // ---- flash channel command set (controller -> die) -------------------
  // READ/PROG/DIN/DOUT are the ordinary NAND operations; IBC, XOR, GEN_DIST
  // and RD_TTL are the REIS extensions; SET_THR loads the pass/fail reference.
  typedef enum logic [3:0] {
    FC_NOP      = 4'h0,
    FC_READ     = 4'h1,   // array page -> sensing latch (tR)
    FC_PROG     = 4'h2,   // cache latch -> array page (tPROG)
    FC_DIN      = 4'h3,   // one slot + OOB -> cache latch
    FC_DOUT     = 4'h4,   // one slot + OOB of the sensing latch -> channel
    FC_IBC      = 4'h5,   // input broadcasting: query copied over cache latch
    FC_XOR      = 4'h6,   // data latch = sensing latch ^ cache latch
    FC_GEN_DIST = 4'h7,   // fail-bit count of one data-latch slot + pass/fail
    FC_RD_TTL   = 4'h8,   // TTL entry of one slot -> channel
    FC_SET_THR  = 4'h9    // distance-filtering threshold
  } fcmd_e;

  typedef struct packed {
    fcmd_e               op;
    logic [DIE_W-1:0]    die;
    logic [PLANE_W-1:0]  plane;
    logic [PL_MAX-1:0]   plane_mask;   // IBC only: planes selected together
    logic [ROW_W-1:0]    row;
    logic [SLOT_W-1:0]   slot;
    oob_t                oob;
    slot_t               data;
  } fcmd_t;

  // die -> controller response beat
  typedef struct packed {
    logic  valid;
    logic  pass;      // GEN_DIST status: DIST below threshold
    dist_t hdist;
    oob_t  oob;
    slot_t data;
  } fresp_t;

  // ---- TTL entry ---------------------------------------------------------
  // Coarse search: DIST, EMB, EADR, TAG.  Fine search: DIST, EMB, RADR, DADR.
  typedef struct packed {
    dist_t hdist;
    addr_t eadr;
    addr_t radr;
    addr_t dadr;
    logic [7:0] tag;
    slot_t emb;
  } ttl_t;

  // ---- flash controller operations (engine -> per-channel controller) --
  typedef enum logic [2:0] {
    OP_IBC  = 3'd0,   // broadcast the query to every plane of the channel
    OP_SCAN = 3'd1,   // distance-scan an embedding range, return TTL entries
    OP_READ = 3'd2,   // read nslots consecutive slots of one page
    OP_PROG = 3'd3    // program one page from SLOTS data beats
  } fop_e;

  typedef struct packed {
    fop_e                op;
    logic [LPAGE_W-1:0]  lpage;     // SCAN: region base page; READ/PROG: page
    logic [ADDR_W-1:0]   first;     // SCAN: first embedding index
    logic [ADDR_W-1:0]   last;      // SCAN: last embedding index
    logic [SLOT_W-1:0]   slot;      // READ: first slot
    logic [SLOT_W:0]     nslots;    // READ: slot count
    logic                fine;      // SCAN: fine (RADR/DADR) or coarse (TAG)
    logic                df_en;     // distance filtering on
    logic                pl_en;     // read-page-cache pipelining on
    logic                mpibc_en;  // multi-plane input broadcasting on
    dist_t               thr;       // distance-filtering threshold
    slot_t               data;      // IBC: query
  } fop_t;

  // ---- database records --------------------------------------------------
  // R-DB: one entry per deployed database (coarse-grained access).
  typedef struct packed {
    logic                valid;
    logic                ivf;
    logic [7:0]          did;
    logic [ADDR_W-1:0]   n;          // entries
    logic [15:0]         nlist;      // clusters (IVF)
    logic [LPAGE_W-1:0]  emb_first;  // first page of the embedding region
    logic [LPAGE_W-1:0]  emb_last;   // last page of the embedding region
    logic [LPAGE_W-1:0]  doc_first;
    logic [LPAGE_W-1:0]  doc_last;
    logic [LPAGE_W-1:0]  bin_base;   // binary sub-region
    logic [LPAGE_W-1:0]  int8_base;  // INT8 sub-region
    logic [15:0]         rivf_base;  // first R-IVF record of the database
  } rdb_t;                           // centroid sub-region starts at emb_first

  // R-IVF: one entry per cluster.
  typedef struct packed {
    addr_t      cent;    // centroid mini-page address
    addr_t      first;   // first embedding index of the cluster
    addr_t      last;    // last embedding index of the cluster
    logic [7:0] tag;
  } rivf_t;

  // ---- host API (vendor-specific NVMe opcodes 80h-FFh) -------------------
  typedef enum logic [7:0] {
    H_DB_DEPLOY  = 8'h80,
    H_IVF_DEPLOY = 8'h81,
    H_SEARCH     = 8'h82,
    H_IVF_SEARCH = 8'h83,
    H_DB_WRITE   = 8'h84,   // one page of database content follows
    H_IVF_CI     = 8'h85    // one R-IVF record (cluster information)
  } hop_e;

  typedef struct packed {
    hop_e          op;
    logic [7:0]    did;
    logic [15:0]   qid;
    logic [ADDR_W-1:0] n;        // DEPLOY: entries; WRITE: page index; CI: cluster
    logic [15:0]   nlist;        // IVF_DEPLOY
    logic [7:0]    k;            // SEARCH
    logic [15:0]   nprobe;       // IVF_SEARCH: clusters probed for target R
    logic [1:0]    region;       // WRITE: 0 centroid, 1 binary, 2 INT8, 3 document
    rivf_t         ci;           // CI record (cent field ignored)
  } hcmd_t;

  localparam logic [1:0] RG_CENT = 2'd0, RG_BIN = 2'd1, RG_INT8 = 2'd2, RG_DOC = 2'd3;

  typedef struct packed {
    logic [15:0]  qid;
    logic [7:0]   rank;
    logic [RDIST_W-1:0] rdist;
    addr_t        dadr;
  } hres_t;

endpackage
