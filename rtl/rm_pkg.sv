// rm_pkg: constants and types shared by the racetrack-memory CNN accelerator.
//
// Sizes follow the paper's main configuration: Macro Units (MU) of 4 tracks x 64
// domains with 4 access ports per track, subarrays of 16x4 MUs, 4 subarrays per
// mat, 16 mats per mat group (8 activation + 8 weight), 16 mat groups per 2 MB
// bank, 4 bit-serial lanes (one per MU track) in every adder unit, 8-bit operands.
// The command encoding (op_e, mg_cmd_t) is this design's own: the paper leaves
// operation sequencing to software and gives no instruction format.
//
// Lint note: a module that imports the package but uses only some of its
// constants gets UNUSEDPARAM warnings for the rest; they are harmless.
package rm_pkg;
  // Macro Unit and subarray geometry (Table 7, Table 8)
  localparam int unsigned TRACKS      = 4;   // racetracks per MU = lanes per adder unit
  localparam int unsigned DOMAINS     = 64;  // domains per racetrack
  localparam int unsigned PORTS       = 4;   // access ports per racetrack
  localparam int unsigned SEG         = DOMAINS / PORTS; // domains served by one port
  localparam int unsigned SA_ROWS     = 16;  // MU rows per subarray
  localparam int unsigned SA_COLS     = 4;   // MU columns per subarray
  localparam int unsigned SAR_PER_MAT = 4;   // subarrays per mat
  localparam int unsigned MATS_HALF   = 4;   // activation (and weight) mats per multiplier block
  localparam int unsigned MB_PER_MG   = 2;   // multiplier blocks per mat group
  localparam int unsigned N_MG        = 16;  // mat groups per bank

  // Arithmetic (Sec 3.2, 3.3, 5.2)
  localparam int unsigned NB          = 8;   // operand bit-width (activations and weights)
  localparam int unsigned SHIFT_D     = 7;   // shift distance +-7 ("log4b")
  localparam int unsigned SH_W        = 4;   // signed width of a logarithmic weight

  localparam int unsigned ROW_W  = $clog2(SA_ROWS);
  localparam int unsigned COL_W  = $clog2(SA_COLS);
  localparam int unsigned PORT_W = $clog2(PORTS);
  localparam int unsigned OFF_W  = $clog2(SEG);
  localparam int unsigned LEN_W  = $clog2(SEG) + 1;

  // Word address inside a subarray: MU row, MU column, port, first domain of the word
  typedef struct packed {
    logic [ROW_W-1:0]  row;
    logic [COL_W-1:0]  col;
    logic [PORT_W-1:0] port;
    logic [OFF_W-1:0]  off;
  } sa_addr_t;

  // Weight-mat word address: a weight mat holds 8 KB of NB-bit words
  localparam int unsigned WM_WORDS = 8 * 1024 * 8 / NB;
  localparam int unsigned WADDR_W  = $clog2(WM_WORDS);

  typedef enum logic [2:0] {
    OP_WRITE   = 3'd0,  // host writes TRACKS words into one activation subarray
    OP_READ    = 3'd1,  // host reads TRACKS words from one activation subarray
    OP_WWRITE  = 3'd2,  // host writes one weight word into a weight mat
    OP_ADD     = 3'd3,  // mat adder: dst = SAR pair sum (ADD0: SAR0+SAR1, ADD1: SAR2+SAR3)
    OP_BOOTH   = 3'd4,  // Booth multiply activation word x weight, product to a subarray
    OP_SHIFT   = 3'd5,  // shift-based multiply-add of two activations with two log weights
    OP_TREE    = 3'd6,  // stream a word (plus MG adder) into the bank adder tree
    OP_SUB     = 3'd7   // mat adder with negation: dst = even SAR - odd SAR of the pair
  } op_e;

  // One mat-group operation. Fields not used by an op are ignored.
  typedef struct packed {
    op_e                   op;
    logic                  half;     // multiplier block / half of the mat group (0 or 1)
    logic [1:0]            mat;      // activation or weight mat within the half
    logic [1:0]            sar_a;    // first source subarray (or target of WRITE/READ)
    logic [1:0]            sar_d;    // destination subarray
    sa_addr_t              addr_a;   // first source word
    sa_addr_t              addr_b;   // second source word (partner subarray)
    sa_addr_t              addr_d;   // destination word
    logic [LEN_W-1:0]      len;      // word length in bits for WRITE/READ/ADD/TREE
    logic [WADDR_W-1:0]    waddr0;   // weight address (Booth weight, or shift weight 0)
    logic [WADDR_W-1:0]    waddr1;   // second log weight for OP_SHIFT
    logic [TRACKS-1:0]     lanes;    // enabled tracks (1 for fully-connected layers)
    logic                  tree_b;   // OP_TREE: MG adder also adds the other half's mat
    logic                  tree_dst; // OP_TREE: this mat group writes the tree result
    logic [1:0]            dst_mat;  // OP_TREE destination activation mat (in half)
    logic                  dst_half; // OP_TREE destination half
  } mg_cmd_t;

  // Per-cycle control of one subarray (driven by the mat-group sequencer)
  typedef enum logic [1:0] { WS_EXT = 2'd0, WS_ADD0 = 2'd1, WS_ADD1 = 2'd2 } wsel_e;
  typedef struct packed {
    logic              start;     // begin an access at `addr`
    sa_addr_t          addr;
    logic              zero_lead; // shift-based read: the separator 0 is under the port first
    logic              shift;     // shift all four tracks of the MU by one domain
    logic              wr;        // write the bits under the port
    logic [TRACKS-1:0] wmask;     // tracks written
    wsel_e             wsel;      // write data source
    logic              stop;      // end the access phase, start the position reset
  } sar_ctl_t;

  // Per-cycle control of one mat adder unit (Fig. 19)
  typedef struct packed {
    logic valid;
    logic first;
    logic booth;   // 1: both inputs from the Booth multiplier, 0: from the SAR pair
    logic sub;     // negate the second operand (invert, carry-in 1): a - b
  } add_ctl_t;

  // Event counters of the bank, one per mechanism
  typedef struct packed {
    logic [31:0] booth_ops;
    logic [31:0] shift_ops;
    logic [31:0] add_ops;
    logic [31:0] tree_ops;
    logic [31:0] fc_ops;        // operations with a single enabled track
    logic [31:0] reset_waits;   // cycles an op waited for a position reset
    logic [31:0] reset_hidden;  // cycles a position reset ran under another access
  } stats_t;
endpackage
