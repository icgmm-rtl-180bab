// icgmm_pkg: types and constants shared by the ICGMM cache system.
//
// The cache configuration (64 MB DRAM cache, 4 KB blocks, 8 ways), the number of
// Gaussians (256), the timestamp windows (32 requests per window, 10,000 windows
// per access shot), the SSD latencies (75 us read, 900 us write) and the 233 MHz
// clock follow the published prototype. Address, timestamp and fixed-point widths
// are this design's own choices; the paper gives none of them.
package icgmm_pkg;

  // ---------------- system sizes ----------------
  localparam int unsigned PA_W        = 48;   // host physical address bits
  localparam int unsigned PAGE_SHIFT  = 12;   // 4 KB page = SSD access unit
  localparam int unsigned PI_W        = PA_W - PAGE_SHIFT;  // page index bits
  localparam int unsigned RAWTIME_W   = 32;   // raw time field of a trace
  localparam int unsigned TS_W        = 16;   // transformed timestamp (< 10,000)

  localparam int unsigned CACHE_BYTES = 64 * 1024 * 1024;
  localparam int unsigned BLOCK_BYTES = 4096;
  localparam int unsigned WAYS        = 8;
  localparam int unsigned SETS        = CACHE_BYTES / BLOCK_BYTES / WAYS; // 2048

  localparam int unsigned NUM_GAUSS   = 256;
  localparam int unsigned LEN_WINDOW  = 32;
  localparam int unsigned LEN_SHOT    = 10000;

  localparam int unsigned CLK_MHZ     = 233;
  localparam int unsigned SSD_READ_US = 75;
  localparam int unsigned SSD_WRITE_US= 900;
  localparam int unsigned SSD_READ_CYC  = SSD_READ_US  * CLK_MHZ;   // 17,475
  localparam int unsigned SSD_WRITE_CYC = SSD_WRITE_US * CLK_MHZ;   // 209,700
  localparam int unsigned LAT_W       = 24;   // emulator cycle counter width

  // ---------------- GMM number formats ----------------
  // Score: unsigned Q8.24 (each Gaussian term is at most 1.0, K <= 256 terms).
  localparam int unsigned SCORE_W     = 32;
  localparam int unsigned SCORE_FRAC  = 24;
  // Quadratic-form coefficients: signed, COEF_FRAC fractional bits.
  localparam int unsigned COEF_W      = 64;
  localparam int unsigned COEF_FRAC   = 56;
  // Exponent (base 2, non-negative): unsigned Q8.8.
  localparam int unsigned EXP_W       = 16;
  localparam int unsigned EXP_FRAC    = 8;

  typedef logic [SCORE_W-1:0] score_t;

  // One Gaussian as held in the weight buffer. The host folds the parameters
  // pi_k, mu_k and Sigma_k of Eq. (1)-(3) into a base-2 exponent:
  //   term_k = 2^-(a*dp^2 + b*dp*dt + c*dt^2 + l),  dp = P-mu_p, dt = T-mu_t
  //   a = log2(e)/2 * inv(Sigma)_pp,  b = log2(e) * inv(Sigma)_pt,
  //   c = log2(e)/2 * inv(Sigma)_tt,  l = -log2(pi_k / (2*pi*sqrt|Sigma_k|))
  typedef struct packed {
    logic [PI_W-1:0]          mu_p;   // mean page index
    logic [TS_W-1:0]          mu_t;   // mean timestamp
    logic signed [COEF_W-1:0] a;
    logic signed [COEF_W-1:0] b;
    logic signed [COEF_W-1:0] c;
    logic [EXP_W-1:0]         l;      // Q8.8, >= 0
  } gauss_t;

  // A memory request as stored in the trace memory: [R/W, PA, Time].
  typedef struct packed {
    logic                 wr;    // 1 = write, 0 = read
    logic [PA_W-1:0]      pa;
    logic [RAWTIME_W-1:0] time_raw;  // trace time; its low TS_W bits are the
                                     // window timestamp when ts_from_trace = 1
  } trace_t;

  // A request as forwarded by the signal controller: the timestamp is the
  // window index of Algorithm 1.
  typedef struct packed {
    logic            wr;
    logic [PA_W-1:0] pa;
    logic [TS_W-1:0] ts;
  } req_t;

  // Cache policy, chosen by the host (three GMM strategies plus plain LRU).
  typedef enum logic [1:0] {
    POL_LRU      = 2'd0,  // default policy, GMM engine closed
    POL_GMM_CACHE= 2'd1,  // GMM decides whether a missed page is cached
    POL_GMM_EVICT= 2'd2,  // GMM score replaces the LRU counter for eviction
    POL_GMM_BOTH = 2'd3   // both
  } policy_e;

  // Response of the cache control engine for each request.
  typedef struct packed {
    logic hit;
  } rsp_t;

  // One way of a cache set, as kept in the tag and score table. `tag` holds the
  // page index bits above the set index (zero-extended, so the set count can be
  // changed without changing the type). `score` is the GMM score stored with the
  // block; `age` is the LRU rank (0 = most recently used).
  localparam int unsigned AGE_W = $clog2(WAYS);
  typedef struct packed {
    logic             valid;
    logic             dirty;
    logic [PI_W-1:0]  tag;
    score_t           score;
    logic [AGE_W-1:0] age;
  } way_t;
  typedef way_t [WAYS-1:0] set_t;
  typedef logic [$clog2(WAYS)-1:0] way_idx_t;

  function automatic logic [PI_W-1:0] page_index(input logic [PA_W-1:0] pa);
    return pa[PA_W-1:PAGE_SHIFT];
  endfunction

endpackage
