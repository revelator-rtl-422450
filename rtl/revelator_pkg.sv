// revelator_pkg: widths, constants and types shared by the speculation engine blocks.
//
// The address widths follow the simulated system: a 48-bit x86-64 virtual address with
// 4 KB pages, and 128 GB of DRAM, which gives a 37-bit physical address and a 25-bit
// physical page number. Cache lines are 64 bytes. The CityHash constants are those of
// CityHash v1.1 (k1 and k2); the engine hashes a 24-byte message
// (VPN, per-process key, tier seed) with its 17-to-32-byte path.
package revelator_pkg;

  localparam int VA_W       = 48;             // x86-64 virtual address
  localparam int PG_OFF_W   = 12;             // 4 KB pages
  localparam int VPN_W      = VA_W - PG_OFF_W; // 36
  localparam int PA_W       = 37;             // 128 GB of DRAM
  localparam int PPN_W      = PA_W - PG_OFF_W; // 25
  localparam int LINE_OFF_W = 6;              // 64-byte cache lines
  localparam int LINE_W     = PA_W - LINE_OFF_W;
  localparam int PTE_IDX_W  = 9;              // 512 PTEs per last-level page-table frame
  localparam int PTW_ID_W   = 4;              // up to 16 page-table walkers
  localparam int BF_BITS    = 512;            // one Bloom filter = one cache line
  localparam int BF_KEY_W   = 14;             // VPN bits tested in a Bloom filter
  localparam int HINT_IDX_W = 9;              // VPN bits that index the 4 KB hint frame

  // CityHash v1.1 constants
  localparam logic [63:0] CITY_K1   = 64'hb492b66be98f3c65;
  localparam logic [63:0] CITY_K2   = 64'h9ae16a3b2f90404f;

  // Kind of a speculative request sent to the memory hierarchy.
  typedef enum logic [1:0] {
    SPEC_DATA       = 2'd0,   // candidate data line (fill into private L2 only)
    SPEC_PTE        = 2'd1,   // candidate last-level PTE line
    SPEC_NESTED_PTE = 2'd2,   // horizontal speculation: next guest PTE line in host memory
    SPEC_HINT_DATA  = 2'd3    // extra data candidate in the node named by a NUMA hint
  } spec_kind_e;

  // Kind of a translation request that reaches the engine.
  typedef enum logic {
    MISS_DATA   = 1'b0,       // L2 TLB miss on a (guest) virtual address
    MISS_NESTED = 1'b1        // nested walk reached a guest page-table page at a gPA
  } miss_kind_e;

  typedef struct packed {
    logic [LINE_W-1:0]   line;
    spec_kind_e          kind;
    logic [PTW_ID_W-1:0] ptw;
  } spec_req_t;

  // Event counters of the engine, for measuring coverage, accuracy and traffic.
  typedef struct packed {
    logic [31:0] data_misses;      // L2 TLB misses accepted
    logic [31:0] nested_reqs;      // horizontal-speculation requests accepted
    logic [31:0] miss_stalls;      // cycles a request waited (engine or walker log busy)
    logic [31:0] tier_drops;       // misses where the utilization monitor dropped a tier
    logic [31:0] degree_cuts;      // misses where the bandwidth monitor cut a kept tier
    logic [31:0] spec_data;        // speculative data fetches issued
    logic [31:0] spec_pte;         // speculative last-level PTE fetches issued
    logic [31:0] spec_nested;      // speculative nested PTE fetches issued
    logic [31:0] hint_walks;       // hint walks started
    logic [31:0] hint_fetches;     // extra fetches issued from a hint
    logic [31:0] walks_spec;       // resolved walks that had speculative fetches
    logic [31:0] walks_correct;    // ... of which one fetch was on the right page
    logic [31:0] invalidations;    // wrong speculative lines invalidated
  } engine_stats_t;

  function automatic logic [63:0] ror64(input logic [63:0] v, input int unsigned s);
    return (v >> s) | (v << (64 - s));
  endfunction

endpackage
