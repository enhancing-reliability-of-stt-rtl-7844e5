// reap_pkg: geometry, ECC code parameters and bus types shared by the REAP
// L2 cache.
//
// The defaults describe the STT-MRAM L2 cache of the evaluated system: 1 MB,
// 8-way set-associative, 64-byte lines, write-back. From these the cache has
// 2048 sets. A line holds 512 data bits. Each line is protected by an extended
// Hamming SEC-DED code: 10 Hamming check bits plus one overall parity bit
// (11 bits), so a stored codeword has 523 bits. This design picks a 32-bit
// physical address, which leaves a 15-bit tag. Requests and refills move whole
// lines, because the cache levels above and below use the same 64-byte lines.
package reap_pkg;

  localparam int unsigned ADDR_W     = 32;            // assumed
  localparam int unsigned CACHE_BYTES = 1024 * 1024;  // 1 MB
  localparam int unsigned WAYS       = 8;             // 8-way
  localparam int unsigned LINE_BYTES = 64;            // 64 B block
  localparam int unsigned DATA_W     = LINE_BYTES * 8;
  localparam int unsigned SETS       = CACHE_BYTES / (LINE_BYTES * WAYS);
  localparam int unsigned OFFSET_W   = $clog2(LINE_BYTES);
  localparam int unsigned INDEX_W    = $clog2(SETS);
  localparam int unsigned TAG_W      = ADDR_W - INDEX_W - OFFSET_W;

  // Number of Hamming check bits r for k data bits: smallest r with
  // 2^r >= k + r + 1. SEC-DED adds one overall parity bit.
  function automatic int unsigned hamming_r(input int unsigned k);
    int unsigned r;
    r = 1;
    while ((1 << r) < k + r + 1) r++;
    return r;
  endfunction

  localparam int unsigned HAM_R = hamming_r(DATA_W);  // 10 for 512 bits
  localparam int unsigned ECC_W = HAM_R + 1;          // 11
  localparam int unsigned CW_W  = DATA_W + ECC_W;     // 523

  // Codeword layout used by every ECC block and by the data array:
  //   cw[DATA_W-1:0]            data bits
  //   cw[DATA_W +: HAM_R]       Hamming check bits c[0..HAM_R-1]
  //   cw[CW_W-1]                overall parity (whole codeword has even parity)
  // In Hamming terms check bit c[j] sits at position 2^j and data bit i at
  // the i-th position (counting from 1) that is not a power of two. The
  // syndrome is the XOR of the positions of all set bits.
  typedef logic [DATA_W-1:0][HAM_R-1:0] pos_tab_t;

  function automatic pos_tab_t data_positions();
    pos_tab_t    t;
    int unsigned p;
    p = 3;
    for (int unsigned i = 0; i < DATA_W; i++) begin
      while ((p & (p - 1)) == 0) p++;  // skip powers of two
      t[i] = HAM_R'(p);
      p++;
    end
    return t;
  endfunction

  localparam pos_tab_t DATA_POS = data_positions();
  // Highest Hamming position that exists in the code.
  localparam int unsigned MAX_POS = DATA_W + HAM_R;

  // A request from the level above (the L1 caches): a line read or a line
  // write (L1 write-back).
  typedef struct packed {
    logic              write;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
  } cache_req_t;

  // The answer to a read: the line and whether the ECC corrected (ce) or
  // could not correct (ue) the requested line.
  typedef struct packed {
    logic [DATA_W-1:0] rdata;
    logic              ce;
    logic              ue;
  } cache_resp_t;

  // A request to the next memory level: line fill (read) or write-back.
  typedef struct packed {
    logic              write;
    logic [ADDR_W-1:0] addr;
    logic [DATA_W-1:0] wdata;
  } mem_req_t;

  // Controller states.
  typedef enum logic [2:0] {
    ST_IDLE,     // waiting for a request, arrays read on acceptance
    ST_LOOKUP,   // tags compared, all k lines decoded, hit served
    ST_WB,       // dirty victim written back to memory
    ST_FILL_REQ, // line fill requested from memory
    ST_FILL_WAIT // waiting for the fill data
  } ctrl_state_e;

endpackage
