// itme_pkg: constants, metadata types and replacement helpers shared by the
// cache controller of the CXL-hybrid memory (a DRAM cache in front of NVMe SSDs).
//
// The DRAM cache is 16-way set associative with 4 KB lines. Each line has one
// 16-bit metadata entry {valid, tag, dirty, age}; the 4-bit age ranks the 16
// ways of a set for LRU replacement (0 = most recently used). The sizes follow
// the main configuration: 32 GB DRAM cache (4 x 8 GB), two 1 TB SSDs, hence
// 512 K sets (19-bit index) and a 10-bit tag over a 41-bit (2 TB) address.
// Field order inside an entry, the LRU update rule and the victim rule are this
// design's choices.
package itme_pkg;

  localparam int unsigned WAYS      = 16;   // 16-way set associative
  localparam int unsigned WAY_BITS  = 4;
  localparam int unsigned AGE_BITS  = 4;    // age field for LRU
  localparam int unsigned TAG_BITS  = 10;   // 2 TB over 32 GB, 16 ways
  localparam int unsigned DEF_SET_BITS = 19;   // 512 K sets
  localparam int unsigned PAGE_BITS = 12;   // 4 KB cache line (SSD page)
  localparam int unsigned LINE_BITS = 6;    // 64 B host access
  localparam int unsigned DATA_W    = 512;  // one 64 B line
  localparam int unsigned HTAG_W    = 8;    // host request tag
  localparam int unsigned N_SLICE   = 2;    // CXL slices, one checker each
  localparam int unsigned DRAM_CH   = 4;    // DDR4 channels
  localparam int unsigned NVME_CH   = 2;    // NVMe SSD channels

  typedef struct packed {
    logic                valid;
    logic [TAG_BITS-1:0] tag;
    logic                dirty;
    logic [AGE_BITS-1:0] age;
  } meta_entry_t;

  localparam int unsigned ENTRY_BITS = $bits(meta_entry_t);   // 16
  localparam int unsigned ROW_BITS   = WAYS * ENTRY_BITS;     // 256

  typedef meta_entry_t [WAYS-1:0] meta_row_t;

  typedef enum logic {NV_READ = 1'b0, NV_WRITE = 1'b1} nvme_op_e;

  // Look up a tag in a set row.
  function automatic logic row_hit(input meta_row_t row, input logic [TAG_BITS-1:0] tag,
                                   output logic [WAY_BITS-1:0] way);
    logic hit;
    hit = 1'b0;
    way = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!hit && row[w].valid && row[w].tag == tag) begin
        hit = 1'b1;
        way = WAY_BITS'(w);
      end
    end
    return hit;
  endfunction

  // Make way `way` the most recently used: every valid way that was younger
  // than it ages by one, the way itself gets age 0. An invalid way counts as
  // the oldest, so filling it ages all valid ways.
  function automatic meta_row_t lru_touch(input meta_row_t row, input logic [WAY_BITS-1:0] way);
    meta_row_t r;
    logic [AGE_BITS-1:0] old_age;
    r = row;
    old_age = row[way].valid ? row[way].age : {AGE_BITS{1'b1}};
    for (int w = 0; w < WAYS; w++) begin
      if (WAY_BITS'(w) != way && row[w].valid && row[w].age < old_age)
        r[w].age = row[w].age + 1'b1;
    end
    r[way].age = '0;
    return r;
  endfunction

  // Pick a victim among the ways not in `reserved`: the first invalid way,
  // otherwise the valid way with the largest age. Returns 0 if all are reserved.
  function automatic logic pick_victim(input meta_row_t row, input logic [WAYS-1:0] reserved,
                                       output logic [WAY_BITS-1:0] way);
    logic found_inv, found;
    logic [AGE_BITS-1:0] best_age;
    found_inv = 1'b0;
    found     = 1'b0;
    best_age  = '0;
    way       = '0;
    for (int w = 0; w < WAYS; w++) begin
      if (!reserved[w] && !found_inv) begin
        if (!row[w].valid) begin
          found_inv = 1'b1;
          found     = 1'b1;
          way       = WAY_BITS'(w);
        end else if (!found || row[w].age > best_age) begin
          found    = 1'b1;
          best_age = row[w].age;
          way      = WAY_BITS'(w);
        end
      end
    end
    return found;
  endfunction

endpackage
