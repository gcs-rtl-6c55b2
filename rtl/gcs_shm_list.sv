// gcs_shm_list -- shared memory list of a compute blade (spatial generalization).
//
// A lock line does not cover one fixed 64-byte block: it covers a list of arbitrary
// (base, size) regions, registered when the lock is initialised (for instance the object
// a Rust RwLock protects).  As in the paper, the list lives at the compute blade and not
// in the switch directory.  This block holds SHM_MAX regions per line and answers, for a
// data address, which line's region contains it and whether that line is currently
// present at this blade (line_held, driven by the cache controller).  Because a region's
// presence is read from its line's state, invalidating a line drops all its regions in
// the same cycle, which is the atomic invalidation the paper asks for.
//
// Interface: cfg_we writes region cfg_idx of line cfg_line (cfg_valid=0 removes it).
// lk_addr is looked up combinationally: lk_hit (some region contains it), lk_line, and
// lk_present (lk_hit and the line is held).  A region covers [base, base+size); a
// zero-size region covers nothing.  If several lines cover the address the lowest line
// number wins (overlap is not expected).  Reset clears the list.
module gcs_shm_list
  import gcs_pkg::*;
(
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       cfg_we,
  input  line_t                      cfg_line,
  input  logic [$clog2(SHM_MAX)-1:0] cfg_idx,
  input  logic [ADDR_W-1:0]          cfg_base,
  input  logic [SIZE_W-1:0]          cfg_size,
  input  logic                       cfg_valid,
  input  logic [NUM_LINES-1:0]       line_held,
  input  logic [ADDR_W-1:0]          lk_addr,
  output logic                       lk_hit,
  output line_t                      lk_line,
  output logic                       lk_present
);
  typedef struct packed {
    logic              valid;
    logic [ADDR_W-1:0] base;
    logic [SIZE_W-1:0] size;
  } region_t;

  region_t regions [NUM_LINES][SHM_MAX];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int l = 0; l < NUM_LINES; l++)
        for (int r = 0; r < SHM_MAX; r++)
          regions[l][r] <= '0;
    end else if (cfg_we) begin
      regions[cfg_line][cfg_idx] <= '{valid: cfg_valid, base: cfg_base, size: cfg_size};
    end
  end

  always_comb begin
    lk_hit  = 1'b0;
    lk_line = '0;
    for (int l = NUM_LINES - 1; l >= 0; l--)
      for (int r = 0; r < SHM_MAX; r++)
        if (regions[l][r].valid && lk_addr >= regions[l][r].base &&
            ({1'b0, lk_addr} < {1'b0, regions[l][r].base} + (ADDR_W+1)'(regions[l][r].size))) begin
          lk_hit  = 1'b1;
          lk_line = line_t'(l);
        end
    lk_present = lk_hit && line_held[lk_line];
  end
endmodule
