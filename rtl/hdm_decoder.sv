// hdm_decoder: host-managed device memory (HDM) decoder of the host bridge.
//
// Holds one address range (base, size) per CXL root port.  Firmware on the
// GPU's configuration core writes an entry after it has read each endpoint's
// HDM capability registers; afterwards every system-bus address (HPA) is
// looked up here to find the root port that owns it.
//
// Interface: a one-entry-per-cycle write port (cfg_we/cfg_idx/cfg_base/
// cfg_size/cfg_en) and a purely combinational lookup (lk_addr -> lk_hit,
// lk_port).  Entries reset to disabled.  An entry claims [base, base+size).
// When ranges overlap the lowest-numbered port wins.
//
// From the paper: one HPA range per root port, base and size written by
// firmware, lookup on each request.  Own choices: byte-granular base/size,
// the enable bit, the lowest-index priority and the register write port.
module hdm_decoder
  import cxl_pkg::*;
#(
  parameter int NUM_RP = 3
) (
  input  logic                      clk,
  input  logic                      rst_n,
  // firmware configuration
  input  logic                      cfg_we,
  input  logic [$clog2(NUM_RP)-1:0] cfg_idx,
  input  logic [ADDR_W-1:0]         cfg_base,
  input  logic [ADDR_W-1:0]         cfg_size,
  input  logic                      cfg_en,
  // lookup
  input  logic [ADDR_W-1:0]         lk_addr,
  output logic                      lk_hit,
  output logic [$clog2(NUM_RP)-1:0] lk_port
);

  typedef struct packed {
    logic              en;
    logic [ADDR_W-1:0] base;
    logic [ADDR_W-1:0] size;
  } hdm_entry_t;

  hdm_entry_t tbl [NUM_RP];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < NUM_RP; i++) tbl[i] <= '0;
    end else if (cfg_we && int'(cfg_idx) < NUM_RP) begin
      tbl[cfg_idx] <= '{en: cfg_en, base: cfg_base, size: cfg_size};
    end
  end

  always_comb begin
    lk_hit  = 1'b0;
    lk_port = '0;
    for (int i = NUM_RP - 1; i >= 0; i--) begin
      // addr - base < size  <=>  base <= addr < base + size (no overflow)
      if (tbl[i].en && lk_addr >= tbl[i].base &&
          (lk_addr - tbl[i].base) < tbl[i].size) begin
        lk_hit  = 1'b1;
        lk_port = ($clog2(NUM_RP))'(i);
      end
    end
  end

endmodule
