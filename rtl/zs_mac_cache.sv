// zs_mac_cache: small fully associative cache of recent MAC results.
//
// Each entry maps a MAC input (40-bit address, 24-bit previous MAC) to the 24-bit MAC
// the Keccak module produced for it. A request that hits completes in the cycle it is
// issued instead of taking the 20-cycle permutation. A cache of four recent results
// comes from the prototype described for this design; the organisation (fully
// associative, whole MAC input as tag, round-robin replacement) is this design's choice.
// The key is not in the tag: the cache is flushed whenever the Key register is loaded,
// and the key does not change within a process.
//
// Interface: lk_* is a combinational lookup (hit and result in the same cycle). A
// fill_valid pulse writes fill_* at the next clock edge: into the matching entry if the
// tag is already present, else into the entry the round-robin pointer names. flush
// (or reset) clears every valid bit at the next edge; it has priority over a fill.
module zs_mac_cache
  import zs_pkg::*;
#(
  parameter int unsigned ENTRIES = 4
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          flush,
  input  logic [NA-1:0] lk_addr,
  input  logic [NM-1:0] lk_mac,
  output logic          lk_hit,
  output logic [NM-1:0] lk_result,
  input  logic          fill_valid,
  input  logic [NA-1:0] fill_addr,
  input  logic [NM-1:0] fill_mac,
  input  logic [NM-1:0] fill_result
);

  localparam int unsigned IW = (ENTRIES > 1) ? $clog2(ENTRIES) : 1;

  typedef struct packed {
    logic [NA-1:0] addr;
    logic [NM-1:0] mac;
  } tag_t;

  logic [ENTRIES-1:0] valid_q;
  tag_t               tag_q  [ENTRIES];
  logic [NM-1:0]      data_q [ENTRIES];
  logic [IW-1:0]      rr_q;

  tag_t lk_tag, fill_tag;
  assign lk_tag   = '{addr: lk_addr,   mac: lk_mac};
  assign fill_tag = '{addr: fill_addr, mac: fill_mac};

  always_comb begin
    lk_hit    = 1'b0;
    lk_result = '0;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && tag_q[i] == lk_tag) begin
        lk_hit    = 1'b1;
        lk_result = data_q[i];
      end
    end
  end

  logic          fill_match;
  logic [IW-1:0] fill_idx;
  always_comb begin
    fill_match = 1'b0;
    fill_idx   = rr_q;
    for (int unsigned i = 0; i < ENTRIES; i++) begin
      if (valid_q[i] && tag_q[i] == fill_tag) begin
        fill_match = 1'b1;
        fill_idx   = IW'(i);
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      valid_q <= '0;
      rr_q    <= '0;
    end else if (flush) begin
      valid_q <= '0;
      rr_q    <= '0;
    end else if (fill_valid) begin
      valid_q[fill_idx] <= 1'b1;
      if (!fill_match) rr_q <= (rr_q == IW'(ENTRIES - 1)) ? '0 : rr_q + IW'(1);
    end
  end

  // Tag and data arrays need no reset: an entry is read only when its valid bit is set.
  always_ff @(posedge clk) begin
    if (fill_valid && !flush) begin
      tag_q[fill_idx]  <= fill_tag;
      data_q[fill_idx] <= fill_result;
    end
  end

endmodule
