// zipper_stack: the Zipper Stack unit as it sits inside an in-order RISC-V core.
//
// The unit protects return addresses with a chain of MACs. When a function spills ra,
// a ZIP instruction binds ra to the current Top register: the old Top travels to memory
// in ra[63:40] and Top becomes MAC(key, ra[39:0], old Top). Before the return, UNZIP
// recomputes the MAC of the reloaded ra and compares it with Top; a match restores the
// old Top from ra[63:40], a mismatch raises exc_valid. Since every MAC covers the one
// below it, only the 24-bit Top must be safe from tampering.
//
// For setjmp/longjmp, ZSAVE returns Top together with a tag that authenticates it, for
// the jump buffer, and ZRESTORE checks such a word and restores Top from it.
//
// Blocks: zs_decode (recognises the instructions), zs_state_regs (Top and Key), zs_mac_cache
// (four recent MAC results, one-cycle hit), zs_keccak_mac (Keccak-f[400], 20 cycles),
// zs_ctrl (write-back, UD/CK, stall). The EX-stage interface below is this design's
// own; the host core is not part of it.
//
// Interface and timing: ex_valid/ex_instr/ex_rs1/ex_rs2 present an instruction and its
// register operands in EX. For a ZIP/UNZIP that is taken, wb_valid/wb_rd give the new ra
// in the same cycle. ex_stall is high while an instruction of the unit must wait for the
// MAC of the previous one (at most 20 cycles), and while a ZSAVE computes its tag (20
// cycles, then wb_valid/wb_rd give the jump-buffer word). exc_valid/exc_ra report a
// failed UNZIP or ZRESTORE check, with the rs1 it was given, in the cycle CK completes:
// the issue cycle on a cache hit, 20 cycles later on a miss. init_valid loads a fresh random Key and Top at
// process start (and flushes the cache); it must be given while busy is low.
// ev_cache_hit pulses for each ZIP/UNZIP served from the cache.
module zipper_stack
  import zs_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  input  logic            init_valid,
  input  logic [NS-1:0]   init_key,
  input  logic [NM-1:0]   init_top,
  input  logic            ex_valid,
  input  logic [31:0]     ex_instr,
  input  logic [XLEN-1:0] ex_rs1,
  input  logic [XLEN-1:0] ex_rs2,
  output logic            ex_stall,
  output logic            wb_valid,
  output logic [XLEN-1:0] wb_rd,
  output logic            exc_valid,
  output logic [XLEN-1:0] exc_ra,
  output logic            busy,
  output logic            ev_cache_hit
);

  zs_op_e        op;
  logic          issue_ready;
  logic [NM-1:0] top;
  logic [NS-1:0] key;
  logic          key_loaded;
  logic          top_we;
  logic [NM-1:0] top_wdata;
  logic [NA-1:0] lk_addr, fill_addr, mac_req_addr;
  logic [NM-1:0] lk_mac, lk_result, fill_mac, fill_result, mac_req_mac, mac_resp_mac;
  logic          lk_hit, fill_valid, mac_req_valid, mac_req_ready, mac_req_dom, mac_resp_valid;

  zs_decode u_decode (.instr(ex_instr), .op(op));

  zs_state_regs u_regs (
    .clk, .rst_n, .init_valid, .init_key, .init_top,
    .top_we, .top_wdata, .top, .key, .key_loaded
  );

  zs_mac_cache u_cache (
    .clk, .rst_n, .flush(key_loaded || init_valid),
    .lk_addr, .lk_mac, .lk_hit, .lk_result,
    .fill_valid, .fill_addr, .fill_mac, .fill_result
  );

  zs_keccak_mac u_mac (
    .clk, .rst_n,
    .req_valid(mac_req_valid), .req_ready(mac_req_ready),
    .req_key(key), .req_addr(mac_req_addr), .req_mac(mac_req_mac), .req_dom(mac_req_dom),
    .resp_valid(mac_resp_valid), .resp_mac(mac_resp_mac)
  );

  zs_ctrl u_ctrl (
    .clk, .rst_n,
    .issue_valid(ex_valid), .issue_op(op), .issue_rs1(ex_rs1), .issue_rs2(ex_rs2),
    .issue_ready, .wb_valid, .wb_rd, .exc_valid, .exc_ra, .busy, .ev_cache_hit,
    .top, .top_we, .top_wdata,
    .lk_addr, .lk_mac, .lk_hit, .lk_result,
    .fill_valid, .fill_addr, .fill_mac, .fill_result,
    .mac_req_valid, .mac_req_ready, .mac_req_addr, .mac_req_mac, .mac_req_dom,
    .mac_resp_valid, .mac_resp_mac
  );

  assign ex_stall = ex_valid && (op != ZS_NONE) && !issue_ready;

  a_init_idle: assert property (@(posedge clk) disable iff (!rst_n) init_valid |-> !busy);

endmodule
