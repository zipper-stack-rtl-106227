// zs_ctrl: executes the Zipper Stack instructions and runs the UD (update Top) and CK
// (check) steps.
//
// ZIP (after a call has put the return address in ra): ra[39:0] and the old Top are
// MAC'ed; the old Top is written into ra[63:40] at once, and when the MAC is ready it
// becomes the new Top (UD). UNZIP (before the return, once ra is reloaded from the
// stack): ra[39:0] and ra[63:40] are MAC'ed; ra is written back at once with its upper
// 24 bits cleared, and when the MAC is ready it is compared with Top (CK). On a match
// Top is restored from ra[63:40]; on a mismatch exc_valid pulses (an attack).
// The ra write-back never waits for the MAC, and the MAC runs beside the rest of the
// pipeline; this much follows the described prototype and its pipeline figure.
//
// ZSAVE (setjmp) and ZRESTORE (longjmp) let a jump buffer carry Top. ZSAVE returns the
// word {tag, Top, 16'b0}, tag = MAC(ctx[39:0], Top) in the jump-buffer domain, where ctx
// is its rs1 (e.g. the stack pointer saved in the same buffer). ZSAVE holds EX until
// its tag is computed, because the tag is its result. ZRESTORE takes such a word in rs1
// and ctx in rs2, recomputes the tag in the background and, like UNZIP, either restores
// Top from the word or raises exc_valid. Saving and authenticating Top for
// setjmp/longjmp with the same MAC module is described for the prototype; the word
// layout, the tag's inputs and the domain bit are this design's choices.
//
// ZIP and UNZIP look their MAC up in the result cache first. A hit finishes UD/CK on the
// issue clock edge. A miss starts the Keccak module and finishes in the cycle its
// result arrives (20 cycles after issue), when the result is also written to the cache.
// Jump-buffer tags always use the Keccak module and are not cached. While a MAC is in
// flight the unit is busy and a further instruction of the unit is held (issue_ready
// low). That stall rule, the cache lookup order and leaving Top unchanged after a
// failed check are this design's choices where the description is silent.
//
// Interface: issue_valid/issue_op/issue_rs1/issue_rs2 come from the EX stage; an
// instruction is done in a cycle with issue_valid && issue_ready, and wb_valid/wb_rd
// give its result in that same cycle (combinational). top_we/top_wdata drive the Top
// register. The mac_req_*/mac_resp_* and lk_*/fill_* ports connect the Keccak module
// and the cache. fill_result is the Keccak result passed straight on to the cache; it is
// qualified by fill_valid, which only this module can raise.
module zs_ctrl
  import zs_pkg::*;
(
  input  logic            clk,
  input  logic            rst_n,
  // from the pipeline
  input  logic            issue_valid,
  input  zs_op_e          issue_op,
  input  logic [XLEN-1:0] issue_rs1,
  input  logic [XLEN-1:0] issue_rs2,
  output logic            issue_ready,
  output logic            wb_valid,
  output logic [XLEN-1:0] wb_rd,
  output logic            exc_valid,
  output logic [XLEN-1:0] exc_ra,
  output logic            busy,
  output logic            ev_cache_hit,
  // Top register
  input  logic [NM-1:0]   top,
  output logic            top_we,
  output logic [NM-1:0]   top_wdata,
  // MAC cache
  output logic [NA-1:0]   lk_addr,
  output logic [NM-1:0]   lk_mac,
  input  logic            lk_hit,
  input  logic [NM-1:0]   lk_result,
  output logic            fill_valid,
  output logic [NA-1:0]   fill_addr,
  output logic [NM-1:0]   fill_mac,
  output logic [NM-1:0]   fill_result,
  // Keccak MAC module
  output logic            mac_req_valid,
  input  logic            mac_req_ready,
  output logic [NA-1:0]   mac_req_addr,
  output logic [NM-1:0]   mac_req_mac,
  output logic            mac_req_dom,
  input  logic            mac_resp_valid,
  input  logic [NM-1:0]   mac_resp_mac
);

  localparam int unsigned PADW = XLEN - 2 * NM;   // zero bits at the bottom of a jump-buffer word

  typedef struct packed {
    zs_op_e          op;
    logic [NA-1:0]   addr;     // MAC input: address or context
    logic [NM-1:0]   in_mac;   // MAC input: old Top (ZIP, ZSAVE) or saved MAC (UNZIP, ZRESTORE)
    logic [NM-1:0]   cmp;      // expected MAC: Top (UNZIP) or tag (ZRESTORE)
    logic [XLEN-1:0] ra;       // rs1 as issued, reported on a failed check
  } pend_t;

  logic  busy_q;
  pend_t pend_q;
  pend_t cur;

  wire is_zs    = issue_valid && issue_op != ZS_NONE;
  wire start    = is_zs && !busy_q;
  wire cacheable = issue_op == ZS_ZIP || issue_op == ZS_UNZIP;
  wire use_hit  = start && cacheable && lk_hit;
  wire resp     = busy_q && mac_resp_valid;
  wire save_done = resp && pend_q.op == ZS_SAVE;

  // ZSAVE stays in EX until its tag is ready; the others leave when started.
  assign issue_ready = (issue_op == ZS_SAVE) ? save_done : !busy_q;
  assign busy        = busy_q;

  always_comb begin
    cur.op  = issue_op;
    cur.ra  = issue_rs1;
    cur.cmp = top;
    unique case (issue_op)
      ZS_ZIP, ZS_SAVE: begin
        cur.addr   = issue_rs1[NA-1:0];
        cur.in_mac = top;
      end
      ZS_RESTORE: begin
        cur.addr   = issue_rs2[NA-1:0];
        cur.in_mac = issue_rs1[XLEN-NM-1:PADW];
        cur.cmp    = issue_rs1[XLEN-1:XLEN-NM];
      end
      default: begin   // UNZIP
        cur.addr   = issue_rs1[NA-1:0];
        cur.in_mac = issue_rs1[XLEN-1:NA];
      end
    endcase
  end

  assign lk_addr = cur.addr;
  assign lk_mac  = cur.in_mac;

  // Result: ZIP/UNZIP do not depend on the MAC, ZSAVE returns its tag.
  always_comb begin
    wb_valid = 1'b0;
    wb_rd    = {{NM{1'b0}}, cur.addr};
    if (save_done) begin
      wb_valid = 1'b1;
      wb_rd    = {mac_resp_mac, pend_q.in_mac, {PADW{1'b0}}};
    end else if (start && cacheable) begin
      wb_valid = 1'b1;
      if (issue_op == ZS_ZIP) wb_rd = {top, cur.addr};
    end
  end

  assign mac_req_valid = start && !use_hit;
  assign mac_req_addr  = cur.addr;
  assign mac_req_mac   = cur.in_mac;
  assign mac_req_dom   = cacheable ? DOM_CHAIN : DOM_JMPBUF;

  assign fill_valid  = resp && (pend_q.op == ZS_ZIP || pend_q.op == ZS_UNZIP);
  assign fill_addr   = pend_q.addr;
  assign fill_mac    = pend_q.in_mac;
  assign fill_result = mac_resp_mac;

  assign ev_cache_hit = use_hit;

  // UD / CK: finish an operation with its MAC result
  pend_t         fin;
  logic          fin_valid;
  logic [NM-1:0] fin_result;
  always_comb begin
    fin_valid  = 1'b0;
    fin        = cur;
    fin_result = lk_result;
    if (resp) begin
      fin_valid  = 1'b1;
      fin        = pend_q;
      fin_result = mac_resp_mac;
    end else if (use_hit) begin
      fin_valid  = 1'b1;
    end
    top_we    = 1'b0;
    top_wdata = fin.in_mac;
    exc_valid = 1'b0;
    exc_ra    = fin.ra;
    if (fin_valid) begin
      unique case (fin.op)
        ZS_ZIP: begin
          top_we    = 1'b1;        // UD: new MAC becomes Top
          top_wdata = fin_result;
        end
        ZS_UNZIP, ZS_RESTORE: begin
          if (fin_result == fin.cmp) begin
            top_we    = 1'b1;      // CK passed: restore the saved MAC
            top_wdata = fin.in_mac;
          end else begin
            exc_valid = 1'b1;      // CK failed
          end
        end
        default: ;                 // ZSAVE leaves Top alone
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy_q <= 1'b0;
      pend_q <= '0;
    end else if (mac_req_valid) begin
      busy_q <= 1'b1;
      pend_q <= cur;
    end else if (resp) begin
      busy_q <= 1'b0;
    end
  end

  // The Keccak module serves only this unit, so it is idle whenever the unit is.
  a_mac_ready: assert property (@(posedge clk) disable iff (!rst_n)
                                mac_req_valid |-> mac_req_ready);
  // Results arrive only for a MAC in flight.
  a_resp_busy: assert property (@(posedge clk) disable iff (!rst_n)
                                mac_resp_valid |-> busy_q);
  // A ZSAVE waiting for its tag must stay in EX.
  a_save_held: assert property (@(posedge clk) disable iff (!rst_n)
                                busy_q && pend_q.op == ZS_SAVE |-> issue_valid && issue_op == ZS_SAVE);

endmodule
