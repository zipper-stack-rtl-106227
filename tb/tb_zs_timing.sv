// tb_zs_timing: cycle-exact check of the stall and cache timing of the whole unit.
//
// A MAC that misses the cache takes 20 cycles, and a second ZIP/UNZIP may not start
// before the first one's update/check is done. So with k other instructions between a
// ZIP that misses and the next ZIP, the second one must be held for max(0, 20 - k)
// cycles: none once the gap covers the MAC. Measured here for k = 0..24, and printed
// as a table of gap against stall cycles. A ZIP/UNZIP served from the cache must never
// hold the next one. This is checked with the UNZIP of a frame (whose MAC input equals
// that of its ZIP) and with a repeated call from the same site.
module tb_zs_timing;
  import zs_pkg::*;
  import zs_ref_pkg::*;

  localparam logic [31:0] I_ZIP   = 32'h0000808B;
  localparam logic [31:0] I_UNZIP = 32'h0000908B;
  localparam logic [31:0] I_NOP   = 32'h00000013;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  logic            init_valid;
  logic [NS-1:0]   init_key;
  logic [NM-1:0]   init_top;
  logic            ex_valid;
  logic [31:0]     ex_instr;
  logic [XLEN-1:0] ex_rs1;
  logic [XLEN-1:0] ex_rs2;
  logic            ex_stall;
  logic            wb_valid;
  logic [XLEN-1:0] wb_rd;
  logic            exc_valid;
  logic [XLEN-1:0] exc_ra;
  logic            busy;
  logic            ev_cache_hit;

  zipper_stack dut (.*);
  always #5 clk = ~clk;

  int checks = 0, failures = 0;
  int n_exc = 0;
  always @(posedge clk) if (rst_n && exc_valid) n_exc++;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Issue one instruction, entered and left at a falling edge so that consecutive calls
  // present instructions in consecutive cycles; return its stall cycles, the ra written
  // and the hit flag.
  task automatic issue(input logic [31:0] ins, input logic [63:0] ra,
                       output int stalls, output logic [63:0] wb, output bit hit);
    stalls = 0;
    ex_valid = 1; ex_instr = ins; ex_rs1 = ra; ex_rs2 = '0;
    #1;
    while (ex_stall) begin stalls++; @(negedge clk); #1; end
    wb = wb_rd; hit = ev_cache_hit;
    @(negedge clk);
    ex_valid = 0; ex_instr = I_NOP;
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] wb, wb1, wb2;
    logic [63:0] key;
    logic [23:0] top;
    logic [39:0] a1, a2;
    bit hit;
    int st, exp_st;
    init_valid = 0; init_key = '0; init_top = '0;
    ex_valid = 0; ex_instr = I_NOP; ex_rs1 = '0; ex_rs2 = '0;
    repeat (3) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    key = 64'h0F1E2D3C4B5A6978; top = 24'h13579B;
    init_valid = 1; init_key = key; init_top = top;
    @(negedge clk);
    init_valid = 0;
    $display("gap  stall   (ZIP that misses, 'gap' other instructions, next ZIP)");
    for (int k = 0; k <= 24; k++) begin
      a1 = 40'h0000400000 + 40'(k * 8);
      a2 = 40'h0000800000 + 40'(k * 8);
      issue(I_ZIP, {24'h0, a1}, st, wb1, hit);
      check(!hit, "first ZIP misses");
      check(wb1[63:40] == top, "first ZIP saves Top");
      top = ref_mac(key, a1, top);
      for (int i = 0; i < k; i++) begin
        issue(I_NOP, '0, st, wb2, hit);
        check(st == 0, "other instructions never stall");
      end
      issue(I_ZIP, {24'h0, a2}, st, wb, hit);
      exp_st = (k >= 20) ? 0 : 20 - k;
      $display("%3d  %5d", k, st);
      check(st == exp_st, $sformatf("gap %0d: %0d stall cycles, expected %0d", k, st, exp_st));
      check(wb[63:40] == top, "second ZIP sees the updated Top");
      repeat (22) @(negedge clk);
      issue(I_UNZIP, wb, st, wb2, hit);
      check(hit && st == 0, "UNZIP right after its ZIP hits the cache");
      issue(I_ZIP, {24'h0, a2}, st, wb2, hit);
      check(hit && wb2 == wb, "repeated call site hits");
      issue(I_UNZIP, wb2, st, wb2, hit);
      check(hit && st == 0, "a hit does not hold the next ZIP/UNZIP");
      issue(I_UNZIP, wb1, st, wb2, hit);
      check(hit && st == 0, "unwinding the first frame hits");
      top = wb1[63:40];
    end
    repeat (25) @(negedge clk);
    check(n_exc == 0, "no exception on genuine frames");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
