// tb_zs_ctrl: self-checking test of the ZIP/UNZIP control.
//
// The surroundings of the control are modelled here: a Top register written on top_we,
// a Keccak engine that answers mac_req after 20 cycles with the reference MAC, and a
// cache whose hit line the test sets per instruction (the result returned on a hit is
// the reference MAC). A software stack of spilled ra values is kept alongside. The test
// checks: the ra written by ZIP ({old Top, address}) and by UNZIP ({0, address}); the
// Top after UD (the reference MAC) and after CK (restored from ra[63:40]); a failed CK
// on a tampered address or MAC raises exc_valid with the issued ra and leaves Top
// alone; a miss keeps the unit busy for 20 cycles and holds a following ZIP/UNZIP
// (issue_ready low) while a hit completes in the issue cycle; a miss fills the cache
// with its input and result. For setjmp/longjmp: ZSAVE is held 20 cycles, bypasses the
// cache and returns {tag, Top, 0}; ZRESTORE of that word restores Top after deeper
// calls; a forged tag, a forged Top, another context, or a return-chain MAC offered as
// a tag each raise an exception and leave Top alone.
module tb_zs_ctrl;
  import zs_pkg::*;
  import zs_ref_pkg::*;

  localparam logic [63:0] KEY = 64'hDEADBEEF_0BADF00D;

  logic            clk = 1'b0;
  logic            rst_n = 1'b0;
  logic            issue_valid;
  zs_op_e          issue_op;
  logic [XLEN-1:0] issue_rs1;
  logic [XLEN-1:0] issue_rs2;
  logic            issue_ready;
  logic            wb_valid;
  logic [XLEN-1:0] wb_rd;
  logic            exc_valid;
  logic [XLEN-1:0] exc_ra;
  logic            busy;
  logic            ev_cache_hit;
  logic [NM-1:0]   top;
  logic            top_we;
  logic [NM-1:0]   top_wdata;
  logic [NA-1:0]   lk_addr;
  logic [NM-1:0]   lk_mac;
  logic            lk_hit;
  logic [NM-1:0]   lk_result;
  logic            fill_valid;
  logic [NA-1:0]   fill_addr;
  logic [NM-1:0]   fill_mac;
  logic [NM-1:0]   fill_result;
  logic            mac_req_valid;
  logic            mac_req_ready;
  logic [NA-1:0]   mac_req_addr;
  logic [NM-1:0]   mac_req_mac;
  logic            mac_req_dom;
  logic            mac_resp_valid;
  logic [NM-1:0]   mac_resp_mac;

  int checks = 0;
  int failures = 0;
  int n_stall = 0, n_exc = 0, n_fill = 0, n_save_stall = 0;
  bit want_hit;

  zs_ctrl dut (.*);
  always #5 clk = ~clk;

  // Top register model
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) top <= 24'h5A5A5A;
    else if (top_we) top <= top_wdata;

  // cache model
  assign lk_hit    = want_hit;
  assign lk_result = ref_mac(KEY, lk_addr, lk_mac);

  // Keccak engine model: 20-cycle latency
  int          eng_cnt = 0;
  logic [23:0] eng_res;
  assign mac_req_ready = (eng_cnt == 0);
  always_ff @(posedge clk) begin
    mac_resp_valid <= 1'b0;
    if (mac_req_valid && mac_req_ready) begin
      eng_cnt <= 19;
      eng_res <= ref_mac(KEY, mac_req_addr, mac_req_mac, mac_req_dom);
    end else if (eng_cnt > 0) begin
      eng_cnt <= eng_cnt - 1;
      if (eng_cnt == 1) begin
        mac_resp_valid <= 1'b1;
        mac_resp_mac   <= eng_res;
      end
    end
  end

  always @(posedge clk) begin
    if (fill_valid) begin
      n_fill++;
      checks++;
      if (fill_result != ref_mac(KEY, fill_addr, fill_mac)) begin
        failures++; $display("FAIL: fill fields");
      end
    end
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Issue one op; wait out any stall; return wb value and wait until UD/CK is done.
  // Returns whether an exception was seen.
  task automatic do_op(input zs_op_e op, input logic [63:0] ra, input bit hit,
                       output logic [63:0] wb, output bit exc);
    int lat;
    logic [23:0] top_before;
    exc = 0;
    @(negedge clk);
    issue_valid = 1; issue_op = op; issue_rs1 = ra; want_hit = hit;
    while (!issue_ready) begin n_stall++; @(negedge clk); end
    #1;
    top_before = top;
    check(wb_valid, "wb_valid on accept");
    wb = wb_rd;
    if (op == ZS_ZIP) check(wb_rd == {top, ra[39:0]}, "ZIP wb = {Top, addr}");
    else              check(wb_rd == {24'h0, ra[39:0]}, "UNZIP wb = {0, addr}");
    if (exc_valid) begin exc = 1; check(exc_ra == ra, "exc_ra"); end
    check(ev_cache_hit == hit, "ev_cache_hit");
    check(mac_req_valid == !hit, "MAC started only on a miss");
    @(negedge clk);
    issue_valid = 0; issue_op = ZS_NONE; want_hit = 0;
    lat = 1;
    if (!hit) begin
      while (busy && lat < 50) begin
        #1;
        if (exc_valid) begin exc = 1; check(exc_ra == ra, "exc_ra"); end
        @(negedge clk);
        lat++;
      end
      check(lat == 21, $sformatf("miss busy until cycle %0d, expected 21", lat));
    end else begin
      check(!busy, "hit leaves the unit idle");
    end
    if (exc) begin n_exc++; check(top == top_before, "Top unchanged after failed CK"); end
  endtask


  // ZSAVE: held in EX for 20 cycles, then returns {tag, Top, 16'b0}; Top unchanged.
  task automatic do_save(input logic [63:0] ctx, output logic [63:0] word);
    int lat;
    logic [23:0] t0;
    @(negedge clk);
    t0 = top;
    issue_valid = 1; issue_op = ZS_SAVE; issue_rs1 = ctx; want_hit = 1;
    #1;
    check(mac_req_valid && !ev_cache_hit, "ZSAVE starts Keccak and bypasses the cache");
    check(mac_req_dom == 1'b1, "ZSAVE uses the jump-buffer domain");
    lat = 0;
    while (!issue_ready && lat < 50) begin
      check(!wb_valid, "ZSAVE writes nothing before its tag");
      @(negedge clk); #1; lat++;
    end
    n_save_stall += lat;
    check(lat == 20, $sformatf("ZSAVE held %0d cycles, expected 20", lat));
    check(wb_valid, "ZSAVE result");
    word = wb_rd;
    check(wb_rd == {ref_mac(KEY, ctx[39:0], t0, 1'b1), t0, 16'h0},
          $sformatf("ZSAVE word %h", wb_rd));
    @(negedge clk);
    issue_valid = 0; issue_op = ZS_NONE; want_hit = 0;
    check(top == t0 && !busy, "ZSAVE leaves Top alone");
  endtask

  // ZRESTORE: taken at once, checked in the background.
  task automatic do_restore(input logic [63:0] word, input logic [63:0] ctx, output bit exc);
    int lat;
    logic [23:0] t0;
    exc = 0;
    @(negedge clk);
    t0 = top;
    issue_valid = 1; issue_op = ZS_RESTORE; issue_rs1 = word; issue_rs2 = ctx; want_hit = 1;
    #1;
    check(issue_ready && !wb_valid, "ZRESTORE taken at once, writes no register");
    check(mac_req_valid && !ev_cache_hit && mac_req_dom, "ZRESTORE recomputes the tag");
    @(negedge clk);
    issue_valid = 0; issue_op = ZS_NONE; want_hit = 0; issue_rs2 = '0;
    lat = 1;
    while (busy && lat < 50) begin
      #1;
      if (exc_valid) begin exc = 1; check(exc_ra == word, "exc_ra of ZRESTORE"); end
      @(negedge clk); lat++;
    end
    check(lat == 21, "ZRESTORE check after 20 cycles");
    if (exc) begin n_exc++; check(top == t0, "Top unchanged after failed ZRESTORE"); end
    else check(top == word[39:16], "ZRESTORE restores Top");
  endtask

  initial begin
    repeat (20000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] stack [$];
    logic [63:0] wb, ra;
    logic [23:0] exp_top, t0;
    bit exc;
    issue_valid = 0; issue_op = ZS_NONE; issue_rs1 = '0; issue_rs2 = '0; want_hit = 0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    // random nested calls and returns, mixing hits and misses
    for (int n = 0; n < 120; n++) begin
      if (stack.size() == 0 || (stack.size() < 12 && $urandom_range(0, 1))) begin
        ra = {24'h0, 8'h00, $urandom & 32'hFFFF_FFFC};
        t0 = top;
        exp_top = ref_mac(KEY, ra[39:0], t0);
        do_op(ZS_ZIP, ra, $urandom_range(0, 3) == 0, wb, exc);
        check(!exc, "no exception on ZIP");
        check(top == exp_top, $sformatf("UD: Top %h exp %h", top, exp_top));
        check(wb[63:40] == t0, "old Top saved in ra[63:40]");
        stack.push_back(wb);
      end else begin
        ra = stack.pop_back();
        do_op(ZS_UNZIP, ra, $urandom_range(0, 3) == 0, wb, exc);
        check(!exc, "no exception on a genuine UNZIP");
        check(top == ra[63:40], "CK: Top restored");
      end
    end
    // setjmp at some depth, deeper calls, longjmp back; then forged jump buffers
    begin
      logic [63:0] jb, ctx, fake;
      logic [23:0] t_set;
      int depth_set, e0;
      ctx = 64'h0000_003F_FFFF_F000;
      t_set = top;
      depth_set = stack.size();
      do_save(ctx, jb);
      for (int i = 0; i < 4; i++) begin
        ra = {24'h0, 8'h00, $urandom & 32'hFFFF_FFFC};
        do_op(ZS_ZIP, ra, 0, wb, exc);
        stack.push_back(wb);
      end
      check(top != t_set, "deeper calls moved Top");
      do_restore(jb, ctx, exc);
      check(!exc && top == t_set, "longjmp restores the Top of setjmp");
      while (stack.size() > depth_set) void'(stack.pop_back());
      e0 = n_exc;
      do_restore({jb[63:40] ^ 24'h000100, jb[39:0]}, ctx, exc);   // forged tag
      check(exc, "forged tag rejected");
      do_restore({jb[63:40], jb[39:16] ^ 24'h1, 16'h0}, ctx, exc); // forged Top
      check(exc, "forged Top rejected");
      do_restore(jb, ctx ^ 64'h8, exc);                            // other context
      check(exc, "buffer bound to its context");
      // a chain MAC is no jump-buffer tag: {MAC(addr, Top), Top} with ctx = addr
      fake = {ref_mac(KEY, 40'h0000123450, top), top, 16'h0};
      do_restore(fake, 64'h0000123450, exc);
      check(exc, "chain MAC not accepted as a jump-buffer tag");
      check(n_exc - e0 == 4, "four forged jump buffers");
      n_exc = e0;   // counted separately from the return attacks below
      check(top == t_set, "Top intact after forged buffers");
    end
    // attacks: tamper address, tamper MAC, replay an older entry
    while (stack.size() < 3) begin
      ra = {24'h0, 8'h00, $urandom & 32'hFFFF_FFFC};
      do_op(ZS_ZIP, ra, 0, wb, exc);
      stack.push_back(wb);
    end
    for (int a = 0; a < 3; a++) begin
      ra = stack[stack.size() - 1];
      if (a == 0) ra[39:0] = ra[39:0] ^ 40'h40;       // gadget address
      if (a == 1) ra[63:40] = ra[63:40] ^ 24'h1;      // forged MAC
      if (a == 2) ra = stack[0];                       // replay from deeper frame
      do_op(ZS_UNZIP, ra, a == 1, wb, exc);
      check(exc, $sformatf("attack %0d detected", a));
    end
    // back-to-back ZIPs on misses: the second must stall
    n_stall = 0;
    fork
      begin
        do_op(ZS_ZIP, 64'h0000_0000_1000_0000, 0, wb, exc);
      end
    join
    @(negedge clk);
    issue_valid = 1; issue_op = ZS_ZIP; issue_rs1 = 64'h10; want_hit = 0;
    @(negedge clk);
    issue_valid = 1; issue_op = ZS_UNZIP; issue_rs1 = 64'h10;
    #1;
    check(!issue_ready && !wb_valid, "second ZIP/UNZIP held while busy");
    @(negedge clk);
    issue_valid = 0;
    repeat (25) @(negedge clk);
    check(n_exc == 3, $sformatf("exceptions %0d exp 3", n_exc));
    check(n_fill > 10, "cache fills seen");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
