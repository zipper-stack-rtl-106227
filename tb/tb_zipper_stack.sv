// tb_zipper_stack: end-to-end test of the Zipper Stack unit with a modelled program.
//
// The testbench plays the role of the core and of memory. It runs random call/return
// walks: a call puts a return address (from a small set of call sites, so that results
// repeat and the cache is used) in ra, issues ZIP, and spills the written ra to a stack
// array; a return reloads ra from that array and issues UNZIP. Filler instructions of
// random count sit between them, sometimes none, so that ZIP/UNZIP also arrive while a
// MAC is still running. Expected values come from the reference MAC: every ZIP must
// write {expected Top, address} to ra, and every genuine UNZIP must pass. Then it runs
// attacks (overwritten return address, forged MAC, replay of a deeper frame, forged
// jump buffer, a deep overwrite whose MAC chain is rebuilt with a leaked key, replay of
// a frame from an earlier process) that must each raise exactly
// one exception, and
// re-initialises Key and Top between processes.
//
// The walks also take setjmp (ZSAVE, bound to a stack-pointer value) at random depths
// and longjmp (ZRESTORE) back from deeper frames, after which returns must continue to
// pass from the setjmp frame; a forged jump buffer must raise an exception.
//
// Every mechanism is counted and a run where one never happened is a failure: ZIP,
// UNZIP, cache hit, Keccak calculation (miss), pipeline stall, detected attack, process
// initialisation, setjmp, longjmp, and a chain depth of at least 8. The top runs with
// its own defaults.
module tb_zipper_stack;
  import zs_pkg::*;
  import zs_ref_pkg::*;

  localparam logic [31:0] I_ZIP   = {7'd0, 5'd0, 5'd1, 3'b000, 5'd1, 7'b0001011};
  localparam logic [31:0] I_UNZIP = {7'd0, 5'd0, 5'd1, 3'b001, 5'd1, 7'b0001011};
  localparam logic [31:0] I_ADDI  = 32'h00000013;
  localparam logic [31:0] I_ZSAVE    = {7'd0, 5'd0, 5'd2, 3'b010, 5'd10, 7'b0001011}; // a0 <- jb(sp)
  localparam logic [31:0] I_ZRESTORE = {7'd0, 5'd2, 5'd10, 3'b011, 5'd0, 7'b0001011}; // check a0, sp

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
  int n_zip = 0, n_unzip = 0, n_hit = 0, n_miss = 0, n_stall = 0, n_exc = 0, n_init = 0;
  int n_setjmp = 0, n_longjmp = 0;
  int max_depth = 0;

  logic [63:0] key_m;        // model of the Key register
  logic [23:0] top_m;        // model of the Top register
  logic [63:0] stack [$];    // spilled ra values (memory model)
  logic [39:0] sites [6];

  always @(posedge clk) begin
    if (rst_n && exc_valid) n_exc++;
    if (rst_n && ex_stall) n_stall++;
  end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  // Present one instruction in EX until it is taken; return the ra written, if any.
  // Entered and left at a falling edge, so consecutive calls fill consecutive cycles.
  task automatic issue(input logic [31:0] ins, input logic [63:0] ra, output logic [63:0] wb,
                       output bit hit, input logic [63:0] rs2 = '0);
    ex_valid = 1; ex_instr = ins; ex_rs1 = ra; ex_rs2 = rs2;
    #1;
    while (ex_stall) begin @(negedge clk); #1; end
    wb  = wb_rd;
    hit = ev_cache_hit;
    if (ins == I_ZIP || ins == I_UNZIP) begin
      check(wb_valid, "ra write-back");
      if (hit) n_hit++; else n_miss++;
    end else if (ins == I_ZSAVE) begin
      check(wb_valid && !hit, "ZSAVE result");
    end else if (ins == I_ZRESTORE) begin
      check(!wb_valid && !hit, "ZRESTORE writes no register");
    end else begin
      check(!wb_valid && !ev_cache_hit, "other instructions ignored");
    end
    @(negedge clk);
    ex_valid = 0; ex_instr = I_ADDI;
  endtask

  task automatic filler(input int n);
    logic [63:0] wb;
    bit h;
    for (int i = 0; i < n; i++) issue(I_ADDI, 64'($urandom), wb, h);
  endtask

  task automatic new_process();
    @(negedge clk);
    while (busy) @(negedge clk);
    init_valid = 1; init_key = {$urandom, $urandom}; init_top = 24'($urandom);
    key_m = init_key; top_m = init_top;
    @(negedge clk);
    init_valid = 0;
    n_init++;
    stack.delete();
  endtask

  task automatic call(input logic [39:0] site);
    logic [63:0] wb;
    bit h;
    issue(I_ZIP, {24'h0, site}, wb, h);
    n_zip++;
    check(wb == {top_m, site}, $sformatf("ZIP ra %h exp %h", wb, {top_m, site}));
    top_m = ref_mac(key_m, site, top_m);
    stack.push_back(wb);
    if (stack.size() > max_depth) max_depth = stack.size();
  endtask

  task automatic ret(input logic [63:0] ra_mem, input bit expect_exc);
    logic [63:0] wb;
    bit h;
    int e0;
    e0 = n_exc;
    issue(I_UNZIP, ra_mem, wb, h);
    n_unzip++;
    check(wb == {24'h0, ra_mem[39:0]}, "UNZIP ra");
    // wait for CK
    @(negedge clk);
    while (busy) @(negedge clk);
    @(negedge clk);
    check((n_exc - e0) == (expect_exc ? 1 : 0),
          $sformatf("UNZIP of %h: %0d exceptions, expected %0d", ra_mem, n_exc - e0, expect_exc));
    if (!expect_exc) top_m = ra_mem[63:40];
  endtask


  // setjmp: save Top with its tag, bound to the stack pointer ctx
  typedef struct {
    logic [63:0] word;
    logic [63:0] ctx;
    int          depth;
    logic [23:0] top;
  } jmpbuf_t;

  task automatic setjmp(input logic [63:0] ctx, output jmpbuf_t jb);
    logic [63:0] wb;
    bit h;
    issue(I_ZSAVE, ctx, wb, h);
    check(wb == {ref_mac(key_m, ctx[39:0], top_m, 1'b1), top_m, 16'h0},
          $sformatf("ZSAVE word %h", wb));
    jb.word = wb; jb.ctx = ctx; jb.depth = stack.size(); jb.top = top_m;
    n_setjmp++;
  endtask

  // longjmp: restore Top from the buffer and unwind the modelled stack
  task automatic longjmp(input logic [63:0] word, input logic [63:0] ctx, input int depth,
                         input bit expect_exc);
    logic [63:0] wb;
    bit h;
    int e0;
    e0 = n_exc;
    issue(I_ZRESTORE, word, wb, h, ctx);
    @(negedge clk);
    while (busy) @(negedge clk);
    @(negedge clk);
    check((n_exc - e0) == (expect_exc ? 1 : 0),
          $sformatf("ZRESTORE of %h: %0d exceptions, expected %0d", word, n_exc - e0, expect_exc));
    if (!expect_exc) begin
      top_m = word[39:16];
      while (stack.size() > depth) void'(stack.pop_back());
      n_longjmp++;
    end
  endtask

  task automatic walk(input int ops, input int maxd);
    jmpbuf_t jb;
    bit      have_jb = 0;
    for (int n = 0; n < ops; n++) begin
      if (!have_jb && $urandom_range(0, 99) < 3) begin
        setjmp(64'h0000_003F_FFFF_0000 - 64'(stack.size() * 64), jb);
        have_jb = 1;
      end else if (have_jb && stack.size() > jb.depth + 1 && $urandom_range(0, 99) < 10) begin
        longjmp(jb.word, jb.ctx, jb.depth, 0);
        check(top_m == jb.top, "longjmp returns to the Top of its setjmp");
        have_jb = 0;
      end else if (have_jb && stack.size() < jb.depth) begin
        have_jb = 0;   // the setjmp frame returned: the buffer is dead
        if (stack.size() == 0 || (stack.size() < maxd && $urandom_range(0, 99) < 55))
          call(sites[$urandom_range(0, 5)]);
        else
          ret(stack.pop_back(), 0);
      end else if (stack.size() == 0 || (stack.size() < maxd && $urandom_range(0, 99) < 55))
        call(sites[$urandom_range(0, 5)]);
      else
        ret(stack.pop_back(), 0);
      filler($urandom_range(0, 3) == 0 ? 0 : $urandom_range(1, 25));
    end
    while (stack.size() > 0) begin
      ret(stack.pop_back(), 0);
      filler($urandom_range(0, 4));
    end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [63:0] old_frame, t;
    init_valid = 0; init_key = '0; init_top = '0;
    ex_valid = 0; ex_instr = I_ADDI; ex_rs1 = '0; ex_rs2 = '0;
    for (int i = 0; i < 6; i++) sites[i] = {8'h00, 32'h0001_0000 + 32'($urandom_range(0, 4095)) * 4};
    repeat (3) @(negedge clk);
    rst_n = 1;

    // process 1: normal execution, no exception allowed
    new_process();
    walk(400, 10);
    check(n_exc == 0, "no exception in a genuine run");

    // process 2: stack attacks
    new_process();
    for (int i = 0; i < 5; i++) call(sites[i]);
    old_frame = stack[1];
    t = stack[stack.size() - 1];
    ret({t[63:40], t[39:0] ^ 40'h100}, 1);               // overwritten return address
    ret({t[63:40] ^ 24'h800000, t[39:0]}, 1);            // forged MAC beside it
    ret(stack[0], 1);                                     // replay of a deeper frame
    begin
      jmpbuf_t jb;
      setjmp(64'h0000_003F_FFFE_0000, jb);
      longjmp({jb.word[63:40] ^ 24'h000040, jb.word[39:0]}, jb.ctx, jb.depth, 1); // forged tag
    end
    begin
      // leaked key: frame 2 gets a gadget address and every MAC above it is recomputed
      // in memory with the real key; only Top, out of reach, still tells the truth
      logic [39:0] gadget;
      logic [23:0] m3, m4;
      gadget = 40'h00_0002_0A40;
      m3 = ref_mac(key_m, gadget, stack[2][63:40]);
      m4 = ref_mac(key_m, stack[3][39:0], m3);
      ret({m4, t[39:0]}, 1);
    end
    ret(t, 0);                                            // the genuine frame still passes
    void'(stack.pop_back());
    while (stack.size() > 0) ret(stack.pop_back(), 0);

    // process 3: new key and Top; a frame from the old process must fail
    new_process();
    for (int i = 0; i < 3; i++) call(sites[i]);
    ret(old_frame, 1);
    while (stack.size() > 0) ret(stack.pop_back(), 0);
    walk(100, 12);

    check(n_zip > 0,   "mechanism: ZIP");
    check(n_unzip > 0, "mechanism: UNZIP");
    check(n_hit > 0,   "mechanism: cache hit");
    check(n_miss > 0,  "mechanism: Keccak calculation");
    check(n_stall > 0, "mechanism: stall");
    check(n_exc == 6,  $sformatf("mechanism: attack detected (%0d, expected 6)", n_exc));
    check(n_setjmp > 0,  "mechanism: setjmp (ZSAVE)");
    check(n_longjmp > 0, "mechanism: longjmp (ZRESTORE)");
    check(n_init == 3, "mechanism: process initialisation");
    check(max_depth >= 8, "mechanism: deep chain");
    $display("zip=%0d unzip=%0d hit=%0d miss=%0d stall_cycles=%0d exc=%0d init=%0d max_depth=%0d setjmp=%0d longjmp=%0d",
             n_zip, n_unzip, n_hit, n_miss, n_stall, n_exc, n_init, max_depth, n_setjmp, n_longjmp);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
