// tb_zs_mac_cache: self-checking test of the four-entry MAC result cache.
//
// A scoreboard keeps its own list of the last four distinct tags filled (oldest
// replaced first, a refill of a present tag rewrites it in place) and after every random
// fill compares lookups of present and absent tags with it. Also checks that a flush
// empties the cache and that a flush wins over a simultaneous fill.
module tb_zs_mac_cache;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        flush;
  logic [39:0] lk_addr;
  logic [23:0] lk_mac;
  logic        lk_hit;
  logic [23:0] lk_result;
  logic        fill_valid;
  logic [39:0] fill_addr;
  logic [23:0] fill_mac;
  logic [23:0] fill_result;

  int checks = 0;
  int failures = 0;

  zs_mac_cache dut (.*);
  always #5 clk = ~clk;

  // scoreboard: slot order = replacement order
  logic [63:0] sb_tag [4];
  logic [23:0] sb_dat [4];
  bit          sb_v   [4];
  int          sb_ptr;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  task automatic lookup(input logic [39:0] a, input logic [23:0] m);
    bit          exp_hit = 0;
    logic [23:0] exp_dat = '0;
    for (int i = 0; i < 4; i++)
      if (sb_v[i] && sb_tag[i] == {a, m}) begin exp_hit = 1; exp_dat = sb_dat[i]; end
    lk_addr = a; lk_mac = m;
    #1;
    check(lk_hit == exp_hit, $sformatf("hit for %h/%h: %0b exp %0b", a, m, lk_hit, exp_hit));
    if (exp_hit) check(lk_result == exp_dat, $sformatf("data %h exp %h", lk_result, exp_dat));
  endtask

  task automatic fill(input logic [39:0] a, input logic [23:0] m, input logic [23:0] d);
    int slot = -1;
    @(negedge clk);
    fill_valid = 1; fill_addr = a; fill_mac = m; fill_result = d;
    @(negedge clk);
    fill_valid = 0;
    for (int i = 0; i < 4; i++) if (sb_v[i] && sb_tag[i] == {a, m}) slot = i;
    if (slot < 0) begin slot = sb_ptr; sb_ptr = (sb_ptr + 1) % 4; end
    sb_v[slot] = 1; sb_tag[slot] = {a, m}; sb_dat[slot] = d;
  endtask

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [39:0] pool_a [8];
    logic [23:0] pool_m [8];
    int k;
    flush = 0; fill_valid = 0; fill_addr = '0; fill_mac = '0; fill_result = '0;
    lk_addr = '0; lk_mac = '0;
    for (int i = 0; i < 4; i++) sb_v[i] = 0;
    sb_ptr = 0;
    for (int i = 0; i < 8; i++) begin pool_a[i] = {8'($urandom), $urandom}; pool_m[i] = 24'($urandom); end
    repeat (2) @(negedge clk);
    rst_n = 1;
    @(negedge clk);
    for (int i = 0; i < 8; i++) lookup(pool_a[i], pool_m[i]);   // empty after reset
    for (int n = 0; n < 200; n++) begin
      k = $urandom_range(0, 7);
      fill(pool_a[k], pool_m[k], 24'($urandom));
      for (int i = 0; i < 8; i++) lookup(pool_a[i], pool_m[i]);
      // same address, other previous MAC must miss unless itself present
      lookup(pool_a[k], pool_m[k] ^ 24'h1);
    end
    // flush
    @(negedge clk); flush = 1; @(negedge clk); flush = 0;
    for (int i = 0; i < 4; i++) sb_v[i] = 0;
    sb_ptr = 0;
    for (int i = 0; i < 8; i++) lookup(pool_a[i], pool_m[i]);
    // flush wins over a fill
    @(negedge clk);
    flush = 1; fill_valid = 1; fill_addr = pool_a[0]; fill_mac = pool_m[0]; fill_result = 24'h123456;
    @(negedge clk);
    flush = 0; fill_valid = 0;
    lookup(pool_a[0], pool_m[0]);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
