// tb_zs_state_regs: self-checking test of the Top and Key registers.
//
// Drives random sequences of init loads and Top writes and compares top, key and
// key_loaded every cycle with a model kept in the testbench (reset to zero, init wins
// over a Top write in the same cycle, key_loaded one cycle after each init).
module tb_zs_state_regs;
  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        init_valid;
  logic [63:0] init_key;
  logic [23:0] init_top;
  logic        top_we;
  logic [23:0] top_wdata;
  logic [23:0] top;
  logic [63:0] key;
  logic        key_loaded;

  int checks = 0;
  int failures = 0;

  zs_state_regs dut (.*);
  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s", what); end
  endtask

  initial begin
    repeat (3000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [23:0] m_top;
    logic [63:0] m_key;
    logic        m_kl;
    int          n_init = 0, n_both = 0;
    init_valid = 0; init_key = '0; init_top = '0; top_we = 0; top_wdata = '0;
    repeat (2) @(negedge clk);
    check(top == 0 && key == 0 && key_loaded == 0, "reset values");
    rst_n = 1;
    m_top = 0; m_key = 0; m_kl = 0;
    for (int n = 0; n < 1000; n++) begin
      init_valid = ($urandom_range(0, 9) == 0);
      init_key   = {$urandom, $urandom};
      init_top   = 24'($urandom);
      top_we     = $urandom_range(0, 1);
      top_wdata  = 24'($urandom);
      if (init_valid) n_init++;
      if (init_valid && top_we) n_both++;
      @(negedge clk);
      m_kl = init_valid;
      if (init_valid) begin m_top = init_top; m_key = init_key; end
      else if (top_we) m_top = top_wdata;
      check(top == m_top, $sformatf("top %h exp %h", top, m_top));
      check(key == m_key, $sformatf("key %h exp %h", key, m_key));
      check(key_loaded == m_kl, "key_loaded");
    end
    check(n_init > 0 && n_both > 0, "init and init+write both exercised");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
