// tb_zs_keccak_mac: self-checking test of the Keccak-f[400] MAC module.
//
// Issues directed and random requests, compares each resp_mac with the reference model
// in zs_ref_pkg, and checks the latency: resp_valid must rise exactly 20 cycles after
// the accepting cycle, and req_ready must stay low in between. Also checks that a MAC
// depends on every input field (a one-bit change in key, address or previous MAC
// or the domain bit changes the tag). A watchdog ends the run if the module hangs.
module tb_zs_keccak_mac;
  import zs_ref_pkg::*;

  logic        clk = 1'b0;
  logic        rst_n = 1'b0;
  logic        req_valid;
  logic        req_ready;
  logic [63:0] req_key;
  logic [39:0] req_addr;
  logic [23:0] req_mac;
  logic        req_dom;
  logic        resp_valid;
  logic [23:0] resp_mac;

  int checks = 0;
  int failures = 0;

  zs_keccak_mac dut (.*);

  always #5 clk = ~clk;

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin
      failures++;
      $display("FAIL: %s", what);
    end
  endtask

  task automatic run_one(input logic [63:0] k, input logic [39:0] a, input logic [23:0] m,
                         output logic [23:0] got, input bit d = 0);
    int lat;
    @(negedge clk);
    check(req_ready, "req_ready high when idle");
    req_valid = 1'b1; req_key = k; req_addr = a; req_mac = m; req_dom = d;
    @(negedge clk);
    req_valid = 1'b0; req_key = '1; req_addr = '1; req_mac = '1; req_dom = ~d;  // inputs only sampled once
    lat = 1;
    while (!resp_valid && lat < 100) begin
      check(!req_ready, "req_ready low while busy");
      @(negedge clk);
      lat++;
    end
    check(lat == 20, $sformatf("latency %0d, expected 20", lat));
    got = resp_mac;
    check(got == ref_mac(k, a, m, d), $sformatf("MAC k=%h a=%h m=%h got %h exp %h",
                                             k, a, m, got, ref_mac(k, a, m, d)));
    @(negedge clk);
    check(!resp_valid, "resp_valid is a one-cycle pulse");
    check(resp_mac == got, "resp_mac holds");
  endtask

  initial begin
    repeat (2000) @(posedge clk);
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [23:0] r0, r1;
    logic [63:0] k;
    logic [39:0] a;
    logic [23:0] m;
    req_valid = 1'b0; req_key = '0; req_addr = '0; req_mac = '0; req_dom = 1'b0;
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    run_one(64'h0, 40'h0, 24'h0, r0);
    run_one(64'h0123456789ABCDEF, 40'h00_8000_1234, 24'hA5A5A5, r0);
    run_one(64'h0123456789ABCDEF, 40'h00_8000_1234, 24'hA5A5A4, r1);
    check(r0 != r1, "prev MAC bit changes tag");
    run_one(64'h0123456789ABCDEE, 40'h00_8000_1234, 24'hA5A5A5, r1);
    check(r0 != r1, "key bit changes tag");
    run_one(64'h0123456789ABCDEF, 40'h80_8000_1234, 24'hA5A5A5, r1);
    check(r0 != r1, "address bit changes tag");
    run_one(64'h0123456789ABCDEF, 40'h00_8000_1234, 24'hA5A5A5, r1, 1'b1);
    check(r0 != r1, "domain bit changes tag");
    for (int i = 0; i < 40; i++) begin
      k = {$urandom, $urandom};
      a = {8'($urandom), $urandom};
      m = 24'($urandom);
      run_one(k, a, m, r0, i[0]);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
