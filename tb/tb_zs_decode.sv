// tb_zs_decode: self-checking test of the instruction decoder.
//
// Checks the ZIP and UNZIP words, every funct3, and single-bit corruptions of each
// valid word, then random words (half of them forced into the custom-0 opcode with
// funct7 = 0, so that ZSAVE and ZRESTORE with all register fields occur) against a
// reference decoder written from the encoding table.
module tb_zs_decode;
  import zs_pkg::*;
  logic [31:0] instr;
  zs_op_e      op;
  int checks = 0;
  int failures = 0;

  zs_decode dut (.*);

  localparam logic [31:0] W_ZIP   = {7'd0, 5'd0, 5'd1, 3'b000, 5'd1, 7'b0001011};
  localparam logic [31:0] W_UNZIP = {7'd0, 5'd0, 5'd1, 3'b001, 5'd1, 7'b0001011};

  function automatic zs_op_e ref_dec(input logic [31:0] w);
    if (w == W_ZIP) return ZS_ZIP;
    if (w == W_UNZIP) return ZS_UNZIP;
    if ({w[31:25], w[24:20], w[14:12], w[6:0]} == {7'd0, 5'd0, 3'b010, 7'b0001011})
      return ZS_SAVE;
    if ({w[31:25], w[14:12], w[11:7], w[6:0]} == {7'd0, 3'b011, 5'd0, 7'b0001011})
      return ZS_RESTORE;
    return ZS_NONE;
  endfunction
  int n_save = 0, n_restore = 0;

  task automatic try(input logic [31:0] w);
    instr = w;
    #1;
    checks++;
    if (op == ZS_SAVE) n_save++;
    if (op == ZS_RESTORE) n_restore++;
    if (op != ref_dec(w)) begin
      failures++;
      $display("FAIL: %h decoded %0d exp %0d", w, op, ref_dec(w));
    end
  endtask

  initial begin
    #100000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    try(W_ZIP);
    try(W_UNZIP);
    for (int f = 0; f < 8; f++) try({W_ZIP[31:15], 3'(f), W_ZIP[11:0]});
    for (int b = 0; b < 32; b++) begin
      try(W_ZIP ^ (32'd1 << b));
      try(W_UNZIP ^ (32'd1 << b));
    end
    try(32'h00008067);  // ret (jalr x0, 0(ra))
    try({7'd0, 5'd0, 5'd2, 3'b010, 5'd10, 7'b0001011});   // ZSAVE a0, sp
    try({7'd0, 5'd2, 5'd10, 3'b011, 5'd0, 7'b0001011});   // ZRESTORE a0, sp
    try({7'd0, 5'd2, 5'd10, 3'b011, 5'd1, 7'b0001011});   // rd != x0: not ZRESTORE
    try({7'd0, 5'd3, 5'd2, 3'b010, 5'd10, 7'b0001011});   // rs2 != x0: not ZSAVE
    for (int n = 0; n < 4000; n++) begin
      logic [31:0] w;
      w = $urandom;
      if (n % 2 == 0) w = {7'd0, w[24:12], w[11:7], 7'b0001011};
      if (n % 8 == 0) w[24:20] = 5'd0;
      if (n % 8 == 4) w[11:7] = 5'd0;
      try(w);
    end
    checks++;
    if (n_save < 10 || n_restore < 10) begin
      failures++; $display("FAIL: too few ZSAVE/ZRESTORE words tried");
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
