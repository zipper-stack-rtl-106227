// zs_state_regs: the Top register and the Key register of the Zipper Stack.
//
// Top holds the newest MAC of the chain, the only value that must be kept from an
// attacker; Key holds the secret MAC key. Both are loaded with random values when a
// process starts, and the bottom return address of the chain is bound to that random
// Top. Afterwards only the ZIP/UNZIP control writes Top (the new MAC after a ZIP, the
// restored MAC after a successful UNZIP); Key is never written again within a process.
// Neither register has a path to normal loads, stores or register reads: Top goes only
// to the ZIP/UNZIP control and Key only to the MAC module. Two 24/64-bit registers
// written at process start follow the described prototype; the init port through which a
// trusted random source loads them is this design's choice.
//
// Interface and timing: init_valid loads init_key and init_top at the next clock edge
// and wins over a top_we in the same cycle. top_we writes top_wdata at the next edge.
// key_loaded pulses for one cycle after a key load, so that cached MAC results made
// under the old key can be dropped. Reset clears both registers.
module zs_state_regs
  import zs_pkg::*;
(
  input  logic          clk,
  input  logic          rst_n,
  input  logic          init_valid,
  input  logic [NS-1:0] init_key,
  input  logic [NM-1:0] init_top,
  input  logic          top_we,
  input  logic [NM-1:0] top_wdata,
  output logic [NM-1:0] top,
  output logic [NS-1:0] key,
  output logic          key_loaded
);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      top        <= '0;
      key        <= '0;
      key_loaded <= 1'b0;
    end else begin
      key_loaded <= init_valid;
      if (init_valid) begin
        top <= init_top;
        key <= init_key;
      end else if (top_we) begin
        top <= top_wdata;
      end
    end
  end

endmodule
