// zs_keccak_mac: the MAC module. Computes MAC(key, addr, prev_mac), a 24-bit tag over a
// 40-bit return address and the 24-bit MAC it is chained to, under the 64-bit key.
//
// How it works: key || addr || prev_mac (128 bits) and a domain bit (0 for the
// return-address chain, 1 for jump-buffer tags) are padded with pad10*1 to one
// 256-bit rate block and absorbed into a zero Keccak-f[400] state (l = 4, 16-bit lanes).
// The permutation runs one round per clock for 20 rounds; the first 24 state bits are
// the MAC. Keccak with l = 4, r = 256, c = 144 and a 20-cycle calculation come from the
// prototype described for this design; how the key is mixed in (prefixed to the message,
// one block) and the bit order are this design's choice.
//
// Interface: req_valid/req_ready handshake starts a calculation (inputs sampled when both
// are high). resp_valid pulses for one cycle with resp_mac; resp_mac holds its value
// until the next request completes.
//
// Timing: a request accepted in cycle 0 computes round 0 on that clock edge and rounds
// 1..19 on the next 19 edges; resp_valid is high in cycle 20. req_ready is low while
// rounds are in progress, so one MAC is in flight at a time.
module zs_keccak_mac
  import zs_pkg::*;
#(
  parameter int unsigned N_ROUNDS = ROUNDS
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          req_valid,
  output logic          req_ready,
  input  logic [NS-1:0] req_key,
  input  logic [NA-1:0] req_addr,
  input  logic [NM-1:0] req_mac,
  input  logic          req_dom,
  output logic          resp_valid,
  output logic [NM-1:0] resp_mac
);

  localparam int unsigned CW = $clog2(N_ROUNDS + 1);

  lane_t         rc_tab [N_ROUNDS];
  kstate_t       state_q;
  logic          busy_q;
  logic [CW-1:0] round_q;     // index of the next round to compute
  logic          done_q;

  for (genvar i = 0; i < N_ROUNDS; i++) begin : g_rc
    assign rc_tab[i] = round_const(i);
  end

  kstate_t round_in;
  lane_t   round_rc;
  kstate_t round_out;

  assign req_ready = !busy_q;
  wire   accept    = req_valid && req_ready;

  always_comb begin
    if (accept) begin
      round_in = absorb(req_key, req_addr, req_mac, req_dom);
      round_rc = rc_tab[0];
    end else begin
      round_in = state_q;
      round_rc = rc_tab[round_q];
    end
    round_out = keccak_round(round_in, round_rc);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state_q <= '0;
      busy_q  <= 1'b0;
      round_q <= '0;
      done_q  <= 1'b0;
    end else begin
      done_q <= 1'b0;
      if (accept) begin
        state_q <= round_out;
        round_q <= CW'(1);
        busy_q  <= (N_ROUNDS > 1);
        done_q  <= (N_ROUNDS == 1);
      end else if (busy_q) begin
        state_q <= round_out;
        if (round_q == CW'(N_ROUNDS - 1)) begin
          busy_q <= 1'b0;
          done_q <= 1'b1;
        end
        round_q <= round_q + CW'(1);
      end
    end
  end

  assign resp_valid = done_q;
  assign resp_mac   = {state_q[1][NM-LANE-1:0], state_q[0]};

endmodule
