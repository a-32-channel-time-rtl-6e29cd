// pattern_trigger -- compares every coincidence vector with 8 programmable
// pattern registers and drives 8 external trigger outputs.
//
// When a vector leaves the coincidence processor (vec_valid for one cycle
// per vector), each register that equals the vector starts a pulse of
// PULSE_CYCLES sampling-clock cycles on its own output; a new match during a
// pulse restarts it. A register left at zero never matches, since every
// vector has at least one bit set. The paper gives the 8 registers and the
// comparison of each vector with them; exact equality as the comparison, the
// pulse length and its retriggering are this design's choices.
//
// Interface: vec_valid/vec in, pattern[8] registers, trig[8] out; n_trig
// counts matches of each register. The outputs are registered: a pulse
// starts on the cycle after vec_valid.
`timescale 1ps/1fs
module pattern_trigger
  import ttcd_pkg::*;
#(
  parameter int unsigned N            = N_CH,
  parameter int unsigned N_PAT        = N_PATTERNS,
  parameter int unsigned PULSE_CYCLES = 10
) (
  input  logic                      clk,
  input  logic                      rst_n,
  input  logic                      vec_valid,
  input  logic [N-1:0]              vec,
  input  logic [N_PAT-1:0][N-1:0]   pattern,
  output logic [N_PAT-1:0]          trig,
  output logic [N_PAT-1:0][15:0]    n_trig
);
  localparam int unsigned CW = $clog2(PULSE_CYCLES + 1);
  logic [N_PAT-1:0][CW-1:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cnt    <= '0;
      trig   <= '0;
      n_trig <= '0;
    end else begin
      for (int p = 0; p < N_PAT; p++) begin
        if (vec_valid && vec == pattern[p]) begin
          cnt[p]    <= CW'(PULSE_CYCLES - 1);
          trig[p]   <= 1'b1;
          n_trig[p] <= n_trig[p] + 1'b1;
        end else if (cnt[p] != '0) begin
          cnt[p]  <= cnt[p] - 1'b1;
        end else begin
          trig[p] <= 1'b0;
        end
      end
    end
  end
endmodule
