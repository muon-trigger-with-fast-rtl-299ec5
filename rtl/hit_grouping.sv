// hit_grouping: initial grouping of TDC hits for one 4x4 macro-cell.
//
// Hits arrive on N_LANES parallel lanes (one per read-out link), at most one
// per lane and clock, in any time order. Hits that belong to this macro-cell
// (chamber MC_CHAMBER, wires MC_WIRE0 .. MC_WIRE0+3 of each layer) are stored
// in one slot per channel and kept for PERSIST clock cycles. When a stored
// hit reaches the end of its persistence, the whole content of the window
// (every stored hit, with its time) is offered downstream as one group and
// the expiring hit is removed. A group is suppressed as a duplicate when every
// hit in it was already part of the last group that was sent; otherwise it is
// sent and becomes the new reference set. Each slot keeps an "in_prev" flag
// that marks hits belonging to that reference set.
//
// Interface: hit_i[N_LANES] in, group_o/group_valid_o out (registered, one
// clock after the expiry is seen), stat pulses for sent and suppressed groups
// and for replaced hits.
//
// Following the published design: the per-macro-cell window, the 30-clock
// persistence, sending the full window when a hit expires, and the duplicate
// check against the previously sent set. Own choices: one slot per channel, a
// newer hit on an occupied channel replaces the older one, several hits
// expiring in the same clock give one group, and lanes are merged with the
// higher lane winning a same-clock conflict on one channel.
module hit_grouping
  import tpg_pkg::*;
#(
  parameter int          N_LANES    = 2,
  parameter int          WINDOW     = PERSIST,
  parameter logic [1:0]  MC_CHAMBER = 2'd0,
  parameter int unsigned MC_WIRE0   = 0
) (
  input  logic          clk,
  input  logic          rst_n,
  input  hit_t          hit_i [N_LANES],
  output group_t        group_o,
  output logic          group_valid_o,
  output logic          stat_accept_o,   // a hit was stored this clock
  output logic          stat_replace_o,  // a stored hit was overwritten
  output logic          stat_sent_o,     // same clock as group_valid_o
  output logic          stat_dup_o       // a window set was suppressed
);

  localparam int AGE_W = $clog2(WINDOW + 1);

  logic [N_CH-1:0]             occ, in_prev;
  tdc_t [N_CH-1:0]             st;
  logic [N_CH-1:0][AGE_W-1:0]  age;

  // ---------------- lane decode ----------------
  logic [N_CH-1:0] ins;
  tdc_t [N_CH-1:0] ins_t;
  always_comb begin
    logic [4:0] rel;
    ins   = '0;
    ins_t = '0;
    for (int l = 0; l < N_LANES; l++) begin
      // wires below MC_WIRE0 wrap to large values and fail the range test
      rel = {1'b0, hit_i[l].wno} - 5'(MC_WIRE0);
      if (hit_i[l].valid && hit_i[l].chamber == MC_CHAMBER && rel < 5'(N_WIRES)) begin
        ins[{hit_i[l].layer, rel[1:0]}]   = 1'b1;
        ins_t[{hit_i[l].layer, rel[1:0]}] = hit_i[l].t;
      end
    end
  end

  // ---------------- expiry and duplicate check ----------------
  logic [N_CH-1:0] expire;
  logic            any_expire, is_dup;
  always_comb begin
    for (int c = 0; c < N_CH; c++)
      expire[c] = occ[c] && (age[c] == AGE_W'(WINDOW - 1));
    any_expire = |expire;
    is_dup     = ((occ & ~in_prev) == '0);
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      occ            <= '0;
      in_prev        <= '0;
      st             <= '0;
      age            <= '0;
      group_o        <= '0;
      group_valid_o  <= 1'b0;
      stat_sent_o    <= 1'b0;
      stat_dup_o     <= 1'b0;
      stat_accept_o  <= 1'b0;
      stat_replace_o <= 1'b0;
    end else begin
      group_valid_o  <= any_expire && !is_dup;
      stat_sent_o    <= any_expire && !is_dup;
      stat_dup_o     <= any_expire && is_dup;
      stat_accept_o  <= |ins;
      stat_replace_o <= |(ins & occ & ~expire);
      if (any_expire && !is_dup) begin
        group_o.mask <= occ;
        group_o.t    <= st;
      end
      for (int c = 0; c < N_CH; c++) begin
        logic keep_prev;
        keep_prev = (any_expire && !is_dup) ? occ[c] : in_prev[c];
        if (ins[c]) begin
          occ[c]     <= 1'b1;
          st[c]      <= ins_t[c];
          age[c]     <= '0;
          in_prev[c] <= 1'b0;
        end else if (expire[c]) begin
          occ[c]     <= 1'b0;
          age[c]     <= '0;
          in_prev[c] <= 1'b0;
        end else begin
          if (occ[c]) age[c] <= age[c] + 1'b1;
          in_prev[c] <= keep_prev;
        end
      end
    end
  end

  // A group that is sent always holds at least the expiring hit.
  assert property (@(posedge clk) group_valid_o |-> (group_o.mask != '0));

endmodule
