// charge_share_combiner: recovers photons whose charge was split between two adjacent strips.
//
// With strips narrow compared with the sensor thickness, many photons deposit part of their
// charge in each of two neighbouring strips. Both strips then fire at the same time, and the
// sum of their calibrated energies is the photon energy. This block looks for such pairs in the
// calibrated event stream and replaces each by one event.
//
// Events wait in NSLOT slots. An incoming event is compared with every waiting one; if a waiting
// event is on an adjacent strip (strip numbers differ by one) and its arrival time differs by at
// most `window` cycles, the pair leaves as one event: energy is the sum, strip and arrival time
// are those of the part with more energy, and `shared` is set. Otherwise the incoming event takes
// a free slot. A waiting event that has found no partner within HOLD_CYC cycles leaves on its
// own. If all slots are full, the oldest leaves to make room. With `en` low the block passes
// events straight through (after emptying its slots).
// At most one event leaves per cycle; expiring events go first, and an input is accepted only
// in a cycle where no expiring event and no eviction needs the output.
// Pair detection by time coincidence in adjacent strips and energy summation follow the
// detector description; the slot buffer, its size, the hold time and which half names the pair
// are this design's choices.
module charge_share_combiner
  import mars_pkg::*;
#(
  parameter int unsigned NSLOT    = 4,
  parameter int unsigned HOLD_CYC = 256
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        en,
  input  logic [7:0]  window,
  input  logic        in_valid,
  output logic        in_ready,
  input  event_t      in_ev,
  output logic        out_valid,
  input  logic        out_ready,
  output event_t      out_ev,
  output logic        merged      // one-cycle pulse per combined pair emitted
);

  localparam int unsigned SW = (NSLOT > 1) ? $clog2(NSLOT) : 1;

  event_t     slot     [NSLOT];
  logic       slot_v   [NSLOT];
  logic [15:0] slot_age [NSLOT];

  logic          out_free;
  logic          exp_any, match_any, free_any, any_v;
  logic [SW-1:0] exp_i, match_i, free_i, old_i;
  logic          do_exp, do_evict, do_merge, do_insert, do_pass;
  event_t        merged_ev;

  function automatic logic adjacent(event_t a, event_t b, logic [7:0] w);
    logic [TS_W-1:0] dt = (a.toa > b.toa) ? a.toa - b.toa : b.toa - a.toa;
    return ((a.strip == b.strip + 1'b1) || (b.strip == a.strip + 1'b1)) && (dt <= TS_W'(w));
  endfunction

  always_comb begin
    exp_any = 1'b0;  exp_i = '0;
    match_any = 1'b0; match_i = '0;
    free_any = 1'b0; free_i = '0;
    any_v = 1'b0;    old_i = '0;
    for (int i = 0; i < int'(NSLOT); i++) begin
      if (slot_v[i]) begin
        if (!any_v || slot_age[i] > slot_age[old_i]) old_i = SW'(i);
        any_v = 1'b1;
        if (!exp_any && (slot_age[i] >= 16'(HOLD_CYC) || !en)) begin
          exp_any = 1'b1; exp_i = SW'(i);
        end
        if (!match_any && !in_ev.shared && adjacent(slot[i], in_ev, window)) begin
          match_any = 1'b1; match_i = SW'(i);
        end
      end else if (!free_any) begin
        free_any = 1'b1; free_i = SW'(i);
      end
    end

    out_free  = !out_valid || out_ready;
    do_exp    = out_free && exp_any;
    do_pass   = out_free && !exp_any && in_valid && !en;
    do_merge  = out_free && !exp_any && in_valid && en && match_any;
    do_insert = !exp_any && in_valid && en && !match_any && free_any;
    do_evict  = out_free && !exp_any && in_valid && en && !match_any && !free_any;
    in_ready  = do_pass || do_merge || do_insert;

    merged_ev        = slot[match_i];
    merged_ev.energy = slot[match_i].energy + in_ev.energy;
    merged_ev.shared = 1'b1;
    if (in_ev.energy > slot[match_i].energy) begin
      merged_ev.strip = in_ev.strip;
      merged_ev.toa   = in_ev.toa;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      out_valid <= 1'b0;
      out_ev    <= '0;
      merged    <= 1'b0;
      for (int i = 0; i < int'(NSLOT); i++) begin
        slot_v[i]   <= 1'b0;
        slot_age[i] <= '0;
        slot[i]     <= '0;
      end
    end else begin
      merged <= 1'b0;
      if (out_ready) out_valid <= 1'b0;
      for (int i = 0; i < int'(NSLOT); i++)
        if (slot_v[i] && slot_age[i] != '1) slot_age[i] <= slot_age[i] + 1'b1;

      if (do_exp) begin
        out_valid     <= 1'b1;
        out_ev        <= slot[exp_i];
        slot_v[exp_i] <= 1'b0;
      end else if (do_pass) begin
        out_valid <= 1'b1;
        out_ev    <= in_ev;
      end else if (do_merge) begin
        out_valid       <= 1'b1;
        out_ev          <= merged_ev;
        slot_v[match_i] <= 1'b0;
        merged          <= 1'b1;
      end else if (do_insert) begin
        slot[free_i]     <= in_ev;
        slot_v[free_i]   <= 1'b1;
        slot_age[free_i] <= '0;
      end else if (do_evict) begin
        out_valid     <= 1'b1;
        out_ev        <= slot[old_i];
        slot_v[old_i] <= 1'b0;
      end
    end
  end

endmodule
