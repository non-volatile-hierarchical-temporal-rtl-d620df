// inheng: inhibition engine (Inheng), a linear insertion sort over a
// shifting queue of DEPTH entries {valid, boosted overlap, column index}.
//
// The queue is kept in descending overlap order, valid entries packed
// towards D_0. When an entry is accepted every register shifts one place
// towards D_(DEPTH-1) and the new entry is loaded into D_0; the entry that
// falls off the end is either invalid or the smallest one held. The new
// entry then moves down the queue one swap per clock cycle while its overlap
// is smaller than that of its valid neighbour; when no swap is possible the
// engine goes idle and raises in_ready again. With a full queue, an entry
// whose overlap is not larger than the smallest held one is discarded
// without disturbing the queue (the fullness check of the swap logic).
// At the end of the inhibition phase the valid entries are the active
// columns: their indexes form the SDR and feed WBCam.
//
// Each register D_i has a three-way multiplexer steered by a 2-bit code
// M_i: bit 1 is the direction (0 = take from D_(i-1) or data_in, 1 = take
// from D_(i+1)) and bit 0 is the enable (0 = hold), as in the design.
// Timing: an accepted entry costs 1 load cycle plus one cycle per swap plus
// one final compare cycle, at most DEPTH + 1 cycles; in_ready is low
// meanwhile (back-pressure to Charb). clear empties the queue (new X_t).
// Ties keep the newer entry ahead of older equal ones, and an equal entry is
// dropped from a full queue; both are this implementation's choices.
module inheng
  import nvhtm_pkg::*;
#(
  parameter int DEPTH = 16
) (
  input  logic                  clk,
  input  logic                  rst_n,
  input  logic                  clear,
  input  logic                  in_valid,
  input  inh_ent_t              in_ent,
  output logic                  in_ready,
  output inh_ent_t [DEPTH-1:0]  q,          // queue contents, D_0 first
  output logic                  idle,
  output logic                  dropped     // entry discarded (queue full)
);
  localparam int PW = $clog2(DEPTH + 1);

  inh_ent_t [DEPTH-1:0] d_q;
  logic     [PW-1:0]    pos_q;      // position of the entry being sorted
  logic                 sort_q;     // swap state: sorting in progress
  logic     [1:0]       m [DEPTH];  // swap control per register
  logic                 load, drop, swap;

  assign in_ready = !sort_q;
  assign load = in_valid && in_ready &&
                !(d_q[DEPTH-1].v && (in_ent.ov <= d_q[DEPTH-1].ov));
  assign drop = in_valid && in_ready && !load;
  assign swap = sort_q && (int'(pos_q) < DEPTH - 1) &&
                d_q[PW'(pos_q + 1'b1)].v &&
                (d_q[pos_q].ov < d_q[PW'(pos_q + 1'b1)].ov);

  // swap control codes M_i
  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      m[i] = 2'b00;
      if (load)                                  m[i] = 2'b01;
      else if (swap && i == int'(pos_q))         m[i] = 2'b11;
      else if (swap && i == int'(pos_q) + 1)     m[i] = 2'b01;
    end
  end

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      d_q    <= '0;
      pos_q  <= '0;
      sort_q <= 1'b0;
    end else begin
      for (int i = 0; i < DEPTH; i++) begin
        unique case (m[i])
          2'b01:   d_q[i] <= (i == 0) ? in_ent : d_q[(i == 0) ? 0 : i - 1];
          2'b11:   d_q[i] <= d_q[(i == DEPTH - 1) ? i : i + 1];
          default: d_q[i] <= d_q[i];
        endcase
      end
      if (load) begin
        sort_q <= 1'b1;
        pos_q  <= '0;
      end else if (swap) begin
        pos_q  <= pos_q + 1'b1;
      end else begin
        sort_q <= 1'b0;
      end
    end
  end

  assign q    = d_q;
  assign idle = !sort_q;
  assign dropped = drop;

  // An entry offered while the engine sorts must be held upstream.
  a_hold: assert property (@(posedge clk) disable iff (!rst_n || clear)
    (in_valid && !in_ready) |=> in_valid);
endmodule
