// priority_queue: register-and-comparator top-K queue (smallest distance first).
//
// The paper builds both of the accelerator's queues this way: a chain of DEPTH
// stages, each holding one entry (distance + vector pointer) and one comparator. A
// new candidate enters stage 0. In every stage the incoming candidate is compared
// with the stored one; the smaller distance stays and the larger one moves on to the
// next stage in the next cycle, so smaller values end up toward the head. The
// candidate pushed out of the last stage is dropped (it is outside the top DEPTH) and
// signalled on `drop`. Because candidates move one stage per cycle, one insertion can
// be accepted every cycle; a candidate settles at most DEPTH cycles after it entered,
// and `busy` is high while any candidate is still moving. The order among equal
// distances is not defined (a later candidate can settle ahead of an earlier one).
//
// Read-out (this design's choice; the paper does not describe it): when the queue is
// not busy, `pop` returns the head entry on head_o/head_valid in the same cycle and
// shifts every stored entry one stage toward the head at the clock edge, so the
// entries leave in ascending distance, one per cycle. `clear` empties the queue.
// `count` is the number of entries held (settled or moving).
// Assertions: no pop while busy or together with a push.
module priority_queue
  import fatrq_pkg::*;
#(
  parameter  int DEPTH = 1024,
  localparam int CW    = $clog2(DEPTH + 1)
) (
  input  logic          clk,
  input  logic          rst_n,
  input  logic          clear,
  input  logic          push,
  input  cand_t         push_cand,
  input  logic          pop,
  output logic          head_valid,
  output cand_t         head_o,
  output logic          busy,
  output logic          drop,
  output logic [CW-1:0] count
);

  logic  st_v [DEPTH];     // stage holds an entry
  cand_t st_c [DEPTH];
  logic  mv_v [DEPTH];     // candidate moving from stage i-1 into stage i
  cand_t mv_c [DEPTH];

  // per-stage compare: keep the smaller, pass the larger on
  logic  keep_in [DEPTH];  // incoming candidate replaces the stored one
  logic  pass_v  [DEPTH];
  cand_t pass_c  [DEPTH];
  logic  in_v    [DEPTH];
  cand_t in_c    [DEPTH];

  always_comb begin
    for (int i = 0; i < DEPTH; i++) begin
      in_v[i] = (i == 0) ? push      : mv_v[i];
      in_c[i] = (i == 0) ? push_cand : mv_c[i];
      keep_in[i] = in_v[i] && (!st_v[i] || (in_c[i].score < st_c[i].score));
      pass_v[i]  = in_v[i] && st_v[i];
      pass_c[i]  = keep_in[i] ? st_c[i] : in_c[i];
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < DEPTH; i++) begin
        st_v[i] <= 1'b0; st_c[i] <= '0; mv_v[i] <= 1'b0; mv_c[i] <= '0;
      end
    end else if (clear) begin
      for (int i = 0; i < DEPTH; i++) begin
        st_v[i] <= 1'b0; mv_v[i] <= 1'b0;
      end
    end else if (pop) begin
      for (int i = 0; i < DEPTH; i++) begin
        st_v[i] <= (i + 1 < DEPTH) ? st_v[(i + 1) % DEPTH] : 1'b0;
        st_c[i] <= (i + 1 < DEPTH) ? st_c[(i + 1) % DEPTH] : '0;
      end
    end else begin
      for (int i = 0; i < DEPTH; i++) begin
        if (keep_in[i]) begin
          st_v[i] <= 1'b1;
          st_c[i] <= in_c[i];
        end
        if (i > 0) begin
          mv_v[i] <= pass_v[i-1];
          mv_c[i] <= pass_c[i-1];
        end
      end
    end
  end

  // moving candidates, drops and occupancy
  logic any_moving;
  always_comb begin
    any_moving = 1'b0;
    for (int i = 1; i < DEPTH; i++) any_moving = any_moving | mv_v[i];
  end
  assign busy       = any_moving;
  assign drop       = !clear && !pop && pass_v[DEPTH-1];
  assign head_valid = st_v[0];
  assign head_o     = st_c[0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)                      count <= '0;
    else if (clear)                  count <= '0;
    else if (pop && st_v[0])         count <= count - CW'(1);
    else if (!pop)                   count <= count + CW'(push) - CW'(drop);
  end

  // handshake rules
  a_pop_idle: assert property (@(posedge clk) disable iff (!rst_n) pop |-> !busy && !push)
    else $error("priority_queue: pop while candidates are still moving");

endmodule
