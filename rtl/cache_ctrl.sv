// cache_ctrl: control of the REAP L2 cache (lookup, write hit, miss handling,
// write-back of dirty victims, and write-back of corrected lines).
//
// One request is handled at a time:
//   IDLE      req_ready is high. A request is latched and the tag and data
//             arrays read all k ways of its set (arr_re).
//   LOOKUP    the tags are compared and all k lines are ECC-decoded in the
//             same cycle. A read hit is answered in this cycle (resp_valid).
//             A write hit writes the new line into the hit way and marks it
//             dirty. On a miss a victim is picked: an invalid way first,
//             otherwise the way named by a round-robin counter.
//             In this cycle every other valid way whose decoder corrected an
//             error gets its corrected codeword written back (scrub_mask).
//             Without that write-back the flipped cell would stay flipped, and
//             errors from later reads would pile up on top of it.
//   WB        a dirty victim is written to memory (mem_req write), waiting
//             for mem_req_ready.
//   FILL_REQ  a write miss writes its full line into the victim way and
//             finishes. A read miss sends the fill request to memory.
//   FILL_WAIT on mem_resp_valid the line is written into the victim way, its
//             tag is set, and the line is returned (resp_valid, resp_from_mem).
// Timing: a read hit is answered one cycle after the request is accepted.
// The correction write-back takes no extra cycle, because the data array
// writes any set of ways at once.
//
// The paper gives the parallel lookup and that the cache is write-back. It
// says a miss is handled by "the procedure to handle the misses". Miss
// handling, the replacement policy, write allocation and the write-back of
// corrected lines are this design's choices.
module cache_ctrl #(
  parameter int unsigned WAYS = reap_pkg::WAYS,
  localparam int unsigned WW  = (WAYS > 1) ? $clog2(WAYS) : 1
) (
  input  logic            clk,
  input  logic            rst_n,
  // request handshake from the level above
  input  logic            req_valid,
  input  logic            req_write,
  output logic            req_ready,
  output logic            req_latch,     // latch the request this cycle
  // arrays
  output logic            arr_re,        // read all ways of the request's set
  // lookup results (valid in LOOKUP)
  input  logic            hit,
  input  logic [WW-1:0]   hit_way,
  input  logic [WAYS-1:0] way_valid,
  input  logic [WAYS-1:0] way_dirty,
  input  logic [WAYS-1:0] ce_mask,
  output logic            lookup,        // state is LOOKUP
  // data array write control
  output logic [WAYS-1:0] data_we_mask,
  output logic [WAYS-1:0] data_new_mask, // these ways take the new line, others their corrected line
  output logic            new_from_mem,  // new line is the fill data (else request data)
  output logic [WAYS-1:0] scrub_mask,    // ways whose corrected line is written back
  // tag array write control (tag is the request's tag)
  output logic            tag_we,
  output logic [WW-1:0]   tag_wway,
  output logic            tag_wdirty,
  // response to the level above
  output logic            resp_valid,
  output logic            resp_from_mem,
  // next memory level
  output logic            mem_req_valid,
  output logic            mem_req_write, // 1: victim write-back, 0: line fill
  input  logic            mem_req_ready,
  input  logic            mem_resp_valid,
  output logic [WW-1:0]   victim_way,
  // event outputs
  output logic            evt_hit,
  output logic            evt_miss,
  output logic            evt_writeback
);

  import reap_pkg::*;

  ctrl_state_e     state, state_n;
  logic            wr_q;
  logic [WW-1:0]   victim_q, victim_n;
  logic [WW-1:0]   rr_q;
  logic            all_valid;
  logic [WW-1:0]   first_inv;

  always_comb begin
    all_valid = &way_valid;
    first_inv = '0;
    for (int w = WAYS - 1; w >= 0; w--)
      if (!way_valid[w]) first_inv = WW'(w);
    victim_n = all_valid ? rr_q : first_inv;
  end

  always_comb begin
    state_n       = state;
    req_ready     = 1'b0;
    req_latch     = 1'b0;
    arr_re        = 1'b0;
    lookup        = 1'b0;
    data_we_mask  = '0;
    data_new_mask = '0;
    new_from_mem  = 1'b0;
    scrub_mask    = '0;
    tag_we        = 1'b0;
    tag_wway      = victim_q;
    tag_wdirty    = 1'b0;
    resp_valid    = 1'b0;
    resp_from_mem = 1'b0;
    mem_req_valid = 1'b0;
    mem_req_write = 1'b0;
    evt_hit       = 1'b0;
    evt_miss      = 1'b0;
    evt_writeback = 1'b0;
    unique case (state)
      ST_IDLE: begin
        req_ready = 1'b1;
        if (req_valid) begin
          req_latch = 1'b1;
          arr_re    = 1'b1;
          state_n   = ST_LOOKUP;
        end
      end
      ST_LOOKUP: begin
        lookup     = 1'b1;
        scrub_mask = ce_mask & way_valid;
        if (hit) begin
          evt_hit = 1'b1;
          if (wr_q) begin
            scrub_mask[hit_way]    = 1'b0;
            data_new_mask[hit_way] = 1'b1;
            tag_we     = 1'b1;
            tag_wway   = hit_way;
            tag_wdirty = 1'b1;
          end else begin
            resp_valid = 1'b1;
          end
          state_n = ST_IDLE;
        end else begin
          evt_miss = 1'b1;
          state_n  = (way_valid[victim_n] && way_dirty[victim_n]) ? ST_WB : ST_FILL_REQ;
        end
        data_we_mask = scrub_mask | data_new_mask;
      end
      ST_WB: begin
        mem_req_valid = 1'b1;
        mem_req_write = 1'b1;
        if (mem_req_ready) begin
          evt_writeback = 1'b1;
          state_n = ST_FILL_REQ;
        end
      end
      ST_FILL_REQ: begin
        if (wr_q) begin
          data_new_mask[victim_q] = 1'b1;
          data_we_mask            = data_new_mask;
          tag_we     = 1'b1;
          tag_wdirty = 1'b1;
          state_n    = ST_IDLE;
        end else begin
          mem_req_valid = 1'b1;
          if (mem_req_ready) state_n = ST_FILL_WAIT;
        end
      end
      ST_FILL_WAIT: begin
        if (mem_resp_valid) begin
          new_from_mem            = 1'b1;
          data_new_mask[victim_q] = 1'b1;
          data_we_mask            = data_new_mask;
          tag_we        = 1'b1;
          resp_valid    = 1'b1;
          resp_from_mem = 1'b1;
          state_n       = ST_IDLE;
        end
      end
      default: state_n = ST_IDLE;
    endcase
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state    <= ST_IDLE;
      wr_q     <= 1'b0;
      victim_q <= '0;
      rr_q     <= '0;
    end else begin
      state <= state_n;
      if (req_latch) wr_q <= req_write;
      if (lookup && !hit) begin
        victim_q <= victim_n;
        if (all_valid) rr_q <= rr_q + 1'b1;
      end
    end
  end

  assign victim_way = (state == ST_LOOKUP) ? victim_n : victim_q;

  // A memory request is held until it is accepted.
  a_mem_req_held: assert property (@(posedge clk) disable iff (!rst_n)
    mem_req_valid && !mem_req_ready |=> mem_req_valid);
  // A response never arrives while the controller is not waiting for one.
  a_mem_resp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    mem_resp_valid |-> state == ST_FILL_WAIT);

endmodule
