// flush_buffer: base-die buffer for dirty lines evicted by write misses.
//
// When an ActWr finds a dirty line of another address, the bank pair reads
// the old line out before writing the new one and pushes it here together
// with its bank, row, column and old tag. The buffer is shared by all banks
// of a channel and is a FIFO, so the controller, which saw every dirty miss
// on the HM bus, knows the order in which lines will come out.
//
// Lines leave only through reserved DQ slots. A reservation is taken when
// the channel knows that a DQ slot will be free for flush data: one entry for
// a read miss to a clean or invalid line (rsv1_i, answered in the same cycle
// on rsv1_grant_o), or up to rsvn_req_i entries for an explicit flush read or
// a refresh (granted count on rsvn_grant_o, the single reservation served
// first). avail_o counts entries held and not yet reserved. pop_i removes
// the head once its data has been sent and releases its reservation.
//
// A push into a full buffer cannot be stored: the line is dropped and the
// sticky overflow_o flag is raised (the controller is expected to empty the
// buffer with flush reads before that). Follows the paper: a 16-entry buffer
// shared by the banks, unloaded on read clean misses, refresh and explicit
// reads. The reservation scheme and FIFO order are this design's choices.
module flush_buffer
  import tdram_pkg::*;
#(
  parameter int unsigned DEPTH = FB_DEPTH
) (
  input  logic                       clk,
  input  logic                       rst_n,
  input  logic                       push_i,
  input  fb_entry_t                  push_entry_i,
  input  logic                       pop_i,
  output fb_entry_t                  head_o,
  input  logic                       rsv1_i,
  output logic                       rsv1_grant_o,
  input  logic [4:0]                 rsvn_req_i,
  output logic [4:0]                 rsvn_grant_o,
  output logic [$clog2(DEPTH+1)-1:0] count_o,
  output logic [$clog2(DEPTH+1)-1:0] avail_o,
  output logic                       full_o,
  output logic                       overflow_o
);

  localparam int unsigned PW = (DEPTH > 1) ? $clog2(DEPTH) : 1;
  localparam int unsigned CW = $clog2(DEPTH + 1);

  fb_entry_t      mem [DEPTH];
  logic [PW-1:0]  wptr, rptr;
  logic [CW-1:0]  count, reserved;
  logic           do_push;
  logic [CW-1:0]  free_after1;

  assign full_o  = (count == CW'(DEPTH));
  assign do_push = push_i && !full_o;
  assign count_o = count;
  assign avail_o = count - reserved;
  assign head_o  = mem[rptr];

  always_comb begin
    rsv1_grant_o = rsv1_i && (avail_o != '0);
    free_after1  = avail_o - CW'(rsv1_grant_o);
    if (32'(rsvn_req_i) > 32'(free_after1)) rsvn_grant_o = 5'(free_after1);
    else                                    rsvn_grant_o = rsvn_req_i;
  end

  function automatic logic [PW-1:0] inc(input logic [PW-1:0] p);
    return (32'(p) == DEPTH - 1) ? '0 : p + 1'b1;
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      wptr       <= '0;
      rptr       <= '0;
      count      <= '0;
      reserved   <= '0;
      overflow_o <= 1'b0;
    end else begin
      if (do_push) wptr <= inc(wptr);
      if (pop_i)   rptr <= inc(rptr);
      count    <= count + CW'(do_push) - CW'(pop_i);
      reserved <= reserved + CW'(rsv1_grant_o) + CW'(rsvn_grant_o) - CW'(pop_i);
      if (push_i && full_o) overflow_o <= 1'b1;
    end
  end

  always_ff @(posedge clk) begin
    if (do_push) mem[wptr] <= push_entry_i;
  end

  always_ff @(posedge clk) begin
    if (rst_n) a_pop_reserved: assert (!(pop_i) || ((reserved != '0 && count != '0)))
      else $error("a_pop_reserved");
  end

endmodule
