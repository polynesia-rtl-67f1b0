// merge_unit: first stage of the update shipping unit. It merges the per-thread
// update logs of the transactional island into one final log ordered by commit ID.
//
// Each of the NUM_QUEUES (8) input queues holds up to QUEUE_DEPTH (128) entries of
// one thread's log, already in commit order, streamed in from memory. A binary tree
// of comparators (3 levels for 8 queues: 4 + 2 + 1) selects the oldest (smallest
// commit ID) entry among the queue heads, and that entry is moved to the tail of the
// final log, a ninth queue of FINAL_DEPTH (1024) entries. These sizes and the
// comparator tree follow the paper.
//
// A selection is only safe when every log that may still deliver entries shows a
// head: an empty queue whose log is not finished (log_done low) stalls the merge.
// This rule, the done flags and the one-entry-per-cycle rate are this design's
// choices. The tree is combinational, so one entry moves per clock cycle while
// the heads are present and the final log has room.
module merge_unit
  import polynesia_pkg::*;
#(
  parameter int unsigned NUM_QUEUES  = 8,
  parameter int unsigned QUEUE_DEPTH = 128,
  parameter int unsigned FINAL_DEPTH = 1024
) (
  input  logic       clk,
  input  logic       rst_n,
  // per-thread log streams
  input  logic       log_valid [NUM_QUEUES],
  output logic       log_ready [NUM_QUEUES],
  input  log_entry_t log_entry [NUM_QUEUES],
  input  logic       log_done  [NUM_QUEUES],  // thread has no more entries in this batch
  // final log
  output logic       fin_valid,
  input  logic       fin_ready,
  output log_entry_t fin_entry,
  output logic [$clog2(FINAL_DEPTH+1)-1:0] fin_count,
  output logic       merge_stall, // a live log had no head this cycle
  output logic       in_empty     // every input queue is empty
);
  localparam int unsigned LEVELS = $clog2(NUM_QUEUES);
  localparam int unsigned LEAVES = 1 << LEVELS;
  localparam int unsigned IW     = (LEVELS > 0) ? LEVELS : 1;

  logic       q_valid [NUM_QUEUES];
  logic       q_pop   [NUM_QUEUES];
  log_entry_t q_head  [NUM_QUEUES];

  for (genvar q = 0; q < NUM_QUEUES; q++) begin : g_q
    sync_fifo #(.T(log_entry_t), .DEPTH(QUEUE_DEPTH)) u_in (
      .clk, .rst_n,
      .in_valid (log_valid[q]), .in_ready (log_ready[q]), .in_data (log_entry[q]),
      .out_valid(q_valid[q]),   .out_ready(q_pop[q]),     .out_data(q_head[q]),
      .count    ()
    );
  end

  // Comparator tree: node n (1-based heap numbering) holds the oldest head of its subtree.
  logic             nd_valid [2*LEAVES];
  logic [IW-1:0]    nd_idx   [2*LEAVES];
  logic [COMMIT_W-1:0] nd_cid [2*LEAVES];

  always_comb begin
    for (int l = 0; l < LEAVES; l++) begin
      if (l < NUM_QUEUES) begin
        nd_valid[LEAVES+l] = q_valid[l];
        nd_cid[LEAVES+l]   = q_head[l].commit_id;
      end else begin
        nd_valid[LEAVES+l] = 1'b0;
        nd_cid[LEAVES+l]   = '1;
      end
      nd_idx[LEAVES+l] = IW'(l);
    end
    nd_valid[0] = 1'b0;
    nd_idx[0]   = '0;
    nd_cid[0]   = '0;
    for (int n = LEAVES - 1; n >= 1; n--) begin
      // take the right child only if it is valid and strictly older (or left invalid)
      if (nd_valid[2*n+1] && (!nd_valid[2*n] || nd_cid[2*n+1] < nd_cid[2*n])) begin
        nd_valid[n] = 1'b1;
        nd_idx[n]   = nd_idx[2*n+1];
        nd_cid[n]   = nd_cid[2*n+1];
      end else begin
        nd_valid[n] = nd_valid[2*n];
        nd_idx[n]   = nd_idx[2*n];
        nd_cid[n]   = nd_cid[2*n];
      end
    end
  end

  // Stall while a log that is not finished has no head to compare.
  logic live_missing;
  always_comb begin
    live_missing = 1'b0;
    for (int q = 0; q < NUM_QUEUES; q++)
      if (!q_valid[q] && !log_done[q]) live_missing = 1'b1;
  end

  logic       f_in_valid, f_in_ready;
  log_entry_t f_in_data;

  assign f_in_valid  = nd_valid[1] && !live_missing;
  assign f_in_data   = q_head[nd_idx[1]];
  assign merge_stall = live_missing && nd_valid[1];

  always_comb begin
    in_empty = 1'b1;
    for (int q = 0; q < NUM_QUEUES; q++) if (q_valid[q]) in_empty = 1'b0;
  end

  always_comb begin
    for (int q = 0; q < NUM_QUEUES; q++)
      q_pop[q] = f_in_valid && f_in_ready && (nd_idx[1] == IW'(q));
  end

  sync_fifo #(.T(log_entry_t), .DEPTH(FINAL_DEPTH)) u_final (
    .clk, .rst_n,
    .in_valid (f_in_valid), .in_ready (f_in_ready), .in_data (f_in_data),
    .out_valid(fin_valid),  .out_ready(fin_ready),  .out_data(fin_entry),
    .count    (fin_count)
  );
endmodule
