// update_shipping_unit: gathers the updates of the transactional island and delivers
// each one to the buffer of the analytical column it belongs to.
//
// Pipeline (paper, Fig. 5): merge unit (8 per-thread logs -> final log in commit
// order) -> hash unit (front end + 4 probe units + reorder buffer, finds the column
// of each update through the (column,row) hash index) -> queue -> column-buffer
// writer. The writer appends each looked-up update as one memory word to its
// column's buffer (base address from the hash index, plus a per-column fill count
// kept here), which is the paper's per-column buffering of stage 2; as the unit sits
// in the vault's logic layer, this write already places the update in the analytical
// island's memory (stage 3). Updates whose key is not in the index are dropped and
// counted. A batch is requested (batch_trigger) when the transactional side reports
// FINAL_DEPTH (1024) pending updates, the paper's trigger.
//
// Column-buffer word written per update (this design's layout):
//   lane 0 = row ID, lane 1 = data, lane 2 = commit ID, lane 3 = {type, column ID}.
// batch_done rises once every log is finished and every stage has drained.
module update_shipping_unit
  import polynesia_pkg::*;
#(
  parameter int unsigned NUM_QUEUES  = 8,
  parameter int unsigned QUEUE_DEPTH = 128,
  parameter int unsigned FINAL_DEPTH = 1024,
  parameter int unsigned N_PROBE     = 4,
  parameter int unsigned ROB_DEPTH   = 8,
  parameter int unsigned NUM_BUCKETS = 1024,
  parameter int unsigned NUM_COLS    = 1 << COL_W
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic [MEM_AW-1:0] table_base,
  input  logic [31:0] pending_updates,
  output logic       batch_trigger,
  input  logic       batch_clear,      // restart per-column buffer counts
  input  logic       log_valid [NUM_QUEUES],
  output logic       log_ready [NUM_QUEUES],
  input  log_entry_t log_entry [NUM_QUEUES],
  input  logic       log_done  [NUM_QUEUES],
  output logic       batch_done,
  // per-column buffer fill count read port
  input  logic [COL_W-1:0] cnt_col,
  output logic [15:0]      cnt_val,
  // memory: probe units, then the column-buffer writer
  output logic       mem_req_valid [N_PROBE+1],
  input  logic       mem_req_ready [N_PROBE+1],
  output mem_req_t   mem_req       [N_PROBE+1],
  input  logic       mem_rsp_valid [N_PROBE+1],
  input  mem_rsp_t   mem_rsp       [N_PROBE+1],
  // statistics
  output logic [31:0] stat_shipped,
  output logic [31:0] stat_dropped,
  output logic [31:0] stat_merge_stall,
  output logic [31:0] stat_rob_overlap
);
  assign batch_trigger = (pending_updates >= FINAL_DEPTH);

  logic       fin_valid, fin_ready;
  log_entry_t fin_entry;
  logic [$clog2(FINAL_DEPTH+1)-1:0] fin_count;
  logic       merge_stall, merge_in_empty;

  merge_unit #(.NUM_QUEUES(NUM_QUEUES), .QUEUE_DEPTH(QUEUE_DEPTH), .FINAL_DEPTH(FINAL_DEPTH)) u_merge (
    .clk, .rst_n,
    .log_valid, .log_ready, .log_entry, .log_done,
    .fin_valid, .fin_ready, .fin_entry, .fin_count, .merge_stall,
    .in_empty (merge_in_empty)
  );

  logic         h_valid, h_ready;
  shipped_upd_t h_upd;
  logic [31:0]  h_lookups;

  hash_unit #(.N_PROBE(N_PROBE), .ROB_DEPTH(ROB_DEPTH), .NUM_BUCKETS(NUM_BUCKETS)) u_hash (
    .clk, .rst_n, .table_base,
    .in_valid (fin_valid), .in_ready(fin_ready), .in_entry(fin_entry),
    .out_valid(h_valid),   .out_ready(h_ready),  .out_upd(h_upd),
    .mem_req_valid(mem_req_valid[0:N_PROBE-1]), .mem_req_ready(mem_req_ready[0:N_PROBE-1]),
    .mem_req      (mem_req[0:N_PROBE-1]),
    .mem_rsp_valid(mem_rsp_valid[0:N_PROBE-1]), .mem_rsp(mem_rsp[0:N_PROBE-1]),
    .stat_lookups (h_lookups), .stat_overlap(stat_rob_overlap)
  );

  logic         w_valid, w_ready;
  shipped_upd_t w_upd;
  logic [2:0]   w_count;

  sync_fifo #(.T(shipped_upd_t), .DEPTH(4)) u_outq (
    .clk, .rst_n,
    .in_valid (h_valid), .in_ready(h_ready), .in_data(h_upd),
    .out_valid(w_valid), .out_ready(w_ready), .out_data(w_upd),
    .count    (w_count)
  );

  // column-buffer writer
  logic [15:0] col_cnt [NUM_COLS];
  wire  [COL_W-1:0] w_col = w_upd.entry.key.col;
  localparam int unsigned WP = N_PROBE;

  assign mem_req_valid[WP] = w_valid && w_upd.found;
  always_comb begin
    mem_req[WP]       = '0;
    mem_req[WP].we    = 1'b1;
    mem_req[WP].wmask = '1;
    mem_req[WP].addr  = w_upd.col_buf + MEM_AW'(col_cnt[w_col]);
    mem_req[WP].wdata = {22'd0, w_upd.entry.utype, w_upd.entry.key.col,
                         w_upd.entry.commit_id, w_upd.entry.data,
                         8'd0, w_upd.entry.key.row};
  end
  assign w_ready = !w_upd.found || mem_req_ready[WP];
  wire w_fire = w_valid && w_ready;

  assign cnt_val = col_cnt[cnt_col];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int c = 0; c < NUM_COLS; c++) col_cnt[c] <= '0;
      stat_shipped     <= '0;
      stat_dropped     <= '0;
      stat_merge_stall <= '0;
    end else begin
      if (batch_clear) begin
        for (int c = 0; c < NUM_COLS; c++) col_cnt[c] <= '0;
      end else if (w_fire && w_upd.found) begin
        col_cnt[w_col] <= col_cnt[w_col] + 1'b1;
      end
      if (w_fire) begin
        if (w_upd.found) stat_shipped <= stat_shipped + 1;
        else             stat_dropped <= stat_dropped + 1;
      end
      if (merge_stall) stat_merge_stall <= stat_merge_stall + 1;
    end
  end

  // drained: all logs finished, nothing left in any stage
  logic all_done;
  always_comb begin
    all_done = 1'b1;
    for (int q = 0; q < NUM_QUEUES; q++) if (!log_done[q] || log_valid[q]) all_done = 1'b0;
  end
  assign batch_done = all_done && (h_lookups == stat_shipped + stat_dropped) && !fin_valid
                      && !w_valid && merge_in_empty;

  // write port never receives a response
  a_no_write_rsp: assert property (@(posedge clk) disable iff (!rst_n) !mem_rsp_valid[WP]);
endmodule
