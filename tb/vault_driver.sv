// vault_driver: test sequence for one vault of the analytical island, shared by the
// vault and cube testbenches. It owns the vault's memory model and, when go rises,
// runs one complete round:
//   1. builds the (column,row) hash index and a dictionary-encoded column 2 (32-value
//      dictionary, 200 rows) in memory and loads the dictionary;
//   2. a first analytical query on column 2 takes a snapshot (copy unit);
//   3. a batch of 1024 updates from 8 thread logs (modifies, inserts, deletes, keys of
//      another column and keys missing from the index) is shipped;
//   4. the column-2 buffer is applied: new dictionary, re-encoded column, inserts;
//   5. queries on column 2 get a new snapshot, share it, and the first snapshot is
//      freed when its reader ends.
// It checks memory contents against a reference model at each step, and counts how
// often each mechanism happened (merge stall, overlapping hash lookups, dropped
// update, insert, ignored delete, snapshot created / shared / freed, words copied).
module vault_driver
  import polynesia_pkg::*;
#(
  parameter int unsigned NQ = 8, NS = 16, SNAPW = 4096, MD = 2048,
  parameter int unsigned SEED = 1
) (
  input  logic clk,
  input  logic rst_n,
  input  logic go,
  output logic finished,
  output int   checks,
  output int   failures,
  output int   ev [10],
  output logic [MEM_AW-1:0] table_base,
  output logic [MEM_AW-1:0] snap_base,
  output logic [31:0] pending_updates,
  input  logic batch_trigger,
  output logic batch_clear,
  output logic log_valid [NQ],
  input  logic log_ready [NQ],
  output log_entry_t log_entry [NQ],
  output logic log_done [NQ],
  input  logic batch_done,
  output logic apply_valid,
  input  logic apply_ready,
  output logic [COL_W-1:0] apply_col,
  output logic [MEM_AW-1:0] apply_buf,
  output logic [MEM_AW-1:0] apply_new_ptr,
  input  logic apply_done,
  output logic dict_wr_en,
  output logic [$clog2(MD)-1:0] dict_wr_idx,
  output logic [DATA_W-1:0] dict_wr_val,
  output logic [$clog2(MD):0] dict_wr_size,
  output logic col_init,
  output logic [MEM_AW-1:0] col_init_ptr,
  output logic [ROW_W:0] col_init_rows,
  output logic [$clog2(MD)-1:0] dict_rd_idx,
  input  logic [DATA_W-1:0] dict_rd_val,
  input  logic [$clog2(MD):0] dict_size,
  input  logic [MEM_AW-1:0] col_ptr,
  input  logic [ROW_W:0] col_rows,
  input  logic [5:0] col_code_bits,
  output logic q_valid,
  input  logic q_ready,
  output snap_op_e q_op,
  output logic [COL_W-1:0] q_col,
  output logic [$clog2(NS)-1:0] q_snap,
  output logic [MEM_AW-1:0] q_ptr,
  output logic [ROW_W:0] q_rows,
  input  logic q_rsp_valid,
  input  logic [$clog2(NS)-1:0] q_rsp_snap,
  input  logic [MEM_AW-1:0] q_rsp_ptr,
  input  logic q_rsp_new,
  input  logic [(1<<COL_W)-1:0] col_dirty,
  input  logic mem_req_valid [VAULT_PORTS],
  output logic mem_req_ready [VAULT_PORTS],
  input  mem_req_t mem_req [VAULT_PORTS],
  output logic mem_rsp_valid [VAULT_PORTS],
  output mem_rsp_t mem_rsp [VAULT_PORTS],
  input  vault_stats_t stats
);
  localparam int DAW = $clog2(MD);
  localparam logic [MEM_AW-1:0] COL0 = 32'h0020_0000, COL1 = 32'h0030_0000;
  localparam int NROWS = 200, NKEYROWS = 260, TOTAL = 1024;

  mem_model #(.NPORTS(VAULT_PORTS), .LAT_MAX(6)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid),
    .req_ready(mem_req_ready), .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  logic [DATA_W-1:0] dict_m [$];
  logic [DATA_W-1:0] col_v [$];
  log_entry_t logs [NQ][$];
  int unsigned pos [NQ];
  bit streaming;

  function automatic logic [MEM_AW-1:0] buf_of(int c);
    return 32'h0010_0000 + c * 32'h1000;
  endfunction
  function automatic int code_of(logic [DATA_W-1:0] v);
    for (int i = 0; i < dict_m.size(); i++) if (dict_m[i] == v) return i;
    return -1;
  endfunction
  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAILED (seed %0d): %s", SEED, what); end
  endtask

  // column contents (decoded through the reference dictionary) at a base address
  task automatic check_column(logic [MEM_AW-1:0] base, string what);
    int bad = 0;
    for (int r = 0; r < col_v.size(); r++) begin
      logic [MEM_DW-1:0] w;
      w = u_mem.read_word(base + r / 4);
      if (int'(w[32*(r%4) +: 32]) != code_of(col_v[r])) bad++;
    end
    check(bad == 0, $sformatf("%s: %0d rows wrong", what, bad));
  endtask

  task automatic query(snap_op_e op, int col, int snap, output int rsnap, output bit rnew,
                       output logic [MEM_AW-1:0] rptr);
    @(negedge clk);
    q_valid = 1; q_op = op; q_col = COL_W'(col); q_snap = ($clog2(NS))'(snap);
    @(posedge clk); while (!q_ready) @(posedge clk);
    @(negedge clk); q_valid = 0;
    if (op == SNAP_QUERY_BEGIN) begin
      while (!q_rsp_valid) @(posedge clk);
      rsnap = q_rsp_snap; rnew = q_rsp_new; rptr = q_rsp_ptr;
    end
  endtask

  always_comb for (int q = 0; q < NQ; q++)
    log_entry[q] = (pos[q] < logs[q].size()) ? logs[q][pos[q]] : '0;
  always @(posedge clk) for (int q = 0; q < NQ; q++)
    if (log_valid[q] && log_ready[q]) pos[q] <= pos[q] + 1;
  // queue 0 starts 64 cycles late, so the merge unit must wait for it at least once
  int unsigned stream_cyc;
  always @(posedge clk) stream_cyc <= streaming ? stream_cyc + 1 : 0;
  always @(negedge clk) for (int q = 0; q < NQ; q++) begin
    log_valid[q] = streaming && pos[q] < logs[q].size() && ($urandom_range(0, 3) != 0) &&
                   !(q == 0 && stream_cyc < 64);
    log_done[q]  = streaming && pos[q] >= logs[q].size();
  end

  initial begin
    checks = 0; failures = 0; finished = 0; streaming = 0;
    for (int i = 0; i < 10; i++) ev[i] = 0;
    table_base = 32'h0001_0000; snap_base = 32'h0040_0000; pending_updates = 0; batch_clear = 0;
    apply_valid = 0; apply_col = 0; apply_buf = 0; apply_new_ptr = 0;
    dict_wr_en = 0; dict_wr_idx = 0; dict_wr_val = 0; dict_wr_size = 0;
    col_init = 0; col_init_ptr = 0; col_init_rows = 0; dict_rd_idx = 0;
    q_valid = 0; q_op = SNAP_QUERY_BEGIN; q_col = 0; q_snap = 0; q_ptr = 0; q_rows = 0;
    for (int q = 0; q < NQ; q++) pos[q] = 0;
  end

  initial begin
    int s0, s1, sx; bit nw; logic [MEM_AW-1:0] p0, p1, px;
    int thr_left [NQ];
    int next_row, n_drop;
    logic [MEM_AW-1:0] head [1024];
    int unsigned nn;
    void'($urandom(SEED));
    wait (go === 1'b1);
    @(negedge clk);
    // ---- 1. memory image: hash index, column 2, dictionary ----
    nn = 32'h0008_0000;
    for (int b = 0; b < 1024; b++) head[b] = '0;
    for (int c = 2; c <= 3; c++)
      for (int r = 0; r < NKEYROWS; r++) begin
        rec_key_t k; int b;
        k.col = COL_W'(c); k.row = ROW_W'(r);
        b = k % 1024;
        u_mem.write_word(nn, make_node(k, buf_of(c), head[b]));
        head[b] = nn; nn++;
      end
    for (int b = 0; b < 1024; b++) u_mem.write_word(table_base + b, MEM_DW'(head[b]));
    for (int i = 0; i < 32; i++) dict_m.push_back(i * 64 + 1000);
    for (int r = 0; r < NROWS; r++) col_v.push_back(dict_m[$urandom_range(0, 31)]);
    for (int w = 0; w < NROWS / 4; w++) begin
      logic [MEM_DW-1:0] d;
      for (int l = 0; l < 4; l++) d[32*l +: 32] = code_of(col_v[4*w+l]);
      u_mem.write_word(COL0 + w, d);
    end
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); dict_wr_en = 1; dict_wr_idx = DAW'(i); dict_wr_val = dict_m[i];
    end
    @(negedge clk); dict_wr_en = 0; col_init = 1; col_init_ptr = COL0; col_init_rows = NROWS; dict_wr_size = 32;
    @(negedge clk); col_init = 0;
    q_ptr = COL0; q_rows = NROWS;
    query(SNAP_COL_UPDATE, 2, 0, sx, nw, px);
    // ---- 2. first query: snapshot of the initial column ----
    query(SNAP_QUERY_BEGIN, 2, 0, s0, nw, p0);
    check(nw, "first query makes a snapshot");
    check_column(p0, "first snapshot");
    check(!col_dirty[2], "column clean after snapshot");
    // ---- 3. ship a batch of 1024 updates ----
    for (int q = 0; q < NQ; q++) thr_left[q] = TOTAL / NQ;
    next_row = NROWS; n_drop = 0;
    for (int c = 0; c < TOTAL; c++) begin
      log_entry_t e; int q, k;
      do q = $urandom_range(0, NQ - 1); while (thr_left[q] == 0);
      thr_left[q]--;
      e.commit_id = 5000 + c * 3;
      e.data = ($urandom_range(0, 1) == 1) ? dict_m[$urandom_range(0, 31)] : $urandom_range(0, 100000);
      k = $urandom_range(0, 39);
      if (k == 0) begin e.utype = UPD_MODIFY; e.key = {8'hEE, ROW_W'(c)}; n_drop++; end
      else if (k < 4) begin e.utype = UPD_MODIFY; e.key = {8'd3, ROW_W'($urandom_range(0, NROWS - 1))}; end
      else if (k < 6 && next_row < NKEYROWS) begin e.utype = UPD_INSERT; e.key = {8'd2, ROW_W'(next_row)}; next_row++; end
      else if (k < 8) begin e.utype = UPD_DELETE; e.key = {8'd2, ROW_W'($urandom_range(0, NROWS - 1))}; end
      else begin e.utype = UPD_MODIFY; e.key = {8'd2, ROW_W'($urandom_range(0, NROWS - 1))}; end
      logs[q].push_back(e);
    end
    // reference: column-2 updates in commit order (deletes are not applied)
    begin
      log_entry_t all_e [$];
      logic [DATA_W-1:0] vals [$];
      logic [DATA_W-1:0] allv [$];
      for (int q = 0; q < NQ; q++) foreach (logs[q][i]) all_e.push_back(logs[q][i]);
      all_e.sort() with (item.commit_id);
      foreach (all_e[i]) if (all_e[i].key.col == 2 && all_e[i].utype != UPD_DELETE) begin
        if (all_e[i].key.row >= col_v.size()) col_v.push_back(all_e[i].data);
        else col_v[all_e[i].key.row] = all_e[i].data;
        vals.push_back(all_e[i].data);
      end
      allv = {dict_m, vals}; allv.sort();
      dict_m.delete();
      foreach (allv[i]) if (dict_m.size() == 0 || dict_m[dict_m.size()-1] != allv[i]) dict_m.push_back(allv[i]);
    end
    pending_updates = TOTAL;
    @(negedge clk);
    check(batch_trigger, "batch trigger at 1024 pending updates");
    streaming = 1;
    @(posedge clk);
    wait (batch_done === 1'b1 && stats.shipped + stats.dropped == TOTAL);
    @(negedge clk); streaming = 0; pending_updates = 0;
    check(stats.dropped == n_drop, "updates with unknown keys dropped");
    // ---- 4. apply the column-2 buffer ----
    @(negedge clk); apply_valid = 1; apply_col = 2; apply_buf = buf_of(2); apply_new_ptr = COL1;
    @(posedge clk); while (!apply_ready) @(posedge clk);
    @(negedge clk); apply_valid = 0;
    @(posedge clk); while (!apply_done) @(posedge clk);
    @(negedge clk);
    check(col_ptr == COL1, "column pointer moved to the new column");
    check(col_rows == col_v.size(), $sformatf("rows %0d exp %0d", col_rows, col_v.size()));
    check(dict_size == dict_m.size(), $sformatf("dictionary %0d exp %0d", dict_size, dict_m.size()));
    check_column(COL1, "new column");
    check(col_dirty[2], "column dirty after update application");
    @(negedge clk); batch_clear = 1; @(negedge clk); batch_clear = 0;
    // ---- 5. queries after the update ----
    query(SNAP_QUERY_BEGIN, 2, 0, s1, nw, p1);
    check(nw && s1 != s0, "query on dirty column takes a new snapshot");
    check_column(p1, "second snapshot");
    query(SNAP_QUERY_BEGIN, 2, 0, sx, nw, px);
    check(!nw && sx == s1, "next query shares the snapshot");
    query(SNAP_QUERY_END, 2, s0, sx, nw, px);
    repeat (2) @(posedge clk);
    check(stats.snaps_freed == 1, "old snapshot freed after its reader ended");
    ev[0] = stats.merge_stalls; ev[1] = stats.rob_overlap; ev[2] = stats.dropped;
    ev[3] = stats.inserts; ev[4] = stats.deletes_ignored; ev[5] = stats.snaps_created;
    ev[6] = stats.snaps_shared; ev[7] = stats.snaps_freed; ev[8] = stats.copy_words;
    ev[9] = stats.applies;
    finished = 1;
  end
endmodule
