// update_shipping_unit_tb: one full batch of 1024 updates from 8 transactional
// threads goes through merge, hash lookup and column-buffer writing. The test
// builds the (column,row) hash index for 16 columns, feeds each thread's log in
// commit order with random gaps, includes keys missing from the index, and checks
// that every column buffer holds exactly its updates in global commit order with
// all fields intact, the per-column counts, the dropped count, batch_done and the
// 1024-update trigger.
module update_shipping_unit_tb;
  import polynesia_pkg::*;
  localparam int NQ = 8, QD = 128, FD = 1024, NP = 4, NB = 1024, TOTAL = 1024;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [MEM_AW-1:0] table_base = 32'h0001_0000;
  logic [31:0] pending_updates;
  logic batch_trigger, batch_clear, batch_done;
  logic log_valid [NQ], log_ready [NQ], log_done [NQ];
  log_entry_t log_entry [NQ];
  logic [COL_W-1:0] cnt_col;
  logic [15:0] cnt_val;
  logic mem_req_valid [NP+1], mem_req_ready [NP+1], mem_rsp_valid [NP+1];
  mem_req_t mem_req [NP+1];
  mem_rsp_t mem_rsp [NP+1];
  logic [31:0] stat_shipped, stat_dropped, stat_merge_stall, stat_rob_overlap;

  update_shipping_unit #(.NUM_QUEUES(NQ), .QUEUE_DEPTH(QD), .FINAL_DEPTH(FD), .N_PROBE(NP),
    .ROB_DEPTH(8), .NUM_BUCKETS(NB)) dut (.*);
  mem_model #(.NPORTS(NP+1), .LAT_MAX(5)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid),
    .req_ready(mem_req_ready), .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  int checks = 0, failures = 0;
  log_entry_t logs [NQ][$];
  int unsigned pos [NQ];
  log_entry_t per_col [16][$];
  int n_absent = 0;

  function automatic logic [MEM_AW-1:0] buf_of(int c);
    return 32'h0010_0000 + c * 32'h800;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAILED: %s", what); end
  endtask

  initial begin
    logic [MEM_AW-1:0] head [NB];
    int unsigned nn = 32'h0004_0000;
    rec_key_t keys [512];
    int thr_left [NQ];
    for (int b = 0; b < NB; b++) head[b] = '0;
    for (int i = 0; i < 512; i++) begin
      int b;
      keys[i].col = COL_W'(i % 16); keys[i].row = ROW_W'($urandom_range(0, 1 << 22));
      b = keys[i] % NB;
      u_mem.write_word(nn, make_node(keys[i], buf_of(i % 16), head[b]));
      head[b] = nn; nn++;
    end
    for (int b = 0; b < NB; b++) u_mem.write_word(table_base + b, MEM_DW'(head[b]));
    // commit IDs 0..1023 dealt to threads, 128 each
    for (int q = 0; q < NQ; q++) begin thr_left[q] = QD; pos[q] = 0; end
    for (int c = 0; c < TOTAL; c++) begin
      log_entry_t e; int q;
      do q = $urandom_range(0, NQ - 1); while (thr_left[q] == 0);
      thr_left[q]--;
      e.commit_id = c * 2 + 100; e.utype = upd_type_e'($urandom_range(0, 2)); e.data = $urandom;
      if ($urandom_range(0, 15) == 0) begin e.key = {8'hEE, ROW_W'(c)}; n_absent++; end
      else begin e.key = keys[$urandom_range(0, 511)]; per_col[e.key.col].push_back(e); end
      logs[q].push_back(e);
    end
    pending_updates = 1000; batch_clear = 0; cnt_col = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk);
    check(!batch_trigger, "no trigger below 1024 pending");
    pending_updates = 1024;
    @(negedge clk);
    check(batch_trigger, "trigger at 1024 pending");
    wait (batch_done === 1'b1 && stat_shipped + stat_dropped == TOTAL);
    repeat (2) @(posedge clk);
    check(stat_dropped == n_absent, $sformatf("dropped %0d exp %0d", stat_dropped, n_absent));
    for (int c = 0; c < 16; c++) begin
      @(negedge clk); cnt_col = COL_W'(c); #1;
      check(cnt_val == per_col[c].size(), $sformatf("column %0d count %0d exp %0d", c, cnt_val, per_col[c].size()));
      foreach (per_col[c][i]) begin
        logic [MEM_DW-1:0] w; log_entry_t e;
        e = per_col[c][i];
        w = u_mem.read_word(buf_of(c) + i);
        checks++;
        if (w[23:0] !== e.key.row || w[63:32] !== e.data || w[95:64] !== e.commit_id ||
            w[103:96] !== e.key.col || w[105:104] !== e.utype) begin
          failures++; if (failures < 5) $display("column %0d entry %0d wrong", c, i);
        end
      end
    end
    check(stat_rob_overlap > 0, "hash lookups overlapped");
    @(negedge clk); batch_clear = 1; @(negedge clk); batch_clear = 0; #1;
    check(cnt_val == 0, "counts cleared");
    $display("merge stalls %0d, overlap cycles %0d", stat_merge_stall, stat_rob_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  always_comb for (int q = 0; q < NQ; q++)
    log_entry[q] = (pos[q] < logs[q].size()) ? logs[q][pos[q]] : '0;
  always @(posedge clk) for (int q = 0; q < NQ; q++)
    if (log_valid[q] && log_ready[q]) pos[q] <= pos[q] + 1;
  always @(negedge clk) for (int q = 0; q < NQ; q++) begin
    log_valid[q] = rst_n && pos[q] < logs[q].size() && ($urandom_range(0, 3) != 0);
    log_done[q]  = pos[q] >= logs[q].size();
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
