// merge_unit_tb: checks that the merge unit turns 8 commit-ordered logs into one log
// in global commit order, with random arrival gaps and consumer stalls, and that it
// moves one entry per cycle when every queue has a head (1024 entries in about 1024
// cycles).
module merge_unit_tb;
  import polynesia_pkg::*;
  localparam int NQ = 8, QD = 128, FD = 1024, TOTAL = NQ * QD;

  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic       log_valid [NQ], log_ready [NQ], log_done [NQ];
  log_entry_t log_entry [NQ];
  logic       fin_valid, fin_ready, merge_stall, in_empty;
  log_entry_t fin_entry;
  logic [$clog2(FD+1)-1:0] fin_count;

  merge_unit #(.NUM_QUEUES(NQ), .QUEUE_DEPTH(QD), .FINAL_DEPTH(FD)) dut (.*);

  int checks = 0, failures = 0;
  int unsigned ids [NQ][$];
  int unsigned pos [NQ];
  bit random_gaps;
  int unsigned stalls_seen;

  function automatic log_entry_t mk(int unsigned cid);
    log_entry_t e;
    e.commit_id = cid;
    e.utype     = upd_type_e'(cid % 3);
    e.key.col   = COL_W'(cid * 7);
    e.key.row   = ROW_W'(cid * 13 + 5);
    e.data      = cid ^ 32'hA5A5_0000;
    return e;
  endfunction

  // deal commit IDs 0..TOTAL-1 to threads so each thread gets exactly QD, in order
  task automatic deal();
    int unsigned left [NQ];
    for (int q = 0; q < NQ; q++) begin ids[q].delete(); left[q] = QD; pos[q] = 0; end
    for (int unsigned c = 0; c < TOTAL; c++) begin
      int q;
      do q = $urandom_range(0, NQ - 1); while (left[q] == 0);
      ids[q].push_back(c * 3 + 1);   // gaps between commit IDs
      left[q]--;
    end
  endtask

  always_comb for (int q = 0; q < NQ; q++) begin
    log_entry[q] = mk(pos[q] < ids[q].size() ? ids[q][pos[q]] : 0);
  end

  always @(posedge clk) begin
    for (int q = 0; q < NQ; q++) begin
      if (log_valid[q] && log_ready[q]) pos[q] <= pos[q] + 1;
    end
    if (merge_stall) stalls_seen++;
  end

  always @(negedge clk) begin
    for (int q = 0; q < NQ; q++) begin
      log_valid[q] = rst_n && (pos[q] < ids[q].size()) && (!random_gaps || $urandom_range(0, 3) != 0);
      log_done[q]  = (pos[q] >= ids[q].size());
    end
  end

  task automatic drain_check(bit random_ready);
    int unsigned expect_c = 0;
    while (expect_c < TOTAL) begin
      @(negedge clk);
      fin_ready = !random_ready || ($urandom_range(0, 2) != 0);
      @(posedge clk);
      if (fin_valid && fin_ready) begin
        log_entry_t exp_e;
        exp_e = mk(expect_c * 3 + 1);
        checks++;
        if (fin_entry !== exp_e) begin
          failures++;
          if (failures < 5) $display("mismatch at %0d: got cid %0d", expect_c, fin_entry.commit_id);
        end
        expect_c++;
      end
    end
    @(negedge clk); fin_ready = 0;
  endtask

  initial begin
    int unsigned t0, t1;
    fin_ready = 0; random_gaps = 1; stalls_seen = 0;
    for (int q = 0; q < NQ; q++) begin pos[q] = 0; end
    deal();
    repeat (3) @(posedge clk);
    rst_n = 1;
    // test 1: random arrival and random consumer
    drain_check(1'b1);
    checks++;
    if (stalls_seen == 0) begin failures++; $display("merge never waited for a missing head"); end
    // test 2: rate, all queues streamed at full speed, consumer held off
    random_gaps = 0;
    deal();
    @(posedge clk);
    t0 = $time / 10;
    wait (fin_count == FD);
    t1 = $time / 10;
    checks++;
    if (t1 - t0 > FD + 8) begin failures++; $display("merge too slow: %0d cycles", t1 - t0); end
    drain_check(1'b0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (50000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
