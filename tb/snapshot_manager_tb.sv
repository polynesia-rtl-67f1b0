// snapshot_manager_tb: drives the consistency metadata through its cases with the
// copy unit replaced by a responder that records each copy command: lazy snapshot
// on the first query of a dirty column, sharing a clean snapshot, a new snapshot
// after a column update while older readers continue, garbage collection of old
// snapshots when their last reader ends (but never of the chain head), and a query
// that waits while every snapshot slot is in use.
module snapshot_manager_tb;
  import polynesia_pkg::*;
  localparam int NS = 4, SWD = 64;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic [MEM_AW-1:0] snap_base = 32'h0010_0000;
  logic req_valid, req_ready, rsp_valid, rsp_new;
  logic [1:0] req_op;
  logic [COL_W-1:0] req_col;
  logic [1:0] req_snap, rsp_snap;
  logic [MEM_AW-1:0] req_ptr, rsp_ptr;
  logic [ROW_W:0] req_rows;
  logic copy_valid, copy_ready, copy_done;
  copy_cmd_t copy_cmd;
  logic [255:0] col_dirty;
  logic [31:0] stat_created, stat_shared, stat_freed;

  snapshot_manager #(.NUM_SNAP(NS), .SNAP_WORDS(SWD)) dut (.*);

  int checks = 0, failures = 0;
  copy_cmd_t last_copy;
  int copies = 0;

  // copy-unit stand-in: accept, wait a few cycles, pulse done
  initial begin
    copy_ready = 1; copy_done = 0;
    forever begin
      @(posedge clk);
      if (copy_valid && copy_ready) begin
        last_copy = copy_cmd; copies++;
        copy_ready <= 0;
        repeat (3) @(posedge clk);
        copy_done <= 1;
        @(posedge clk);
        copy_done <= 0; copy_ready <= 1;
      end
    end
  end

  task automatic req(logic [1:0] op, int col, int snap, logic [MEM_AW-1:0] ptr, int rows);
    @(negedge clk);
    req_valid = 1; req_op = op; req_col = COL_W'(col); req_snap = 2'(snap); req_ptr = ptr; req_rows = (ROW_W+1)'(rows);
    @(posedge clk); while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
  endtask

  task automatic begin_q(int col, bit exp_new, output int snap);
    int c0 = copies;
    req(SNAP_QUERY_BEGIN, col, 0, 0, 0);
    while (!rsp_valid) @(posedge clk);
    snap = rsp_snap;
    checks += 3;
    if (rsp_new !== exp_new) begin failures++; $display("col %0d new=%0d", col, rsp_new); end
    if (rsp_ptr !== snap_base + rsp_snap * SWD) failures++;
    if ((copies != c0) !== exp_new) failures++;
  endtask

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAILED: %s", what); end
  endtask

  initial begin
    int s0, s1, s2, s3, sx;
    req_valid = 0; req_op = 0; req_col = 0; req_snap = 0; req_ptr = 0; req_rows = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    req(SNAP_COL_UPDATE, 3, 0, 32'h1000, 40);
    check(col_dirty[3], "column dirty after update");
    begin_q(3, 1, s0);
    check(last_copy.src == 32'h1000 && last_copy.len == 10 && last_copy.dst == snap_base + s0 * SWD, "copy command");
    check(!col_dirty[3], "clean after snapshot");
    begin_q(3, 0, sx);
    check(sx == s0, "second query shares the snapshot");
    req(SNAP_COL_UPDATE, 3, 0, 32'h2000, 8);
    begin_q(3, 1, s1);
    check(s1 != s0 && last_copy.src == 32'h2000 && last_copy.len == 2, "new snapshot after update");
    req(SNAP_QUERY_END, 0, s0, 0, 0);
    check(stat_freed == 0, "old snapshot kept while read");
    req(SNAP_QUERY_END, 0, s0, 0, 0);
    check(stat_freed == 1, "old snapshot freed by its last reader");
    req(SNAP_QUERY_END, 0, s1, 0, 0);
    check(stat_freed == 1, "chain head kept with no reader");
    req(SNAP_COL_UPDATE, 3, 0, 32'h3000, 4);
    begin_q(3, 1, s2);
    check(stat_freed == 2, "unread head freed when replaced");
    // exhaust the slots: columns 5, 6, 7 take the remaining three
    req(SNAP_COL_UPDATE, 5, 0, 32'h5000, 4);
    req(SNAP_COL_UPDATE, 6, 0, 32'h6000, 4);
    req(SNAP_COL_UPDATE, 7, 0, 32'h7000, 4);
    req(SNAP_COL_UPDATE, 8, 0, 32'h8000, 4);
    begin_q(5, 1, sx); begin_q(6, 1, sx); begin_q(7, 1, s3);
    // column 8 must wait for a free slot
    @(negedge clk); req_valid = 1; req_op = SNAP_QUERY_BEGIN; req_col = 8;
    repeat (5) @(posedge clk);
    check(!req_ready, "query waits with no free slot");
    @(negedge clk); req_valid = 0;
    req(SNAP_QUERY_END, 0, s3, 0, 0);     // s3 heads column 7: kept
    check(stat_freed == 2, "no slot freed by ending a head's reader");
    check(stat_created == 6, "snapshots created");
    check(stat_shared == 1, "snapshots shared");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (5000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
