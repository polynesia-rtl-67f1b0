// polynesia_cube_tb: end-to-end test of the full-size cube (16 vaults, all sizes at
// their defaults, no parameter overrides). Every vault gets its own memory model and
// runs one complete round of update shipping, update application and snapshotting
// (see vault_driver) with its own random seed, all vaults at the same time. Each
// mechanism (merge stall, overlapping hash lookups, dropped update, insert, ignored
// delete, snapshot created / shared / freed, copied words, update application) must
// have happened in every vault, otherwise it counts as a failure.
module polynesia_cube_tb;
  import polynesia_pkg::*;
  localparam int NV = 16;
  logic clk = 0, rst_n = 0, go = 0;
  always #5 clk = ~clk;
  logic finished [NV];
  int checks [NV], failures [NV], ev [NV][10];
  logic [MEM_AW-1:0] table_base [NV], snap_base [NV], apply_buf [NV], apply_new_ptr [NV];
  logic [MEM_AW-1:0] col_init_ptr [NV], col_ptr [NV], q_ptr [NV], q_rsp_ptr [NV];
  logic [31:0] pending_updates [NV];
  logic batch_trigger [NV], batch_clear [NV], batch_done [NV];
  logic apply_valid [NV], apply_ready [NV], apply_done [NV];
  logic log_valid [NV][8], log_ready [NV][8], log_done [NV][8];
  log_entry_t log_entry [NV][8];
  logic [COL_W-1:0] apply_col [NV], q_col [NV];
  logic dict_wr_en [NV], col_init [NV], q_valid [NV], q_ready [NV], q_rsp_valid [NV], q_rsp_new [NV];
  logic [10:0] dict_wr_idx [NV], dict_rd_idx [NV];
  logic [11:0] dict_wr_size [NV], dict_size [NV];
  logic [DATA_W-1:0] dict_wr_val [NV], dict_rd_val [NV];
  logic [ROW_W:0] col_init_rows [NV], col_rows [NV], q_rows [NV];
  logic [5:0] col_code_bits [NV];
  snap_op_e q_op [NV];
  logic [3:0] q_snap [NV], q_rsp_snap [NV];
  logic [255:0] col_dirty [NV];
  logic mem_req_valid [NV][VAULT_PORTS], mem_req_ready [NV][VAULT_PORTS], mem_rsp_valid [NV][VAULT_PORTS];
  mem_req_t mem_req [NV][VAULT_PORTS];
  mem_rsp_t mem_rsp [NV][VAULT_PORTS];
  vault_stats_t stats [NV];

  polynesia_cube dut (.*);

  for (genvar v = 0; v < NV; v++) begin : g_drv
    vault_driver #(.SEED(v + 11)) drv (
        .clk, .rst_n, .go,
        .finished(finished[v]), .checks(checks[v]), .failures(failures[v]), .ev(ev[v]),
        .table_base(table_base[v]),
        .snap_base(snap_base[v]),
        .pending_updates(pending_updates[v]),
        .batch_trigger(batch_trigger[v]),
        .batch_clear(batch_clear[v]),
        .log_valid(log_valid[v]),
        .log_ready(log_ready[v]),
        .log_entry(log_entry[v]),
        .log_done(log_done[v]),
        .batch_done(batch_done[v]),
        .apply_valid(apply_valid[v]),
        .apply_ready(apply_ready[v]),
        .apply_col(apply_col[v]),
        .apply_buf(apply_buf[v]),
        .apply_new_ptr(apply_new_ptr[v]),
        .apply_done(apply_done[v]),
        .dict_wr_en(dict_wr_en[v]),
        .dict_wr_idx(dict_wr_idx[v]),
        .dict_wr_val(dict_wr_val[v]),
        .dict_wr_size(dict_wr_size[v]),
        .col_init(col_init[v]),
        .col_init_ptr(col_init_ptr[v]),
        .col_init_rows(col_init_rows[v]),
        .dict_rd_idx(dict_rd_idx[v]),
        .dict_rd_val(dict_rd_val[v]),
        .dict_size(dict_size[v]),
        .col_ptr(col_ptr[v]),
        .col_rows(col_rows[v]),
        .col_code_bits(col_code_bits[v]),
        .q_valid(q_valid[v]),
        .q_ready(q_ready[v]),
        .q_op(q_op[v]),
        .q_col(q_col[v]),
        .q_snap(q_snap[v]),
        .q_ptr(q_ptr[v]),
        .q_rows(q_rows[v]),
        .q_rsp_valid(q_rsp_valid[v]),
        .q_rsp_snap(q_rsp_snap[v]),
        .q_rsp_ptr(q_rsp_ptr[v]),
        .q_rsp_new(q_rsp_new[v]),
        .col_dirty(col_dirty[v]),
        .mem_req_valid(mem_req_valid[v]),
        .mem_req_ready(mem_req_ready[v]),
        .mem_req(mem_req[v]),
        .mem_rsp_valid(mem_rsp_valid[v]),
        .mem_rsp(mem_rsp[v]),
        .stats(stats[v]));
  end

  localparam string EVN [10] = '{"merge stall", "overlapping hash lookups", "dropped update",
    "insert", "ignored delete", "snapshot created", "snapshot shared", "snapshot freed",
    "words copied", "update application"};

  function automatic bit all_done();
    for (int v = 0; v < NV; v++) if (finished[v] !== 1'b1) return 0;
    return 1;
  endfunction

  initial begin
    int c, f, tot;
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); go = 1;
    while (!all_done()) @(posedge clk);
    c = 0; f = 0;
    for (int v = 0; v < NV; v++) begin c += checks[v]; f += failures[v]; end
    for (int i = 0; i < 10; i++) begin
      tot = 0;
      for (int v = 0; v < NV; v++) begin
        tot += ev[v][i];
        c++;
        if (ev[v][i] == 0) begin f++; $display("vault %0d: mechanism never happened: %s", v, EVN[i]); end
      end
      $display("%-26s %0d (all vaults)", EVN[i], tot);
    end
    $display("TB_RESULT checks=%0d failures=%0d", c, f);
    $finish;
  end
  initial begin
    int c, f;
    repeat (300000) @(posedge clk);
    c = 0; f = 1;
    for (int v = 0; v < NV; v++) begin c += checks[v]; f += failures[v]; end
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", c, f); $finish;
  end
endmodule
