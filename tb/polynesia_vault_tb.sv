// polynesia_vault_tb: one vault at its default sizes runs one complete round of
// update shipping, update application and snapshotting (see vault_driver), and every
// mechanism of the vault is required to have happened at least once.
module polynesia_vault_tb;
  import polynesia_pkg::*;
  logic clk = 0, rst_n = 0, go = 0, finished;
  always #5 clk = ~clk;
  int checks, failures, ev [10];
  logic [MEM_AW-1:0] table_base, snap_base, apply_buf, apply_new_ptr, col_init_ptr, col_ptr, q_ptr, q_rsp_ptr;
  logic [31:0] pending_updates;
  logic batch_trigger, batch_clear, batch_done, apply_valid, apply_ready, apply_done;
  logic log_valid [8], log_ready [8], log_done [8];
  log_entry_t log_entry [8];
  logic [COL_W-1:0] apply_col, q_col;
  logic dict_wr_en, col_init, q_valid, q_ready, q_rsp_valid, q_rsp_new;
  logic [10:0] dict_wr_idx, dict_rd_idx;
  logic [11:0] dict_wr_size, dict_size;
  logic [DATA_W-1:0] dict_wr_val, dict_rd_val;
  logic [ROW_W:0] col_init_rows, col_rows, q_rows;
  logic [5:0] col_code_bits;
  snap_op_e q_op;
  logic [3:0] q_snap, q_rsp_snap;
  logic [255:0] col_dirty;
  logic mem_req_valid [VAULT_PORTS], mem_req_ready [VAULT_PORTS], mem_rsp_valid [VAULT_PORTS];
  mem_req_t mem_req [VAULT_PORTS];
  mem_rsp_t mem_rsp [VAULT_PORTS];
  vault_stats_t stats;

  polynesia_vault dut (.*);
  vault_driver drv (.*);

  localparam string EVN [10] = '{"merge stall", "overlapping hash lookups", "dropped update",
    "insert", "ignored delete", "snapshot created", "snapshot shared", "snapshot freed",
    "words copied", "update application"};

  initial begin
    repeat (3) @(posedge clk); rst_n = 1;
    @(negedge clk); go = 1;
    wait (finished === 1'b1);
    begin
      int c, f;
      c = checks; f = failures;
      for (int i = 0; i < 10; i++) begin
        c++;
        $display("%-26s %0d", EVN[i], ev[i]);
        if (ev[i] == 0) begin f++; $display("mechanism never happened: %s", EVN[i]); end
      end
      $display("TB_RESULT checks=%0d failures=%0d", c, f);
    end
    $finish;
  end
  initial begin
    repeat (200000) @(posedge clk);
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures + 1); $finish;
  end
endmodule
