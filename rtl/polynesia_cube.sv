// polynesia_cube: top level - the analytical-island hardware of one HMC-like memory
// cube. The cube has NUM_VAULTS (16) vaults; the logic layer of every vault holds
// its own update shipping unit, update application unit, copy unit and snapshot
// metadata (polynesia_vault), serving the data placed in that vault.
//
// Everything the paper takes from elsewhere stays outside and appears as ports,
// indexed by vault: the per-thread update-log streams of the transactional CPUs
// (8 per vault), the commands and query requests of the vault's PIM cores, and the
// memory ports towards each vault's DRAM controller (VAULT_PORTS per vault, see
// polynesia_vault for their order). The vaults do not talk to each other here:
// remote accesses of the vault-to-vault interconnect belong to the PIM cores' side.
module polynesia_cube
  import polynesia_pkg::*;
#(
  parameter int unsigned NUM_VAULTS  = 16,
  parameter int unsigned NUM_QUEUES  = 8,
  parameter int unsigned QUEUE_DEPTH = 128,
  parameter int unsigned FINAL_DEPTH = 1024,
  parameter int unsigned ROB_DEPTH   = 8,
  parameter int unsigned NUM_BUCKETS = 1024,
  parameter int unsigned MAX_UPD     = 1024,
  parameter int unsigned MAX_DICT    = 2048,
  parameter int unsigned TB_DEPTH    = 16,
  parameter int unsigned NUM_SNAP    = 16,
  parameter int unsigned SNAP_WORDS  = 4096,
  localparam int unsigned DAW = $clog2(MAX_DICT),
  localparam int unsigned SW  = $clog2(NUM_SNAP)
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [MEM_AW-1:0] table_base   [NUM_VAULTS],
  input  logic [MEM_AW-1:0] snap_base    [NUM_VAULTS],
  // update shipping
  input  logic [31:0]       pending_updates [NUM_VAULTS],
  output logic              batch_trigger   [NUM_VAULTS],
  input  logic              batch_clear     [NUM_VAULTS],
  input  logic              log_valid [NUM_VAULTS][NUM_QUEUES],
  output logic              log_ready [NUM_VAULTS][NUM_QUEUES],
  input  log_entry_t        log_entry [NUM_VAULTS][NUM_QUEUES],
  input  logic              log_done  [NUM_VAULTS][NUM_QUEUES],
  output logic              batch_done [NUM_VAULTS],
  // update application
  input  logic              apply_valid   [NUM_VAULTS],
  output logic              apply_ready   [NUM_VAULTS],
  input  logic [COL_W-1:0]  apply_col     [NUM_VAULTS],
  input  logic [MEM_AW-1:0] apply_buf     [NUM_VAULTS],
  input  logic [MEM_AW-1:0] apply_new_ptr [NUM_VAULTS],
  output logic              apply_done    [NUM_VAULTS],
  input  logic              dict_wr_en    [NUM_VAULTS],
  input  logic [DAW-1:0]    dict_wr_idx   [NUM_VAULTS],
  input  logic [DATA_W-1:0] dict_wr_val   [NUM_VAULTS],
  input  logic [DAW:0]      dict_wr_size  [NUM_VAULTS],
  input  logic              col_init      [NUM_VAULTS],
  input  logic [MEM_AW-1:0] col_init_ptr  [NUM_VAULTS],
  input  logic [ROW_W:0]    col_init_rows [NUM_VAULTS],
  input  logic [DAW-1:0]    dict_rd_idx   [NUM_VAULTS],
  output logic [DATA_W-1:0] dict_rd_val   [NUM_VAULTS],
  output logic [DAW:0]      dict_size     [NUM_VAULTS],
  output logic [MEM_AW-1:0] col_ptr       [NUM_VAULTS],
  output logic [ROW_W:0]    col_rows      [NUM_VAULTS],
  output logic [5:0]        col_code_bits [NUM_VAULTS],
  // analytical queries
  input  logic              q_valid     [NUM_VAULTS],
  output logic              q_ready     [NUM_VAULTS],
  input  snap_op_e          q_op        [NUM_VAULTS],
  input  logic [COL_W-1:0]  q_col       [NUM_VAULTS],
  input  logic [SW-1:0]     q_snap      [NUM_VAULTS],
  input  logic [MEM_AW-1:0] q_ptr       [NUM_VAULTS],
  input  logic [ROW_W:0]    q_rows      [NUM_VAULTS],
  output logic              q_rsp_valid [NUM_VAULTS],
  output logic [SW-1:0]     q_rsp_snap  [NUM_VAULTS],
  output logic [MEM_AW-1:0] q_rsp_ptr   [NUM_VAULTS],
  output logic              q_rsp_new   [NUM_VAULTS],
  output logic [(1<<COL_W)-1:0] col_dirty [NUM_VAULTS],
  // memory ports towards each vault's DRAM controller
  output logic              mem_req_valid [NUM_VAULTS][VAULT_PORTS],
  input  logic              mem_req_ready [NUM_VAULTS][VAULT_PORTS],
  output mem_req_t          mem_req       [NUM_VAULTS][VAULT_PORTS],
  input  logic              mem_rsp_valid [NUM_VAULTS][VAULT_PORTS],
  input  mem_rsp_t          mem_rsp       [NUM_VAULTS][VAULT_PORTS],
  output vault_stats_t      stats         [NUM_VAULTS]
);
  for (genvar v = 0; v < NUM_VAULTS; v++) begin : g_vault
    polynesia_vault #(
      .NUM_QUEUES(NUM_QUEUES), .QUEUE_DEPTH(QUEUE_DEPTH), .FINAL_DEPTH(FINAL_DEPTH),
      .ROB_DEPTH(ROB_DEPTH), .NUM_BUCKETS(NUM_BUCKETS), .MAX_UPD(MAX_UPD),
      .MAX_DICT(MAX_DICT), .TB_DEPTH(TB_DEPTH), .NUM_SNAP(NUM_SNAP), .SNAP_WORDS(SNAP_WORDS)
    ) u_vault (
      .clk, .rst_n,
      .table_base(table_base[v]), .snap_base(snap_base[v]),
      .pending_updates(pending_updates[v]), .batch_trigger(batch_trigger[v]),
      .batch_clear(batch_clear[v]),
      .log_valid(log_valid[v]), .log_ready(log_ready[v]), .log_entry(log_entry[v]),
      .log_done(log_done[v]), .batch_done(batch_done[v]),
      .apply_valid(apply_valid[v]), .apply_ready(apply_ready[v]), .apply_col(apply_col[v]),
      .apply_buf(apply_buf[v]), .apply_new_ptr(apply_new_ptr[v]), .apply_done(apply_done[v]),
      .dict_wr_en(dict_wr_en[v]), .dict_wr_idx(dict_wr_idx[v]), .dict_wr_val(dict_wr_val[v]),
      .dict_wr_size(dict_wr_size[v]), .col_init(col_init[v]), .col_init_ptr(col_init_ptr[v]),
      .col_init_rows(col_init_rows[v]), .dict_rd_idx(dict_rd_idx[v]), .dict_rd_val(dict_rd_val[v]),
      .dict_size(dict_size[v]), .col_ptr(col_ptr[v]), .col_rows(col_rows[v]),
      .col_code_bits(col_code_bits[v]),
      .q_valid(q_valid[v]), .q_ready(q_ready[v]), .q_op(q_op[v]), .q_col(q_col[v]),
      .q_snap(q_snap[v]), .q_ptr(q_ptr[v]), .q_rows(q_rows[v]),
      .q_rsp_valid(q_rsp_valid[v]), .q_rsp_snap(q_rsp_snap[v]), .q_rsp_ptr(q_rsp_ptr[v]),
      .q_rsp_new(q_rsp_new[v]), .col_dirty(col_dirty[v]),
      .mem_req_valid(mem_req_valid[v]), .mem_req_ready(mem_req_ready[v]), .mem_req(mem_req[v]),
      .mem_rsp_valid(mem_rsp_valid[v]), .mem_rsp(mem_rsp[v]),
      .stats(stats[v])
    );
  end
endmodule
