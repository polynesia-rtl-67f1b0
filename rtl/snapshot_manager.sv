// snapshot_manager: consistency metadata of the analytical island. It gives every
// analytical query a consistent, column-granular snapshot while the update
// application unit keeps writing new versions of the main replica.
//
// Per column it keeps the main-replica pointer, a dirty bit and the head of the
// column's snapshot chain; per snapshot slot it keeps the column, the address of
// the copy and the number of queries reading it. Behaviour, as the paper describes:
//   * column update (Phase 2 of update application): the main pointer moves to the
//     new column and the column is marked dirty; no snapshot is taken (lazy).
//   * query begin: if the column is dirty (or has never been snapshotted) a new
//     snapshot is made - the copy unit copies the column into a free slot, that slot
//     becomes the chain head and the column is marked clean. Otherwise the query
//     shares the current head. The query is told the snapshot's slot and address.
//   * query end: the slot's reader count drops; a slot that no query reads and that
//     is not the head of its chain is freed (garbage collection). A head that
//     loses its place to a newer snapshot is freed then too if nobody reads it.
// The paper states the algorithm, not its hardware; holding the metadata in
// registers and serving one request at a time are this design's choices, as are
// NUM_COLS (256, the column-ID range), NUM_SNAP (16 slots) and fixed-size snapshot
// regions of SNAP_WORDS words at snap_base + slot * SNAP_WORDS. With no free slot a
// query begin waits until a query end frees one. The chain is kept implicitly:
// older versions of a column are the slots still marked with its column ID.
module snapshot_manager
  import polynesia_pkg::*;
#(
  parameter int unsigned NUM_COLS   = 1 << COL_W,
  parameter int unsigned NUM_SNAP   = 16,
  parameter int unsigned SNAP_WORDS = 4096
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic [MEM_AW-1:0] snap_base,
  // requests
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [1:0]        req_op,     // 0 query begin, 1 query end, 2 column update
  input  logic [COL_W-1:0]  req_col,
  input  logic [$clog2(NUM_SNAP)-1:0] req_snap,
  input  logic [MEM_AW-1:0] req_ptr,
  input  logic [ROW_W:0]    req_rows,
  // query-begin response
  output logic              rsp_valid,
  output logic [$clog2(NUM_SNAP)-1:0] rsp_snap,
  output logic [MEM_AW-1:0] rsp_ptr,
  output logic              rsp_new,
  // copy unit
  output logic              copy_valid,
  input  logic              copy_ready,
  output copy_cmd_t         copy_cmd,
  input  logic              copy_done,
  // state visible to the tester / host
  output logic [NUM_COLS-1:0] col_dirty,
  output logic [31:0]       stat_created,
  output logic [31:0]       stat_shared,
  output logic [31:0]       stat_freed
);
  localparam int unsigned SW = $clog2(NUM_SNAP);
  localparam logic [1:0] OP_BEGIN = 2'd0, OP_END = 2'd1, OP_UPDATE = 2'd2;

  typedef struct packed {
    logic              used;
    logic [COL_W-1:0]  col;
    logic [15:0]       readers;
  } slot_t;

  slot_t             slot [NUM_SNAP];
  logic [MEM_AW-1:0] main_ptr  [NUM_COLS];
  logic [ROW_W:0]    main_rows [NUM_COLS];
  logic              head_vld  [NUM_COLS];
  logic [SW-1:0]     head      [NUM_COLS];

  typedef enum logic [1:0] {S_IDLE, S_COPY_REQ, S_COPY_WAIT} state_e;
  state_e state;
  logic [COL_W-1:0] cur_col;
  logic [SW-1:0]    cur_slot;

  // lowest free slot
  logic          free_ok;
  logic [SW-1:0] free_slot;
  always_comb begin
    free_ok   = 1'b0;
    free_slot = '0;
    for (int s = NUM_SNAP - 1; s >= 0; s--)
      if (!slot[s].used) begin
        free_ok   = 1'b1;
        free_slot = SW'(s);
      end
  end

  wire need_snap = col_dirty[req_col] || !head_vld[req_col];
  assign req_ready = (state == S_IDLE) &&
                     !(req_op == OP_BEGIN && need_snap && !free_ok);

  function automatic logic [MEM_AW-1:0] slot_addr(logic [SW-1:0] s);
    return snap_base + MEM_AW'(s) * MEM_AW'(SNAP_WORDS);
  endfunction

  wire [ROW_W:0] cur_words = (main_rows[cur_col] + (ROW_W+1)'(MEM_LANES - 1)) / (ROW_W+1)'(MEM_LANES);
  assign copy_valid   = (state == S_COPY_REQ);
  assign copy_cmd.src = main_ptr[cur_col];
  assign copy_cmd.dst = slot_addr(cur_slot);
  assign copy_cmd.len = (cur_words > (ROW_W+1)'(SNAP_WORDS)) ? MEM_AW'(SNAP_WORDS) : MEM_AW'(cur_words);

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      cur_col      <= '0;
      cur_slot     <= '0;
      rsp_valid    <= 1'b0;
      rsp_snap     <= '0;
      rsp_ptr      <= '0;
      rsp_new      <= 1'b0;
      col_dirty    <= '1;
      stat_created <= '0;
      stat_shared  <= '0;
      stat_freed   <= '0;
      for (int s = 0; s < NUM_SNAP; s++) slot[s] <= '0;
      for (int c = 0; c < NUM_COLS; c++) begin
        main_ptr[c]  <= '0;
        main_rows[c] <= '0;
        head_vld[c]  <= 1'b0;
        head[c]      <= '0;
      end
    end else begin
      rsp_valid <= 1'b0;
      unique case (state)
        S_IDLE: if (req_valid && req_ready) begin
          unique case (req_op)
            OP_UPDATE: begin
              main_ptr[req_col]  <= req_ptr;
              main_rows[req_col] <= req_rows;
              col_dirty[req_col] <= 1'b1;
            end
            OP_END: begin
              if (slot[req_snap].readers == 16'd1 &&
                  !(head_vld[slot[req_snap].col] && head[slot[req_snap].col] == req_snap)) begin
                slot[req_snap].used <= 1'b0;
                stat_freed <= stat_freed + 1;
              end
              if (slot[req_snap].readers != '0)
                slot[req_snap].readers <= slot[req_snap].readers - 1'b1;
            end
            OP_BEGIN: begin
              if (need_snap) begin
                cur_col  <= req_col;
                cur_slot <= free_slot;
                slot[free_slot].used    <= 1'b1;
                slot[free_slot].col     <= req_col;
                slot[free_slot].readers <= '0;
                state    <= S_COPY_REQ;
              end else begin
                slot[head[req_col]].readers <= slot[head[req_col]].readers + 1'b1;
                rsp_valid   <= 1'b1;
                rsp_snap    <= head[req_col];
                rsp_ptr     <= slot_addr(head[req_col]);
                rsp_new     <= 1'b0;
                stat_shared <= stat_shared + 1;
              end
            end
            default: ;
          endcase
        end
        S_COPY_REQ: if (copy_ready) state <= S_COPY_WAIT;
        S_COPY_WAIT: if (copy_done) begin
          // the old head leaves the chain head; free it if no query reads it
          if (head_vld[cur_col] && slot[head[cur_col]].readers == '0) begin
            slot[head[cur_col]].used <= 1'b0;
            stat_freed <= stat_freed + 1;
          end
          head_vld[cur_col]        <= 1'b1;
          head[cur_col]            <= cur_slot;
          col_dirty[cur_col]       <= 1'b0;
          slot[cur_slot].readers   <= 16'd1;
          rsp_valid    <= 1'b1;
          rsp_snap     <= cur_slot;
          rsp_ptr      <= slot_addr(cur_slot);
          rsp_new      <= 1'b1;
          stat_created <= stat_created + 1;
          state        <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_end_on_live_slot: assert property (@(posedge clk) disable iff (!rst_n)
    (req_valid && req_ready && req_op == OP_END) |-> slot[req_snap].used);
endmodule
