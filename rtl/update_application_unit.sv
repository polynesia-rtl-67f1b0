// update_application_unit: applies a batch of shipped updates to one column of the
// analytical replica, which is stored column-wise and dictionary-encoded (each row
// holds a fixed-length code; a sorted dictionary maps codes to values).
//
// Phase 1 builds a new dictionary and a new column, Phase 2 switches to them at once:
//   1. sort    - the update values (up to MAX_UPD = 1024) go through the bitonic
//                sorter, tagged with their arrival (commit) order;
//   2. merge   - the scan/merge unit merges the sorted updates into the old,
//                sorted dictionary, giving the new dictionary, the index
//                old code -> new code, and the new code of every update;
//   3. re-encode - the old column is streamed from memory one 4-code word at a time;
//                four lookup lanes translate the four codes through the index in
//                parallel and the word is written to the new column. No value is
//                decoded and no dictionary is searched;
//   4. scatter - every update's code is written into its row of the new column in
//                commit order (so the last update of a row wins); a row at or past
//                the end of the column is an insert and grows it;
//   5. swap    - (Phase 2) the column pointer, row count, code width and the
//                dictionary bank switch to the new ones in a single clock edge.
// Steps 1-4 and the four lookup lanes follow the paper. Own choices: codes are kept
// one per 32-bit lane (code_bits reports the width the paper's encoder would use,
// but the column is not bit-packed); the dictionary lives in two on-chip banks of
// MAX_DICT (2048) entries; delete updates are counted and not applied, as the paper
// does not say how a delete changes an encoded column; the re-encode and scatter
// steps keep one memory access in flight.
//
// Interface: load the initial dictionary through dict_wr_*, push updates through
// upd_* while idle, then pulse start with the new column's address. done pulses on
// the swap. dict_rd_* reads the current dictionary.
module update_application_unit
  import polynesia_pkg::*;
#(
  parameter int unsigned MAX_UPD  = 1024,
  parameter int unsigned MAX_DICT = 2048,
  parameter int unsigned LANES    = MEM_LANES
) (
  input  logic              clk,
  input  logic              rst_n,
  // initial dictionary load / current dictionary read
  input  logic              dict_wr_en,
  input  logic [$clog2(MAX_DICT)-1:0] dict_wr_idx,
  input  logic [DATA_W-1:0] dict_wr_val,
  input  logic [$clog2(MAX_DICT):0]   dict_wr_size,
  input  logic [MEM_AW-1:0] col_init_ptr,
  input  logic [ROW_W:0]    col_init_rows,
  input  logic              col_init,        // take col_init_ptr/rows and dict_wr_size
  input  logic [$clog2(MAX_DICT)-1:0] dict_rd_idx,
  output logic [DATA_W-1:0] dict_rd_val,
  output logic [$clog2(MAX_DICT):0]   dict_size,
  output logic [MEM_AW-1:0] col_ptr,
  output logic [ROW_W:0]    col_rows,
  output logic [5:0]        col_code_bits,
  // updates of this column
  input  logic              upd_valid,
  output logic              upd_ready,
  input  upd_type_e         upd_type,
  input  logic [ROW_W-1:0]  upd_row,
  input  logic [DATA_W-1:0] upd_val,
  // command
  input  logic              start,
  input  logic [MEM_AW-1:0] new_col_ptr,
  output logic              busy,
  output logic              done,
  // memory port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic              mem_rsp_valid,
  input  mem_rsp_t          mem_rsp,
  // statistics
  output logic [15:0]       stat_sort_cycles,
  output logic [31:0]       stat_deletes_ignored,
  output logic [31:0]       stat_inserts
);
  localparam int unsigned DAW = $clog2(MAX_DICT);
  localparam int unsigned TW  = $clog2(MAX_UPD);

  typedef enum logic [3:0] {
    S_IDLE, S_SORT, S_MERGE, S_RD, S_RD_WAIT, S_WR, S_SCATTER, S_SWAP
  } state_e;
  state_e state;

  // dictionary banks, index table, update table
  logic [DATA_W-1:0] dict [2][MAX_DICT];
  logic              bank;                // active bank
  logic [DAW-1:0]    index_tbl [MAX_DICT];
  logic [ROW_W-1:0]  u_row  [MAX_UPD];
  logic [DAW-1:0]    u_code [MAX_UPD];
  logic [TW:0]       n_upd;

  logic [MEM_AW-1:0] nptr;
  logic [ROW_W:0]    nrows;
  logic [ROW_W:0]    w_idx;               // word being re-encoded
  logic [TW:0]       s_idx;               // update being scattered
  logic [MEM_DW-1:0] wbuf;

  assign dict_rd_val = dict[bank][dict_rd_idx];
  assign busy        = (state != S_IDLE);

  // ---- sort unit ----
  logic            s_in_valid, s_in_ready, s_out_valid, s_out_ready, s_busy;
  logic [DATA_W-1:0] s_out_key;
  logic [TW-1:0]   s_out_tag;
  logic [TW:0]     s_count;
  logic            s_start;

  assign upd_ready  = (state == S_IDLE) && !start &&
                      ((upd_type == UPD_DELETE) || s_in_ready);
  assign s_in_valid = upd_valid && (state == S_IDLE) && !start && (upd_type != UPD_DELETE);
  assign s_start    = start && (state == S_IDLE);

  bitonic_sorter #(.N(MAX_UPD), .KEY_W(DATA_W), .TAG_W(TW)) u_sort (
    .clk, .rst_n,
    .in_valid (s_in_valid), .in_ready(s_in_ready), .in_key(upd_val), .in_tag(n_upd[TW-1:0]),
    .start    (s_start), .busy(s_busy),
    .out_valid(s_out_valid), .out_ready(s_out_ready), .out_key(s_out_key), .out_tag(s_out_tag),
    .count    (s_count), .sort_cycles(stat_sort_cycles)
  );

  // ---- scan/merge unit ----
  logic            m_start, m_busy, m_done;
  logic [DAW-1:0]  m_old_idx;
  logic            m_dict_we, m_idx_we, m_code_we;
  logic [DAW-1:0]  m_dict_widx, m_idx_old, m_idx_new, m_code_val;
  logic [DATA_W-1:0] m_dict_wval;
  logic [TW-1:0]   m_code_tag;
  logic [DAW:0]    m_new_size;
  logic [5:0]      m_code_bits;

  assign m_start = (state == S_SORT) && !s_busy && !s_start;

  dict_merge_unit #(.VAL_W(DATA_W), .DICT_AW(DAW), .TAG_W(TW)) u_merge (
    .clk, .rst_n,
    .start    (m_start), .old_size(dict_size), .upd_total(n_upd),
    .busy     (m_busy),  .done(m_done),
    .old_idx  (m_old_idx), .old_val(dict[bank][m_old_idx]),
    .upd_valid(s_out_valid), .upd_ready(s_out_ready), .upd_val(s_out_key), .upd_tag(s_out_tag),
    .dict_we  (m_dict_we), .dict_widx(m_dict_widx), .dict_wval(m_dict_wval),
    .idx_we   (m_idx_we),  .idx_old(m_idx_old), .idx_new(m_idx_new),
    .code_we  (m_code_we), .code_tag(m_code_tag), .code_val(m_code_val),
    .new_size (m_new_size), .code_bits(m_code_bits)
  );

  // ---- four lookup lanes: old code -> new code through the index ----
  logic [MEM_DW-1:0] reenc;
  always_comb begin
    for (int l = 0; l < LANES; l++)
      reenc[32*l +: 32] = 32'(index_tbl[DAW'(mem_rsp.rdata[32*l +: 32])]);
  end

  wire [ROW_W:0] n_words = (col_rows + ROW_W'(LANES - 1)) / (ROW_W+1)'(LANES);

  // ---- memory requests ----
  wire [ROW_W-1:0] sc_row = u_row[s_idx[TW-1:0]];
  always_comb begin
    mem_req_valid = 1'b0;
    mem_req       = '0;
    unique case (state)
      S_RD: begin
        mem_req_valid = 1'b1;
        mem_req.addr  = col_ptr + MEM_AW'(w_idx);
      end
      S_WR: begin
        mem_req_valid = 1'b1;
        mem_req.we    = 1'b1;
        mem_req.wmask = '1;
        mem_req.addr  = nptr + MEM_AW'(w_idx);
        mem_req.wdata = wbuf;
      end
      S_SCATTER: begin
        mem_req_valid = (s_idx < n_upd);
        mem_req.we    = 1'b1;
        mem_req.addr  = nptr + MEM_AW'(sc_row / ROW_W'(LANES));
        mem_req.wmask = MEM_LANES'(1) << (sc_row % ROW_W'(LANES));
        mem_req.wdata = {LANES{32'(u_code[s_idx[TW-1:0]])}};
      end
      default: ;
    endcase
  end

  // bits of a fixed-length code for a dictionary of n entries (at least 1)
  function automatic logic [5:0] code_width(logic [DAW:0] n);
    logic [5:0] b;
    b = 6'd1;
    while (b < 6'(DAW + 1) && (DAW+1)'(1 << b) < n) b++;
    return b;
  endfunction

  always_ff @(posedge clk) begin
    if (dict_wr_en && state == S_IDLE) dict[bank][dict_wr_idx] <= dict_wr_val;
    if (m_dict_we) dict[~bank][m_dict_widx] <= m_dict_wval;
    if (m_idx_we)  index_tbl[m_idx_old] <= m_idx_new;
    if (m_code_we) u_code[m_code_tag] <= m_code_val;
    if (s_in_valid && s_in_ready) u_row[n_upd[TW-1:0]] <= upd_row;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state         <= S_IDLE;
      bank          <= 1'b0;
      n_upd         <= '0;
      nptr          <= '0;
      nrows         <= '0;
      w_idx         <= '0;
      s_idx         <= '0;
      wbuf          <= '0;
      done          <= 1'b0;
      dict_size     <= '0;
      col_ptr       <= '0;
      col_rows      <= '0;
      col_code_bits <= 6'd1;
      stat_deletes_ignored <= '0;
      stat_inserts  <= '0;
    end else begin
      done <= 1'b0;
      unique case (state)
        S_IDLE: begin
          if (col_init) begin
            col_ptr   <= col_init_ptr;
            col_rows  <= col_init_rows;
            dict_size <= dict_wr_size;
            col_code_bits <= code_width(dict_wr_size);
          end
          if (upd_valid && upd_ready) begin
            if (upd_type == UPD_DELETE) stat_deletes_ignored <= stat_deletes_ignored + 1;
            else                        n_upd <= n_upd + 1'b1;
          end
          if (s_start) begin
            nptr  <= new_col_ptr;
            nrows <= col_rows;
            state <= S_SORT;
          end
        end
        S_SORT:  if (m_start) state <= S_MERGE;
        S_MERGE: if (m_done) begin
          w_idx <= '0;
          state <= (n_words == '0) ? S_SCATTER : S_RD;
          s_idx <= '0;
        end
        S_RD:      if (mem_req_ready) state <= S_RD_WAIT;
        S_RD_WAIT: if (mem_rsp_valid) begin
          wbuf  <= reenc;
          state <= S_WR;
        end
        S_WR: if (mem_req_ready) begin
          w_idx <= w_idx + 1'b1;
          state <= (w_idx + 1'b1 == n_words) ? S_SCATTER : S_RD;
        end
        S_SCATTER: begin
          if (s_idx == n_upd) state <= S_SWAP;
          else if (mem_req_ready) begin
            if ({1'b0, sc_row} >= nrows) begin
              nrows        <= {1'b0, sc_row} + 1'b1;
              stat_inserts <= stat_inserts + 1;
            end
            s_idx <= s_idx + 1'b1;
          end
        end
        S_SWAP: begin
          // Phase 2: every pointer of the column changes on this one edge
          bank          <= ~bank;
          dict_size     <= m_new_size;
          col_code_bits <= m_code_bits;
          col_ptr       <= nptr;
          col_rows      <= nrows;
          n_upd         <= '0;
          done          <= 1'b1;
          state         <= S_IDLE;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  a_rsp_only_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> state == S_RD_WAIT);
endmodule
