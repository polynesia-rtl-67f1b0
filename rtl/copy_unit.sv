// copy_unit: in-memory copy engine of the consistency mechanism (column snapshots).
//
// It copies len memory words from src to dst. Following the paper, several fetch
// units read from the source region in parallel and several writeback units write
// to the destination in parallel, and a tracking buffer holds every read in flight:
// an entry with the destination address and a ready bit (plus, here, the data). A
// read may come back in any order; its entry is found through an index on the
// memory address, not by scanning the buffer, and its ready bit is set so a
// writeback unit issues the write at once.
//
// Own choices: NUM_FETCH = NUM_WB = 4 (the figure draws four F and four W blocks);
// TB_DEPTH = 16 entries; the address index is the address modulo TB_DEPTH, which for
// a contiguous copy never collides among entries in flight; fetch unit f takes the
// word offsets f, f+NUM_FETCH, ... and writeback unit w serves the entries w,
// w+NUM_WB, ...; each fetch unit has its own memory port and one read is issued per
// port per cycle at most. A fetch stalls while its entry is still occupied.
//
// Interface: cmd_valid/cmd_ready with {src, dst, len}; done pulses one cycle after
// the last write has been accepted. Every port carries one request per cycle.
module copy_unit
  import polynesia_pkg::*;
#(
  parameter int unsigned N_FETCH  = NUM_FETCH,
  parameter int unsigned N_WB     = NUM_WB,
  parameter int unsigned TB_DEPTH = 16
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      cmd_valid,
  output logic      cmd_ready,
  input  copy_cmd_t cmd,
  output logic      busy,
  output logic      done,
  // fetch ports (reads)
  output logic      rd_req_valid [N_FETCH],
  input  logic      rd_req_ready [N_FETCH],
  output mem_req_t  rd_req       [N_FETCH],
  input  logic      rd_rsp_valid [N_FETCH],
  input  mem_rsp_t  rd_rsp       [N_FETCH],
  // writeback ports (writes)
  output logic      wr_req_valid [N_WB],
  input  logic      wr_req_ready [N_WB],
  output mem_req_t  wr_req       [N_WB],
  // statistics
  output logic [31:0] stat_words,
  output logic [7:0]  stat_max_inflight
);
  localparam int unsigned IW = $clog2(TB_DEPTH);

  typedef struct packed {
    logic              busy;
    logic              ready;
    logic [MEM_AW-1:0] dst;
    logic [MEM_DW-1:0] data;
  } tb_entry_t;

  tb_entry_t         tbuf [TB_DEPTH];
  copy_cmd_t         c;
  logic [MEM_AW-1:0] f_off [N_FETCH];   // next offset of each fetch unit
  logic [MEM_AW-1:0] written;

  assign cmd_ready = !busy;

  function automatic logic [IW-1:0] hidx(logic [MEM_AW-1:0] a);
    return a[IW-1:0];   // address modulo TB_DEPTH
  endfunction

  // fetch units
  for (genvar f = 0; f < N_FETCH; f++) begin : g_fetch
    wire [MEM_AW-1:0] a = c.src + f_off[f];
    assign rd_req_valid[f] = busy && (f_off[f] < c.len) && !tbuf[hidx(a)].busy;
    always_comb begin
      rd_req[f]      = '0;
      rd_req[f].addr = a;
    end
  end

  // writeback units: unit w serves entries w, w + N_WB, ...
  logic [IW-1:0] wb_slot [N_WB];
  for (genvar w = 0; w < N_WB; w++) begin : g_wb
    always_comb begin
      wr_req_valid[w] = 1'b0;
      wb_slot[w]      = IW'(w);
      for (int s = TB_DEPTH - N_WB + w; s >= 0; s -= N_WB)
        if (s % N_WB == w && tbuf[s].busy && tbuf[s].ready) begin
          wr_req_valid[w] = 1'b1;
          wb_slot[w]      = IW'(s);
        end
      wr_req[w]       = '0;
      wr_req[w].we    = 1'b1;
      wr_req[w].wmask = '1;
      wr_req[w].addr  = tbuf[wb_slot[w]].dst;
      wr_req[w].wdata = tbuf[wb_slot[w]].data;
    end
  end

  int unsigned n_wr, n_busy;
  always_comb begin
    n_wr = 0;
    for (int w = 0; w < N_WB; w++) if (wr_req_valid[w] && wr_req_ready[w]) n_wr++;
    n_busy = 0;
    for (int s = 0; s < TB_DEPTH; s++) if (tbuf[s].busy) n_busy++;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      busy              <= 1'b0;
      done              <= 1'b0;
      c                 <= '0;
      written           <= '0;
      stat_words        <= '0;
      stat_max_inflight <= '0;
      for (int f = 0; f < N_FETCH; f++) f_off[f] <= '0;
      for (int s = 0; s < TB_DEPTH; s++) tbuf[s] <= '0;
    end else begin
      done <= 1'b0;
      if (cmd_valid && cmd_ready) begin
        c       <= cmd;
        written <= '0;
        busy    <= (cmd.len != '0);
        done    <= (cmd.len == '0);
        for (int f = 0; f < N_FETCH; f++) f_off[f] <= MEM_AW'(f);
      end else if (busy) begin
        // issue reads: allocate the entry chosen by the address index
        for (int f = 0; f < N_FETCH; f++)
          if (rd_req_valid[f] && rd_req_ready[f]) begin
            tbuf[hidx(c.src + f_off[f])].busy  <= 1'b1;
            tbuf[hidx(c.src + f_off[f])].ready <= 1'b0;
            tbuf[hidx(c.src + f_off[f])].dst   <= c.dst + f_off[f];
            f_off[f] <= f_off[f] + MEM_AW'(N_FETCH);
          end
        // returning reads: index lookup, set ready bit
        for (int f = 0; f < N_FETCH; f++)
          if (rd_rsp_valid[f]) begin
            tbuf[hidx(rd_rsp[f].addr)].ready <= 1'b1;
            tbuf[hidx(rd_rsp[f].addr)].data  <= rd_rsp[f].rdata;
          end
        // writes accepted free their entries
        for (int w = 0; w < N_WB; w++)
          if (wr_req_valid[w] && wr_req_ready[w]) tbuf[wb_slot[w]].busy <= 1'b0;
        written    <= written + MEM_AW'(n_wr);
        stat_words <= stat_words + n_wr;
        if (written + MEM_AW'(n_wr) == c.len) begin
          busy <= 1'b0;
          done <= 1'b1;
        end
      end
      if (8'(n_busy) > stat_max_inflight) stat_max_inflight <= 8'(n_busy);
    end
  end

  a_rsp_hits_busy_entry: assert property (@(posedge clk) disable iff (!rst_n)
    rd_rsp_valid[0] |-> tbuf[hidx(rd_rsp[0].addr)].busy && !tbuf[hidx(rd_rsp[0].addr)].ready);
endmodule
