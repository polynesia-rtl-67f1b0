// hash_unit: second stage of the update shipping unit. For every final-log entry it
// finds, in a hash index kept in memory on the (column,row) record key, the address
// of the column buffer the update belongs to, and hands the results on in the same
// commit order the entries arrived in.
//
// Structure (as in the paper): a front-end (FE) engine takes the next final-log
// entry, computes the hash with a modulo (key mod NUM_BUCKETS), forms the bucket
// address and allocates an entry holding the bucket address and a ready bit in a
// small reorder buffer (RB). It then hands the lookup to one of N_PROBE (4) probe
// units, which walk the bucket lists in memory concurrently and may finish out of
// order. A finished lookup sets its RB entry's ready bit; the RB releases entries
// only from its head, so the output keeps commit order.
//
// Own choices: ROB_DEPTH (8), NUM_BUCKETS (1024, a power of two is not required),
// the bucket table base address as an input, the lowest-numbered free probe unit
// gets the next lookup. The FE issues at most one lookup per cycle, and only when an
// RB slot and a probe unit are both free.
module hash_unit
  import polynesia_pkg::*;
#(
  parameter int unsigned N_PROBE     = 4,
  parameter int unsigned ROB_DEPTH   = 8,
  parameter int unsigned NUM_BUCKETS = 1024
) (
  input  logic         clk,
  input  logic         rst_n,
  input  logic [MEM_AW-1:0] table_base,
  // final-log entries in commit order
  input  logic         in_valid,
  output logic         in_ready,
  input  log_entry_t   in_entry,
  // looked-up updates in commit order
  output logic         out_valid,
  input  logic         out_ready,
  output shipped_upd_t out_upd,
  // one memory port per probe unit
  output logic         mem_req_valid [N_PROBE],
  input  logic         mem_req_ready [N_PROBE],
  output mem_req_t     mem_req       [N_PROBE],
  input  logic         mem_rsp_valid [N_PROBE],
  input  mem_rsp_t     mem_rsp       [N_PROBE],
  // statistics
  output logic [31:0]  stat_lookups,
  output logic [31:0]  stat_overlap   // cycles with two or more lookups in flight
);
  localparam int unsigned TW = (ROB_DEPTH > 1) ? $clog2(ROB_DEPTH) : 1;
  localparam int unsigned PW = (N_PROBE > 1) ? $clog2(N_PROBE) : 1;

  typedef struct packed {
    logic              busy;
    logic              ready;
    logic [MEM_AW-1:0] bucket;
    log_entry_t        entry;
    logic              found;
    logic [MEM_AW-1:0] value;
  } rob_entry_t;

  rob_entry_t rob [ROB_DEPTH];
  logic [TW-1:0] head, tail;

  // probe unit wiring
  logic              p_req_valid [N_PROBE];
  logic              p_req_ready [N_PROBE];
  logic              p_res_valid [N_PROBE];
  logic [TW-1:0]     p_res_tag   [N_PROBE];
  logic              p_res_found [N_PROBE];
  logic [MEM_AW-1:0] p_res_value [N_PROBE];

  // front end: hash and bucket address
  wire [KEY_W-1:0]  fe_key    = in_entry.key;
  wire [MEM_AW-1:0] fe_bucket = table_base + MEM_AW'(fe_key % KEY_W'(NUM_BUCKETS));

  logic          free_found;
  logic [PW-1:0] free_idx;
  always_comb begin
    free_found = 1'b0;
    free_idx   = '0;
    for (int p = N_PROBE - 1; p >= 0; p--)
      if (p_req_ready[p]) begin
        free_found = 1'b1;
        free_idx   = PW'(p);
      end
  end

  wire rob_free = !rob[tail].busy;
  assign in_ready = rob_free && free_found;
  wire issue = in_valid && in_ready;

  for (genvar p = 0; p < N_PROBE; p++) begin : g_probe
    assign p_req_valid[p] = issue && (free_idx == PW'(p));
    probe_unit #(.TAG_W(TW)) u_probe (
      .clk, .rst_n,
      .req_valid (p_req_valid[p]), .req_ready(p_req_ready[p]),
      .req_tag   (tail), .req_key(fe_key), .req_bucket(fe_bucket),
      .res_valid (p_res_valid[p]), .res_ready(1'b1),
      .res_tag   (p_res_tag[p]), .res_found(p_res_found[p]), .res_value(p_res_value[p]),
      .res_hops  (),
      .mem_req_valid(mem_req_valid[p]), .mem_req_ready(mem_req_ready[p]), .mem_req(mem_req[p]),
      .mem_rsp_valid(mem_rsp_valid[p]), .mem_rsp(mem_rsp[p])
    );
  end

  // in-order release from the head
  assign out_valid       = rob[head].busy && rob[head].ready;
  assign out_upd.entry   = rob[head].entry;
  assign out_upd.found   = rob[head].found;
  assign out_upd.col_buf = rob[head].value;
  wire retire = out_valid && out_ready;

  function automatic logic [TW-1:0] inc(logic [TW-1:0] p);
    return (p == TW'(ROB_DEPTH - 1)) ? '0 : p + 1'b1;
  endfunction

  int unsigned inflight;
  always_comb begin
    inflight = 0;
    for (int p = 0; p < N_PROBE; p++) if (!p_req_ready[p]) inflight++;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int i = 0; i < ROB_DEPTH; i++) rob[i] <= '0;
      head         <= '0;
      tail         <= '0;
      stat_lookups <= '0;
      stat_overlap <= '0;
    end else begin
      if (issue) begin
        rob[tail].busy   <= 1'b1;
        rob[tail].ready  <= 1'b0;
        rob[tail].bucket <= fe_bucket;
        rob[tail].entry  <= in_entry;
        tail             <= inc(tail);
        stat_lookups     <= stat_lookups + 1;
      end
      for (int p = 0; p < N_PROBE; p++)
        if (p_res_valid[p]) begin
          rob[p_res_tag[p]].ready <= 1'b1;
          rob[p_res_tag[p]].found <= p_res_found[p];
          rob[p_res_tag[p]].value <= p_res_value[p];
        end
      if (retire) begin
        rob[head].busy <= 1'b0;
        head           <= inc(head);
      end
      if (inflight >= 2) stat_overlap <= stat_overlap + 1;
    end
  end

  a_issue_to_free_slot: assert property (@(posedge clk) disable iff (!rst_n)
    issue |-> !rob[tail].busy);
endmodule
