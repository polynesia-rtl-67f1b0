// hash_unit_tb: fills a (column,row) hash index in a memory model with chains of
// several nodes, streams 400 final-log entries (some keys absent) through the hash
// unit with a randomly stalling consumer and memory, and checks that every result
// leaves in input (commit) order with the right column-buffer address, and that
// lookups really overlapped in the four probe units.
module hash_unit_tb;
  import polynesia_pkg::*;
  localparam int NB = 64, NP = 4, N = 400;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, out_valid, out_ready;
  log_entry_t in_entry;
  shipped_upd_t out_upd;
  logic mem_req_valid [NP], mem_req_ready [NP], mem_rsp_valid [NP];
  mem_req_t mem_req [NP];
  mem_rsp_t mem_rsp [NP];
  logic [31:0] stat_lookups, stat_overlap;
  logic [MEM_AW-1:0] table_base = 32'h200;

  hash_unit #(.N_PROBE(NP), .ROB_DEPTH(8), .NUM_BUCKETS(NB)) dut (.*);
  mem_model #(.NPORTS(NP), .LAT_MAX(6)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid),
    .req_ready(mem_req_ready), .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  int checks = 0, failures = 0;
  logic [KEY_W-1:0] keys [256];
  log_entry_t sent [$];

  function automatic logic [MEM_AW-1:0] val_of(logic [KEY_W-1:0] k);
    return 32'h0080_0000 + {24'd0, k[ROW_W +: COL_W]} * 32'h1000;  // one buffer per column
  endfunction

  task automatic build();
    logic [MEM_AW-1:0] head [NB];
    int unsigned nn = 32'h8000;
    for (int b = 0; b < NB; b++) head[b] = '0;
    for (int i = 0; i < 256; i++) begin
      int b;
      keys[i] = {COL_W'($urandom_range(0, 15)), ROW_W'($urandom_range(0, 1 << 20))};
      b = keys[i] % NB;
      u_mem.write_word(nn, make_node(keys[i], val_of(keys[i]), head[b]));
      head[b] = nn; nn++;
    end
    for (int b = 0; b < NB; b++) u_mem.write_word(table_base + b, MEM_DW'(head[b]));
  endtask

  function automatic bit present(logic [KEY_W-1:0] k);
    for (int i = 0; i < 256; i++) if (keys[i] == k) return 1;
    return 0;
  endfunction

  initial begin
    int got = 0;
    in_valid = 0; out_ready = 0; in_entry = '0;
    build();
    repeat (3) @(posedge clk); rst_n = 1;
    fork
      begin
        for (int i = 0; i < N; i++) begin
          log_entry_t e;
          e.commit_id = i; e.utype = UPD_MODIFY; e.data = $urandom;
          e.key = ($urandom_range(0, 4) == 0) ? rec_key_t'({8'hEE, ROW_W'(i)}) : keys[$urandom_range(0, 255)];
          @(negedge clk); in_valid = 1; in_entry = e;
          @(posedge clk); while (!in_ready) @(posedge clk);
          sent.push_back(e);
        end
        @(negedge clk); in_valid = 0;
      end
      begin
        while (got < N) begin
          @(negedge clk); out_ready = ($urandom_range(0, 3) != 0);
          @(posedge clk);
          if (out_valid && out_ready) begin
            log_entry_t e;
            bit pf;
            wait (sent.size() > 0);
            e = sent.pop_front();
            pf = present(e.key);
            checks += 2;
            if (out_upd.entry !== e) begin failures++; if (failures < 5) $display("order broken at %0d", got); end
            if (out_upd.found !== pf || (pf && out_upd.col_buf !== val_of(e.key))) begin
              failures++; if (failures < 5) $display("wrong lookup at %0d", got);
            end
            got++;
          end
        end
      end
    join
    checks += 2;
    if (stat_lookups != N) failures++;
    if (stat_overlap == 0) begin failures++; $display("no overlapping lookups"); end
    $display("overlap cycles %0d", stat_overlap);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (100000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
