// update_application_unit_tb: builds a dictionary-encoded column (32-value
// dictionary, 1000 rows, one code per 32-bit lane) in a memory model, applies two
// batches of updates - modifies with new and existing values, repeated rows,
// inserts that append rows and deletes (counted, not applied) - and checks the new
// dictionary, the new column decoded row by row against a reference model, the code
// width, the pointer swap, that the old column was left untouched (old snapshots
// stay valid) and the 55-cycle sort.
module update_application_unit_tb;
  import polynesia_pkg::*;
  localparam int MU = 1024, MD = 2048, DAW = 11;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic dict_wr_en, col_init, upd_valid, upd_ready, start, busy, done;
  logic [DAW-1:0] dict_wr_idx, dict_rd_idx;
  logic [DATA_W-1:0] dict_wr_val, dict_rd_val, upd_val;
  logic [DAW:0] dict_wr_size, dict_size;
  logic [MEM_AW-1:0] col_init_ptr, col_ptr, new_col_ptr;
  logic [ROW_W:0] col_init_rows, col_rows;
  logic [5:0] col_code_bits;
  upd_type_e upd_type;
  logic [ROW_W-1:0] upd_row;
  logic mem_req_valid [1], mem_req_ready [1], mem_rsp_valid [1];
  mem_req_t mem_req [1];
  mem_rsp_t mem_rsp [1];
  logic [15:0] stat_sort_cycles;
  logic [31:0] stat_deletes_ignored, stat_inserts;

  update_application_unit #(.MAX_UPD(MU), .MAX_DICT(MD)) dut (
    .clk, .rst_n, .dict_wr_en, .dict_wr_idx, .dict_wr_val, .dict_wr_size, .col_init_ptr,
    .col_init_rows, .col_init, .dict_rd_idx, .dict_rd_val, .dict_size, .col_ptr, .col_rows,
    .col_code_bits, .upd_valid, .upd_ready, .upd_type, .upd_row, .upd_val, .start, .new_col_ptr,
    .busy, .done, .mem_req_valid(mem_req_valid[0]), .mem_req_ready(mem_req_ready[0]),
    .mem_req(mem_req[0]), .mem_rsp_valid(mem_rsp_valid[0]), .mem_rsp(mem_rsp[0]),
    .stat_sort_cycles, .stat_deletes_ignored, .stat_inserts);
  mem_model #(.NPORTS(1)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  int checks = 0, failures = 0;
  logic [DATA_W-1:0] dict_m [$];      // reference dictionary
  logic [DATA_W-1:0] col_v [$];       // reference column, decoded values

  function automatic int code_of(logic [DATA_W-1:0] v);
    for (int i = 0; i < dict_m.size(); i++) if (dict_m[i] == v) return i;
    return -1;
  endfunction

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; $display("FAILED: %s", what); end
  endtask

  task automatic verify(logic [MEM_AW-1:0] base);
    int bits, bad = 0;
    check(dict_size == dict_m.size(), $sformatf("dictionary size %0d exp %0d", dict_size, dict_m.size()));
    foreach (dict_m[i]) begin
      @(negedge clk); dict_rd_idx = DAW'(i); #1;
      checks++; if (dict_rd_val !== dict_m[i]) failures++;
    end
    check(col_rows == col_v.size(), $sformatf("rows %0d exp %0d", col_rows, col_v.size()));
    check(col_ptr == base, "column pointer swapped");
    for (int r = 0; r < col_v.size(); r++) begin
      logic [MEM_DW-1:0] w;
      w = u_mem.read_word(base + r / 4);
      checks++;
      if (int'(w[32*(r%4) +: 32]) != code_of(col_v[r])) begin failures++; if (bad++ < 5) $display("row %0d code %0d exp %0d", r, w[32*(r%4) +: 32], code_of(col_v[r])); end
    end
    bits = 1; while ((1 << bits) < dict_m.size()) bits++;
    check(col_code_bits == bits, "code width");
  endtask

  task automatic batch(int nupd, logic [MEM_AW-1:0] newp);
    logic [DATA_W-1:0] vals [$];
    logic [DATA_W-1:0] all [$];
    logic [MEM_DW-1:0] old_first;
    int ndel = 0;
    old_first = u_mem.read_word(col_ptr);
    for (int i = 0; i < nupd; i++) begin
      upd_type_e t;
      int r;
      logic [DATA_W-1:0] v;
      int k = $urandom_range(0, 19);
      t = (k == 0) ? UPD_DELETE : (k < 3) ? UPD_INSERT : UPD_MODIFY;
      r = (t == UPD_INSERT) ? col_v.size() : $urandom_range(0, col_v.size() - 1);
      if (i < 10) r = 7;  // the same row many times: last one wins
      if (t == UPD_INSERT) r = col_v.size();
      v = ($urandom_range(0, 1) == 1) ? dict_m[$urandom_range(0, dict_m.size() - 1)] : $urandom_range(0, 10000);
      @(negedge clk); upd_valid = 1; upd_type = t; upd_row = ROW_W'(r); upd_val = v;
      @(posedge clk); while (!upd_ready) @(posedge clk);
      if (t == UPD_DELETE) ndel++;
      else begin
        if (t == UPD_INSERT) col_v.push_back(v); else col_v[r] = v;
        vals.push_back(v);
      end
    end
    @(negedge clk); upd_valid = 0;
    all = {dict_m, vals}; all.sort();
    dict_m.delete();
    foreach (all[i]) if (dict_m.size() == 0 || dict_m[dict_m.size()-1] != all[i]) dict_m.push_back(all[i]);
    @(negedge clk); start = 1; new_col_ptr = newp;
    @(negedge clk); start = 0;
    @(posedge clk); while (!done) @(posedge clk);
    check(stat_sort_cycles == 55, $sformatf("sort cycles %0d", stat_sort_cycles));
    check(u_mem.read_word(32'h1000) === old_first || newp != 32'h5000, "old column untouched");
    verify(newp);
    $display("batch of %0d: %0d deletes ignored, %0d inserts", nupd, stat_deletes_ignored, stat_inserts);
  endtask

  initial begin
    dict_wr_en = 0; col_init = 0; upd_valid = 0; start = 0; dict_rd_idx = 0;
    dict_wr_idx = 0; dict_wr_val = 0; dict_wr_size = 0; col_init_ptr = 0; col_init_rows = 0;
    upd_type = UPD_MODIFY; upd_row = 0; upd_val = 0; new_col_ptr = 0;
    for (int i = 0; i < 32; i++) dict_m.push_back(i * 100 + 50);
    for (int r = 0; r < 1000; r++) col_v.push_back(dict_m[$urandom_range(0, 31)]);
    for (int w = 0; w < 250; w++) begin
      logic [MEM_DW-1:0] d;
      for (int l = 0; l < 4; l++) d[32*l +: 32] = code_of(col_v[4*w+l]);
      u_mem.write_word(32'h1000 + w, d);
    end
    repeat (3) @(posedge clk); rst_n = 1;
    for (int i = 0; i < 32; i++) begin
      @(negedge clk); dict_wr_en = 1; dict_wr_idx = DAW'(i); dict_wr_val = dict_m[i];
    end
    @(negedge clk); dict_wr_en = 0; col_init = 1; col_init_ptr = 32'h1000; col_init_rows = 1000; dict_wr_size = 32;
    @(negedge clk); col_init = 0;
    verify(32'h1000);
    batch(300, 32'h5000);
    batch(1024, 32'h9000);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (60000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
