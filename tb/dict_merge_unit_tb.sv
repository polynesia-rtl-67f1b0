// dict_merge_unit_tb: merges a sorted old dictionary with sorted update values
// (some equal to old entries, some repeated) and checks the new dictionary, the
// old-code -> new-code index, the code of every update, the code width and the
// linear-scan time of one value per cycle, against a reference computed here.
module dict_merge_unit_tb;
  localparam int VW = 32, DAW = 11, TW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic start, busy, done, upd_valid, upd_ready;
  logic [DAW:0] old_size, new_size;
  logic [TW:0] upd_total;
  logic [DAW-1:0] old_idx, dict_widx, idx_old, idx_new, code_val;
  logic [VW-1:0] old_val, upd_val, dict_wval;
  logic [TW-1:0] upd_tag, code_tag;
  logic dict_we, idx_we, code_we;
  logic [5:0] code_bits;

  dict_merge_unit #(.VAL_W(VW), .DICT_AW(DAW), .TAG_W(TW)) dut (.*);

  int checks = 0, failures = 0;
  logic [VW-1:0] old_d [$], upd_s [$], new_d [$];
  logic [VW-1:0] got_d [2048];
  logic [DAW-1:0] got_idx [2048], got_code [1024];
  int ui;

  assign old_val = old_d[old_idx];

  always @(posedge clk) begin
    if (dict_we) got_d[dict_widx] <= dict_wval;
    if (idx_we) got_idx[idx_old] <= idx_new;
    if (code_we) got_code[code_tag] <= code_val;
    if (upd_valid && upd_ready) ui <= ui + 1;
  end
  always_comb begin
    upd_val = (ui < upd_s.size()) ? upd_s[ui] : '0;
    upd_tag = TW'(ui);
  end

  function automatic int find(logic [VW-1:0] v);
    for (int i = 0; i < new_d.size(); i++) if (new_d[i] == v) return i;
    return -1;
  endfunction

  task automatic run(int nold, int nupd);
    logic [VW-1:0] all [$];
    int t0, t1, bits;
    old_d.delete(); upd_s.delete(); new_d.delete();
    for (int i = 0; i < nold; i++) old_d.push_back(i * 10 + 5);
    for (int i = 0; i < nupd; i++)
      upd_s.push_back(($urandom_range(0, 2) == 0) ? (($urandom_range(0, nold + 3)) * 10 + 5) : $urandom_range(0, nold * 10 + 50));
    upd_s.sort();
    all = {old_d, upd_s}; all.sort();
    foreach (all[i]) if (new_d.size() == 0 || new_d[new_d.size()-1] != all[i]) new_d.push_back(all[i]);
    ui = 0;
    @(negedge clk); old_size = nold; upd_total = nupd; start = 1;
    @(negedge clk); start = 0;
    t0 = $time;
    @(posedge clk); while (!done) begin
      upd_valid = ($urandom_range(0, 4) != 0) || 1'b0;
      @(posedge clk);
    end
    t1 = $time;
    checks += 2;
    if (new_size != new_d.size()) begin failures++; $display("size %0d exp %0d", new_size, new_d.size()); end
    bits = 1; while ((1 << bits) < new_d.size()) bits++;
    if (code_bits != bits) begin failures++; $display("bits %0d exp %0d", code_bits, bits); end
    foreach (new_d[i]) begin checks++; if (got_d[i] !== new_d[i]) failures++; end
    foreach (old_d[i]) begin checks++; if (int'(got_idx[i]) != find(old_d[i])) failures++; end
    foreach (upd_s[i]) begin checks++; if (int'(got_code[i]) != find(upd_s[i])) failures++; end
    checks++;
    if ((t1 - t0) / 10 > (nold + nupd) * 5 / 4 + 40) begin failures++; $display("merge took %0d cycles", (t1 - t0) / 10); end
  endtask

  initial begin
    start = 0; upd_valid = 1; old_size = 0; upd_total = 0; ui = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(32, 1000);
    run(0, 17);
    run(100, 0);
    run(500, 1024);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (40000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
