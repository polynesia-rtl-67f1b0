// bitonic_sorter_tb: sorts batches of random values (with many duplicates) of
// 1000, 1024 and 1 entries and compares the output with a reference sort; checks that
// each output tag points back at its own value (nothing lost or duplicated) and that
// a sort takes log2(N)*(log2(N)+1)/2 = 55 cycles.
module bitonic_sorter_tb;
  localparam int N = 1024, KW = 32, TW = 10;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic in_valid, in_ready, start, busy, out_valid, out_ready;
  logic [KW-1:0] in_key, out_key;
  logic [TW-1:0] in_tag, out_tag;
  logic [$clog2(N+1)-1:0] count;
  logic [15:0] sort_cycles;

  bitonic_sorter #(.N(N), .KEY_W(KW), .TAG_W(TW)) dut (.*);

  int checks = 0, failures = 0;

  task automatic run(int n, int range);
    logic [KW-1:0] vals [$];
    logic [KW-1:0] ref_q [$];
    bit seen [N];
    int cyc;
    for (int i = 0; i < n; i++) begin
      vals.push_back((range == 0) ? $urandom : $urandom_range(0, range));
      seen[i] = 0;
    end
    if (n > 1) vals[0] = 32'hFFFF_FFFF;      // the largest key must not clash with padding
    ref_q = vals; ref_q.sort();
    for (int i = 0; i < n; i++) begin
      @(negedge clk); in_valid = 1; in_key = vals[i]; in_tag = TW'(i);
      @(posedge clk); while (!in_ready) @(posedge clk);
    end
    @(negedge clk); in_valid = 0; start = 1;
    @(negedge clk); start = 0;
    cyc = 0;
    while (!out_valid) begin @(posedge clk); cyc++; end
    checks++;
    if (sort_cycles != 55) begin failures++; $display("sort took %0d cycles", sort_cycles); end
    for (int i = 0; i < n; i++) begin
      @(negedge clk); out_ready = 1;
      checks += 2;
      if (out_key !== ref_q[i]) begin failures++; if (failures < 6) $display("pos %0d got %0h exp %0h", i, out_key, ref_q[i]); end
      if (vals[out_tag] !== out_key || seen[out_tag]) failures++;
      seen[out_tag] = 1;
      @(posedge clk);
    end
    @(negedge clk); out_ready = 0;
    repeat (2) @(posedge clk);
  endtask

  initial begin
    in_valid = 0; start = 0; out_ready = 0; in_key = 0; in_tag = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    run(1000, 40);
    run(1024, 0);
    run(1, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
