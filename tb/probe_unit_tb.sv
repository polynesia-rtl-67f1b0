// probe_unit_tb: builds hash buckets with lists of 0 to 3 nodes in a memory model
// and checks that the probe unit finds every present key with the right value,
// reports absent keys as not found, visits the expected number of nodes and
// returns the caller's tag.
module probe_unit_tb;
  import polynesia_pkg::*;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic req_valid, req_ready, res_valid, res_ready, res_found;
  logic [2:0] req_tag, res_tag;
  logic [KEY_W-1:0] req_key;
  logic [MEM_AW-1:0] req_bucket, res_value;
  logic [15:0] res_hops;
  logic mem_req_valid [1], mem_req_ready [1], mem_rsp_valid [1];
  mem_req_t mem_req [1];
  mem_rsp_t mem_rsp [1];

  probe_unit #(.TAG_W(3)) dut (
    .clk, .rst_n, .req_valid, .req_ready, .req_tag, .req_key, .req_bucket,
    .res_valid, .res_ready, .res_tag, .res_found, .res_value, .res_hops,
    .mem_req_valid(mem_req_valid[0]), .mem_req_ready(mem_req_ready[0]), .mem_req(mem_req[0]),
    .mem_rsp_valid(mem_rsp_valid[0]), .mem_rsp(mem_rsp[0]));
  mem_model #(.NPORTS(1)) u_mem (.clk, .rst_n, .req_valid(mem_req_valid), .req_ready(mem_req_ready),
    .req(mem_req), .rsp_valid(mem_rsp_valid), .rsp(mem_rsp));

  int checks = 0, failures = 0;
  localparam logic [MEM_AW-1:0] TBL = 32'h100, NODES = 32'h4000;
  int unsigned next_node = NODES;

  // bucket b holds keys b*1000 + 1 .. b*1000 + (b % 4), value = key * 16
  task automatic build();
    for (int b = 0; b < 8; b++) begin
      logic [MEM_AW-1:0] head = '0;
      for (int k = 1; k <= b % 4; k++) begin
        u_mem.write_word(next_node, make_node(KEY_W'(b * 1000 + k), MEM_AW'((b * 1000 + k) * 16), head));
        head = next_node;
        next_node++;
      end
      u_mem.write_word(TBL + b, MEM_DW'(head));
    end
  endtask

  task automatic probe(int b, int unsigned key, bit exp_found, int exp_hops);
    @(negedge clk);
    req_valid = 1; req_key = key; req_bucket = TBL + b; req_tag = 3'(b);
    @(posedge clk); while (!req_ready) @(posedge clk);
    @(negedge clk); req_valid = 0;
    res_ready = 1;
    @(posedge clk); while (!res_valid) @(posedge clk);
    checks += 4;
    if (res_found !== exp_found) begin failures++; $display("key %0d found=%0d", key, res_found); end
    if (exp_found && res_value !== key * 16) begin failures++; $display("key %0d value %0h", key, res_value); end
    if (res_hops !== 16'(exp_hops)) begin failures++; $display("key %0d hops %0d exp %0d", key, res_hops, exp_hops); end
    if (res_tag !== 3'(b)) failures++;
    @(negedge clk); res_ready = 0;
  endtask

  initial begin
    req_valid = 0; res_ready = 0; req_key = 0; req_bucket = 0; req_tag = 0;
    build();
    repeat (3) @(posedge clk); rst_n = 1;
    for (int b = 0; b < 8; b++) begin
      int n;
      n = b % 4;
      // keys were pushed at the head, so key k sits at position n - k + 1
      for (int k = 1; k <= n; k++) probe(b, b * 1000 + k, 1, n - k + 1);
      probe(b, b * 1000 + 77, 0, n);
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
