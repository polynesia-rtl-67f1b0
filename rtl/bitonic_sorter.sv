// bitonic_sorter: the sort unit of the update application unit. It sorts up to N
// (1024) (key, tag) pairs in ascending key order; the tag travels with its key so
// the caller knows where each sorted value came from.
//
// The paper uses a 1024-value bitonic sorter, a network of compare-exchange
// elements that builds ever longer bitonic sequences and merges them. This
// implementation keeps the N entries in a register array and applies one stage of
// that network per clock cycle: in stage (k, j) every element i is compared with
// element i xor j and the pair is put in ascending order when bit k of i is 0 and in
// descending order otherwise. Since j and k are powers of two, each element only
// chooses among log2(N) partners. Running one stage per cycle instead of unrolling
// all stages in space is this design's choice, made to keep the area near one
// column of comparators.
//
// Use: push up to N pairs (in_valid/in_ready) while idle, pulse start, wait for
// out_valid, then pop the sorted pairs (out_valid/out_ready) - exactly as many as
// were pushed. Unused slots are padded with a flag that sorts them last. Sorting
// takes log2(N)*(log2(N)+1)/2 cycles (55 for N = 1024) after start.
module bitonic_sorter #(
  parameter int unsigned N     = 1024,
  parameter int unsigned KEY_W = 32,
  parameter int unsigned TAG_W = 10
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             in_valid,
  output logic             in_ready,
  input  logic [KEY_W-1:0] in_key,
  input  logic [TAG_W-1:0] in_tag,
  input  logic             start,
  output logic             busy,
  output logic             out_valid,
  input  logic             out_ready,
  output logic [KEY_W-1:0] out_key,
  output logic [TAG_W-1:0] out_tag,
  output logic [$clog2(N+1)-1:0] count,
  output logic [15:0]      sort_cycles
);
  localparam int unsigned LOGN = $clog2(N);
  localparam int unsigned LW   = (LOGN > 1) ? $clog2(LOGN + 1) : 1;
  localparam int unsigned IW   = $clog2(N+1);

  typedef struct packed {
    logic             pad;
    logic [KEY_W-1:0] key;
    logic [TAG_W-1:0] tag;
  } elem_t;

  typedef enum logic [1:0] {S_LOAD, S_SORT, S_OUT} state_e;
  state_e state;

  elem_t arr [N];
  logic [IW-1:0] cnt, rd;
  logic [LW-1:0] kb, jb;   // stage (k, j) = (2^kb, 2^jb), kb = 1..LOGN, jb = kb-1..0

  assign in_ready  = (state == S_LOAD) && (cnt != IW'(N));
  assign busy      = (state == S_SORT);
  assign out_valid = (state == S_OUT) && (rd != cnt);
  assign out_key   = arr[rd[LOGN-1:0]].key;
  assign out_tag   = arr[rd[LOGN-1:0]].tag;
  assign count     = cnt;

  // one compare-exchange stage of the network
  elem_t nxt [N];
  always_comb begin
    for (int i = 0; i < N; i++) begin
      elem_t mine, other;
      logic  lower, asc, gt;
      mine  = arr[i];
      other = arr[i];
      for (int b = 0; b < LOGN; b++)
        if (jb == LW'(b)) other = arr[i ^ (1 << b)];
      lower = ((i >> jb) & 1) == 0;
      asc   = (kb >= LW'(LOGN)) ? 1'b1 : (((i >> kb) & 1) == 0);
      gt    = mine > other;   // whole entry: tags break ties, so no entry is duplicated
      // lower element of an ascending pair keeps the smaller one, and so on
      if (lower == asc) nxt[i] = gt ? other : mine;
      else              nxt[i] = gt ? mine  : other;
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state       <= S_LOAD;
      cnt         <= '0;
      rd          <= '0;
      kb          <= LW'(1);
      jb          <= '0;
      sort_cycles <= '0;
      for (int i = 0; i < N; i++) arr[i] <= '{pad: 1'b1, key: '1, tag: '0};
    end else begin
      unique case (state)
        S_LOAD: begin
          if (in_valid && in_ready) begin
            arr[cnt[LOGN-1:0]] <= '{pad: 1'b0, key: in_key, tag: in_tag};
            cnt <= cnt + 1'b1;
          end
          if (start) begin
            state       <= S_SORT;
            kb          <= LW'(1);
            jb          <= '0;
            sort_cycles <= '0;
          end
        end
        S_SORT: begin
          for (int i = 0; i < N; i++) arr[i] <= nxt[i];
          sort_cycles <= sort_cycles + 1'b1;
          if (jb == '0) begin
            if (kb == LW'(LOGN)) begin
              state <= S_OUT;
              rd    <= '0;
            end else begin
              kb <= kb + 1'b1;
              jb <= kb;        // next k = 2^(kb+1) starts with j = 2^kb
            end
          end else begin
            jb <= jb - 1'b1;
          end
        end
        S_OUT: begin
          if (out_valid && out_ready) rd <= rd + 1'b1;
          if (rd == cnt) begin
            state <= S_LOAD;
            cnt   <= '0;
            for (int i = 0; i < N; i++) arr[i] <= '{pad: 1'b1, key: '1, tag: '0};
          end
        end
        default: state <= S_LOAD;
      endcase
    end
  end

  a_no_push_while_sorting: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_SORT) |-> !(in_valid && in_ready));
endmodule
