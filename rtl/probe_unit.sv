// probe_unit: one hash-index probe engine of the update shipping unit's hash unit.
//
// It takes a lookup (a record key and the address of its hash bucket, computed by the
// front-end engine), reads the bucket word from memory and then walks the bucket's
// linked list of nodes, one memory read per node, until it finds a node whose key
// matches or reaches the end of the list. It then reports the node's value (the
// column-buffer address) or "not found", tagged with the reorder-buffer slot the
// front end gave it. The paper describes the unit as a simple finite-state machine
// doing exactly this; the node layout (key, value, next pointer in lanes 0-2 of a
// word, bucket word holding the first node address, 0 = end of list) is this
// design's own.
//
// Timing: one lookup at a time; a lookup costs one read for the bucket plus one per
// node visited, each waiting for its memory response. Result valid is held until
// accepted (res_ready).
module probe_unit
  import polynesia_pkg::*;
#(
  parameter int unsigned TAG_W = 3
) (
  input  logic              clk,
  input  logic              rst_n,
  input  logic              req_valid,
  output logic              req_ready,
  input  logic [TAG_W-1:0]  req_tag,
  input  logic [KEY_W-1:0]  req_key,
  input  logic [MEM_AW-1:0] req_bucket,
  output logic              res_valid,
  input  logic              res_ready,
  output logic [TAG_W-1:0]  res_tag,
  output logic              res_found,
  output logic [MEM_AW-1:0] res_value,
  output logic [15:0]       res_hops,    // nodes visited, for statistics
  // memory port
  output logic              mem_req_valid,
  input  logic              mem_req_ready,
  output mem_req_t          mem_req,
  input  logic              mem_rsp_valid,
  input  mem_rsp_t          mem_rsp
);
  typedef enum logic [2:0] {S_IDLE, S_RD_BUCKET, S_WT_BUCKET, S_RD_NODE, S_WT_NODE, S_DONE} state_e;
  state_e state;

  logic [KEY_W-1:0]  key_q;
  logic [MEM_AW-1:0] addr_q;

  assign req_ready     = (state == S_IDLE);
  assign res_valid     = (state == S_DONE);
  assign mem_req_valid = (state == S_RD_BUCKET) || (state == S_RD_NODE);
  always_comb begin
    mem_req       = '0;
    mem_req.we    = 1'b0;
    mem_req.addr  = addr_q;
  end

  wire [KEY_W-1:0]  node_key  = mem_rsp.rdata[KEY_W-1:0];
  wire [MEM_AW-1:0] node_val  = mem_rsp.rdata[32 +: MEM_AW];
  wire [MEM_AW-1:0] node_next = mem_rsp.rdata[64 +: MEM_AW];
  wire [MEM_AW-1:0] bkt_head  = mem_rsp.rdata[MEM_AW-1:0];

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state     <= S_IDLE;
      key_q     <= '0;
      addr_q    <= '0;
      res_tag   <= '0;
      res_found <= 1'b0;
      res_value <= '0;
      res_hops  <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (req_valid) begin
          key_q    <= req_key;
          addr_q   <= req_bucket;
          res_tag  <= req_tag;
          res_hops <= '0;
          state    <= S_RD_BUCKET;
        end
        S_RD_BUCKET: if (mem_req_ready) state <= S_WT_BUCKET;
        S_WT_BUCKET: if (mem_rsp_valid) begin
          if (bkt_head == '0) begin
            res_found <= 1'b0;
            res_value <= '0;
            state     <= S_DONE;
          end else begin
            addr_q <= bkt_head;
            state  <= S_RD_NODE;
          end
        end
        S_RD_NODE: if (mem_req_ready) state <= S_WT_NODE;
        S_WT_NODE: if (mem_rsp_valid) begin
          res_hops <= res_hops + 1'b1;
          if (node_key == key_q) begin
            res_found <= 1'b1;
            res_value <= node_val;
            state     <= S_DONE;
          end else if (node_next == '0) begin
            res_found <= 1'b0;
            res_value <= '0;
            state     <= S_DONE;
          end else begin
            addr_q <= node_next;
            state  <= S_RD_NODE;
          end
        end
        S_DONE: if (res_ready) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_rsp_only_when_waiting: assert property (@(posedge clk) disable iff (!rst_n)
    mem_rsp_valid |-> (state == S_WT_BUCKET || state == S_WT_NODE));
endmodule
