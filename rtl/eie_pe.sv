// eie_pe: one PE of the EIE-like SpMM sub-accelerator.
//
// The PE owns output column n.  Its B buffer (kept in the core) holds column n
// of B, either compressed (row_ids + values, mode 0) or dense (mode 1).  For
// every (position k, value a) broadcast on the bus the index comparison
// decides whether a nonzero of B meets it: in mode 0 the PE walks a pointer
// through its row_ids and matches when row_id[ptr] == k; in mode 1 every bus
// word (already a nonzero of compressed A) matches B[k][n].  Matches are
// pushed into the MAC queue; the MAC pops one entry per cycle and accumulates
// into the PE's output register.  `clear` starts a new output row.
//
// Lookup ports: the core returns b_crd_ptr/b_val_ptr for the PE's pointer and
// b_val_dense for the bus position.  `idle` is high when the queue is empty.
// `q_full` stops the bus (it cannot fill at one bus word per cycle, but the
// handshake is kept so the MAC may be made slower).
module eie_pe
  import aespa_pkg::*;
#(
  parameter int QDEPTH = 4
) (
  input  logic  clk,
  input  logic  rst_n,
  input  logic  clear,
  input  logic  mode,
  input  logic  bus_valid,
  input  crd_t  bus_k,
  input  data_t bus_v,
  input  cnt_t  b_cnt,
  output cnt_t  ptr,
  input  crd_t  b_crd_ptr,
  input  data_t b_val_ptr,
  input  data_t b_val_dense,
  output logic  q_full,
  output logic  idle,
  output data_t acc
);
  typedef struct packed { data_t a; data_t b; } mac_op_t;

  logic    match;
  mac_op_t push_op, head;
  logic    empty;
  logic [$clog2(QDEPTH+1)-1:0] q_count;

  // Index comparison.
  always_comb begin
    match   = 1'b0;
    push_op = '{a: bus_v, b: b_val_ptr};
    if (bus_valid && !clear) begin
      if (mode) begin
        match   = 1'b1;
        push_op = '{a: bus_v, b: b_val_dense};
      end else begin
        match = (ptr < b_cnt) && (b_crd_ptr == bus_k);
      end
    end
  end

  sync_fifo #(.T(mac_op_t), .DEPTH(QDEPTH)) u_macq (
    .clk, .rst_n,
    .push(match), .push_data(push_op), .full(q_full),
    .pop(!empty), .head, .empty, .count(q_count)
  );

  always_ff @(posedge clk) begin
    if (!rst_n || clear) begin
      ptr <= '0;
      acc <= '0;
    end else begin
      if (match && !mode) ptr <= ptr + 1'b1;
      if (!empty) acc <= acc + data_t'(head.a * head.b);
    end
  end

  assign idle = empty;
  // q_count is kept for the occupancy assertion only.
  a_q_bound: assert property (@(posedge clk) disable iff (!rst_n) int'(q_count) <= QDEPTH);
endmodule
