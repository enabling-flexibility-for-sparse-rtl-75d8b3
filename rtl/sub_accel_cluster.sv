// sub_accel_cluster: one sub-accelerator cluster of the heterogeneous accelerator.
//
// Wraps one sub-accelerator core (chosen by KIND: TPU-, EIE-, ExTensor- or
// OuterSPACE-like) with the engine that feeds it from the global scratchpad.
// On `start` it takes a task, copies the operand image regions named in
// task.regions from the scratchpad slices a_slice/b_slice (A regions from
// a_base, B regions from b_base, region r at offset (r mod 3)*256) into the
// core's local buffer over the read NoC, starts the core, and sends the 256
// output words over the write NoC to o_slice at o_base+idx, as plain writes or
// as accumulations (merging partial outputs).  Requests wait while the NoC
// does not grant them; read data returns one cycle after the grant.  `busy`
// covers the whole task.  The load/compute/store sequencing is this design's;
// the paper fixes only that each core computes out of its own local buffer.
module sub_accel_cluster
  import aespa_pkg::*;
#(
  parameter cluster_e KIND = CL_TPU
) (
  input  logic      clk,
  input  logic      rst_n,
  input  logic      start,
  input  task_t     start_task,
  output logic      busy,
  output logic      task_done,
  // read NoC requester
  output logic      rd_req_valid,
  output slice_t    rd_req_tgt,
  output addr_t     rd_req_addr,
  input  logic      rd_grant,
  input  logic      rd_rsp_valid,
  input  data_t     rd_rsp_data,
  // write NoC requester
  output logic      wr_req_valid,
  output slice_t    wr_req_tgt,
  output owr_t      wr_req_data,
  input  logic      wr_grant
);
  typedef enum logic [2:0] {S_IDLE, S_LOAD, S_LWAIT, S_START, S_RUN} state_e;
  state_e state;

  task_t      tq;
  logic [2:0] r;
  idx_t       idx;
  logic [2:0] pend_r;
  idx_t       pend_idx;
  lb_wr_t     lb_wr;
  logic       core_start, core_busy, core_done, out_valid;
  out_word_t  out_word;

  logic       region_last_word;
  assign region_last_word = (int'(idx) == int'(region_words(int'(r))) - 1);

  // Read request for the current word of the current region.
  always_comb begin
    rd_req_valid = (state == S_LOAD) && tq.regions[r];
    rd_req_tgt   = (r < 3'd3) ? tq.a_slice : tq.b_slice;
    rd_req_addr  = ((r < 3'd3) ? tq.a_base : tq.b_base)
                   + addr_t'((int'(r) % 3) * REG_WORDS) + addr_t'(idx);
  end

  // Returned word goes into the local buffer.
  always_comb begin
    lb_wr.en     = rd_rsp_valid;
    lb_wr.region = lb_region_e'(pend_r);
    lb_wr.idx    = pend_idx;
    lb_wr.data   = rd_rsp_data;
  end

  always_ff @(posedge clk) begin
    if (rd_req_valid && rd_grant) begin
      pend_r   <= r;
      pend_idx <= idx;
    end
  end

  always_ff @(posedge clk) begin
    task_done <= 1'b0;
    if (!rst_n) begin
      state <= S_IDLE;
      tq    <= '0;
      r     <= '0;
      idx   <= '0;
    end else begin
      unique case (state)
        S_IDLE: if (start) begin
          tq    <= start_task;
          r     <= '0;
          idx   <= '0;
          state <= S_LOAD;
        end
        S_LOAD: begin
          if (!tq.regions[r] || (rd_grant && region_last_word)) begin
            idx <= '0;
            r   <= r + 1'b1;
            if (r == 3'd5) state <= S_LWAIT;
          end else if (rd_grant) begin
            idx <= idx + 1'b1;
          end
        end
        S_LWAIT: state <= S_START;      // last read word is written this cycle
        S_START: state <= S_RUN;
        S_RUN: if (core_done) begin
          state     <= S_IDLE;
          task_done <= 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

  assign core_start = (state == S_START);
  assign busy       = (state != S_IDLE);

  assign wr_req_valid = out_valid;
  assign wr_req_tgt   = tq.o_slice;
  assign wr_req_data  = '{addr: tq.o_base + addr_t'(out_word.idx), data: out_word.data, accum: tq.o_accum};

  if (KIND == CL_TPU) begin : g_core
    tpu_core u_core (.clk, .rst_n, .lb_wr, .start(core_start), .busy(core_busy), .done(core_done),
                     .out_valid, .out_ready(wr_grant), .out_word);
  end else if (KIND == CL_EIE) begin : g_core
    eie_core u_core (.clk, .rst_n, .lb_wr, .mode(tq.mode), .start(core_start), .busy(core_busy),
                     .done(core_done), .out_valid, .out_ready(wr_grant), .out_word);
  end else if (KIND == CL_EXT) begin : g_core
    extensor_core u_core (.clk, .rst_n, .lb_wr, .start(core_start), .busy(core_busy), .done(core_done),
                          .out_valid, .out_ready(wr_grant), .out_word);
  end else begin : g_core
    outerspace_core u_core (.clk, .rst_n, .lb_wr, .start(core_start), .busy(core_busy), .done(core_done),
                            .out_valid, .out_ready(wr_grant), .out_word);
  end

  a_rsp_expected: assert property (@(posedge clk) disable iff (!rst_n)
    (rd_req_valid && rd_grant) |=> rd_rsp_valid);
  a_core_busy_in_run: assert property (@(posedge clk) disable iff (!rst_n)
    (state == S_RUN && !core_done) |-> core_busy);
endmodule
