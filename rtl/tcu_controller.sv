// tcu_controller: instruction sequencer of the accelerator.
//
// Takes one 64-bit instruction at a time (layout in tcu_pkg) and runs it to
// completion before taking the next. Every instruction is a stream of
// size+1 vectors from a source to a sink:
//
//   LOADWEIGHTS  local memory  -> weight row k of the systolic array
//   MATMUL       local memory  -> array; array results -> accumulators
//                (overwrite, or add when flag bit 0 is set)
//   DATAMOVE     DRAM0/DRAM1   -> local memory, local -> DRAM0/DRAM1,
//                accumulators -> local, local -> accumulators (write or add)
//   NOP          nothing
//
// These are the steps the compiler schedules for each layer: load weights,
// load activations, compute, save activations. A move that touches DRAM
// first sends one request for the whole block to the DRAM port. Memory
// sources have one cycle of read latency; their data, or the data arriving
// from DRAM, goes through a two-entry skid buffer to the sink, and a read is
// only issued when the buffer is sure to have room. So a block moves one
// vector per cycle and pauses (a stall, counted in stall_cycles) only while
// a DRAM port holds back data or is not ready to take it.
//
// MATMUL finishes when the last array result has been written to the
// accumulators, 2*N cycles after the last vector entered the array.
//
// The published design gives the memories, the array and the
// load/compute/save order; the instruction encoding, the one-instruction-
// at-a-time execution and the skid buffer are this design's own choices.
module tcu_controller #(
  parameter int N           = tcu_pkg::ARRAY_SIZE,
  parameter int VEC_W       = tcu_pkg::VEC_W,
  parameter int LOCAL_DEPTH = tcu_pkg::LOCAL_DEPTH,
  parameter int ACC_DEPTH   = tcu_pkg::ACC_DEPTH,
  localparam int LAW        = $clog2(LOCAL_DEPTH),
  localparam int AAW        = $clog2(ACC_DEPTH)
) (
  input  logic                clk,
  input  logic                rst_n,
  // instruction stream
  input  logic                instr_valid,
  output logic                instr_ready,
  input  tcu_pkg::instr_t     instr,
  // local memory
  output logic                lm_we,
  output logic [LAW-1:0]      lm_waddr,
  output logic [VEC_W-1:0]    lm_wdata,
  output logic                lm_re,
  output logic [LAW-1:0]      lm_raddr,
  input  logic [VEC_W-1:0]    lm_rdata,
  // accumulators
  output logic                acc_req_valid,
  output logic                acc_req_write,
  output logic                acc_req_acc,
  output logic [AAW-1:0]      acc_req_addr,
  output logic [VEC_W-1:0]    acc_req_wdata,
  input  logic                acc_rvalid,
  input  logic [VEC_W-1:0]    acc_rdata,
  // systolic array
  output logic                arr_w_valid,
  output logic [$clog2(N)-1:0] arr_w_row,
  output logic [VEC_W-1:0]    arr_w_vec,
  output logic                arr_in_valid,
  output logic [VEC_W-1:0]    arr_in_vec,
  input  logic                arr_out_valid,
  input  logic [VEC_W-1:0]    arr_out_vec,
  // DRAM ports 0 and 1
  output logic                dram_req_valid [2],
  input  logic                dram_req_ready [2],
  output tcu_pkg::dram_req_t  dram_req       [2],
  output logic                dram_wvalid    [2],
  input  logic                dram_wready    [2],
  output logic [VEC_W-1:0]    dram_wdata     [2],
  input  logic                dram_rvalid    [2],
  output logic                dram_rready    [2],
  input  logic [VEC_W-1:0]    dram_rdata     [2],
  // status
  output logic                busy,
  output logic [31:0]         instr_count,
  output logic [31:0]         stall_cycles
);
  import tcu_pkg::*;

  typedef enum logic [1:0] {S_IDLE, S_REQ, S_RUN} state_e;
  typedef enum logic [1:0] {SRC_LOCAL, SRC_ACC, SRC_DRAM} src_e;
  typedef enum logic [2:0] {DST_LOCAL, DST_ACC, DST_DRAM, DST_WEIGHTS, DST_ARRAY} dst_e;

  state_e      state;
  src_e        src;
  dst_e        dst;
  logic        port;        // DRAM port of the current move
  logic        acc_mode;    // accumulate instead of overwrite
  logic [16:0] count, src_cnt, dst_cnt, out_cnt;
  logic [LAW-1:0] local_base;
  logic [AAW-1:0] acc_base;
  logic [DRAM_ADDR_W-1:0] dram_base;

  // ---- decode -------------------------------------------------------------
  src_e  d_src;
  dst_e  d_dst;
  logic  d_port, d_acc, d_dram;

  always_comb begin
    d_src  = SRC_LOCAL;
    d_dst  = DST_LOCAL;
    d_port = 1'b0;
    d_acc  = 1'b0;
    d_dram = 1'b0;
    unique case (instr.op)
      OP_LOADWEIGHTS: d_dst = DST_WEIGHTS;
      OP_MATMUL: begin
        d_dst = DST_ARRAY;
        d_acc = instr.flags[FLAG_ACCUMULATE];
      end
      OP_DATAMOVE: begin
        unique case (dm_kind_e'(instr.flags))
          DM_DRAM0_TO_LOCAL, DM_DRAM1_TO_LOCAL: begin
            d_src = SRC_DRAM; d_dst = DST_LOCAL; d_dram = 1'b1; d_port = instr.flags[1];
          end
          DM_LOCAL_TO_DRAM0, DM_LOCAL_TO_DRAM1: begin
            d_src = SRC_LOCAL; d_dst = DST_DRAM; d_dram = 1'b1; d_port = instr.flags[1];
          end
          DM_ACC_TO_LOCAL:  begin d_src = SRC_ACC;   d_dst = DST_LOCAL; end
          DM_LOCAL_TO_ACC:  begin d_src = SRC_LOCAL; d_dst = DST_ACC;   end
          DM_LOCAL_ADD_ACC: begin d_src = SRC_LOCAL; d_dst = DST_ACC; d_acc = 1'b1; end
          default: ;
        endcase
      end
      default: ;
    endcase
  end

  logic is_move;
  assign is_move = (instr.op == OP_LOADWEIGHTS) || (instr.op == OP_MATMUL) ||
                   ((instr.op == OP_DATAMOVE) &&
                    (instr.flags inside {DM_DRAM0_TO_LOCAL, DM_LOCAL_TO_DRAM0,
                                         DM_DRAM1_TO_LOCAL, DM_LOCAL_TO_DRAM1,
                                         DM_ACC_TO_LOCAL, DM_LOCAL_TO_ACC,
                                         DM_LOCAL_ADD_ACC}));

  assign instr_ready = (state == S_IDLE);
  assign busy        = (state != S_IDLE);

  // ---- skid buffer ----------------------------------------------------------
  logic [VEC_W-1:0] q0, q1;
  logic [1:0]       q_cnt;
  logic             rd_vld;          // memory read issued last cycle
  logic             push, pop, issue, sink_ready, dram_take;
  logic [VEC_W-1:0] push_data;
  logic             run;

  assign run = (state == S_RUN);

  always_comb begin
    unique case (dst)
      DST_DRAM: sink_ready = dram_wready[port];
      default:  sink_ready = 1'b1;
    endcase
  end

  assign pop   = run && (q_cnt != 2'd0) && sink_ready;
  assign issue = run && (src != SRC_DRAM) && (src_cnt < count) &&
                 ((3'(q_cnt) + 3'(rd_vld) - 3'(pop)) < 3'd2);
  assign dram_take = run && (src == SRC_DRAM) && (src_cnt < count) && dram_rvalid[port] &&
                     ((q_cnt < 2'd2) || pop);
  assign push      = ((src == SRC_ACC) ? acc_rvalid : rd_vld) || dram_take;
  always_comb begin
    unique case (src)
      SRC_ACC:  push_data = acc_rdata;
      SRC_DRAM: push_data = dram_rdata[port];
      default:  push_data = lm_rdata;
    endcase
  end

  always_ff @(posedge clk) begin
    unique case ({push, pop})
      2'b10: if (q_cnt == 2'd0) q0 <= push_data; else q1 <= push_data;
      2'b01: q0 <= q1;
      2'b11: if (q_cnt == 2'd1) q0 <= push_data; else begin q0 <= q1; q1 <= push_data; end
      default: ;
    endcase
  end

  // ---- memory, array and DRAM drive ---------------------------------------
  always_comb begin
    lm_re    = issue && (src == SRC_LOCAL);
    lm_raddr = local_base + LAW'(src_cnt);
    lm_we    = pop && (dst == DST_LOCAL);
    lm_waddr = local_base + LAW'(dst_cnt);
    lm_wdata = q0;

    arr_w_valid  = pop && (dst == DST_WEIGHTS);
    arr_w_row    = $clog2(N)'(dst_cnt);
    arr_w_vec    = q0;
    arr_in_valid = pop && (dst == DST_ARRAY);
    arr_in_vec   = q0;

    acc_req_valid = 1'b0;
    acc_req_write = 1'b0;
    acc_req_acc   = acc_mode;
    acc_req_addr  = acc_base + AAW'(src_cnt);
    acc_req_wdata = q0;
    if (dst == DST_ARRAY) begin
      acc_req_valid = arr_out_valid;
      acc_req_write = 1'b1;
      acc_req_addr  = acc_base + AAW'(out_cnt);
      acc_req_wdata = arr_out_vec;
    end else if (dst == DST_ACC) begin
      acc_req_valid = pop;
      acc_req_write = 1'b1;
      acc_req_addr  = acc_base + AAW'(dst_cnt);
    end else if (src == SRC_ACC) begin
      acc_req_valid = issue;
    end

    for (int p = 0; p < 2; p++) begin
      dram_req_valid[p]      = (state == S_REQ) && (port == 1'(p));
      dram_req[p].write      = (dst == DST_DRAM);
      dram_req[p].addr       = dram_base;
      dram_req[p].len        = count;
      dram_wvalid[p]         = run && (dst == DST_DRAM) && (port == 1'(p)) && (q_cnt != 2'd0);
      dram_wdata[p]          = q0;
      dram_rready[p]         = run && (src == SRC_DRAM) && (port == 1'(p)) && (src_cnt < count) &&
                               ((q_cnt < 2'd2) || pop);
    end
  end

  // ---- sequencing -----------------------------------------------------------
  logic done;
  assign done = run && (dst_cnt == count) && ((dst != DST_ARRAY) || (out_cnt == count));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      src          <= SRC_LOCAL;
      dst          <= DST_LOCAL;
      port         <= 1'b0;
      acc_mode     <= 1'b0;
      count        <= '0;
      src_cnt      <= '0;
      dst_cnt      <= '0;
      out_cnt      <= '0;
      local_base   <= '0;
      acc_base     <= '0;
      dram_base    <= '0;
      q_cnt        <= '0;
      rd_vld       <= 1'b0;
      instr_count  <= '0;
      stall_cycles <= '0;
    end else begin
      rd_vld <= issue;
      q_cnt  <= q_cnt + 2'(push) - 2'(pop);
      if (issue || dram_take) src_cnt <= src_cnt + 1'b1;
      if (pop)                dst_cnt <= dst_cnt + 1'b1;
      if (run && dst == DST_ARRAY && arr_out_valid) out_cnt <= out_cnt + 1'b1;
      if ((state == S_REQ && !dram_req_ready[port]) ||
          (run && !done && !pop && !push && !issue && (dst != DST_ARRAY || dst_cnt != count)))
        stall_cycles <= stall_cycles + 1'b1;

      unique case (state)
        S_IDLE: if (instr_valid) begin
          instr_count <= instr_count + 1'b1;
          src        <= d_src;
          dst        <= d_dst;
          port       <= d_port;
          acc_mode   <= d_acc;
          count      <= 17'(instr.size) + 17'd1;
          src_cnt    <= '0;
          dst_cnt    <= '0;
          out_cnt    <= '0;
          local_base <= LAW'(instr.local_addr);
          acc_base   <= AAW'(instr.addr);
          dram_base  <= DRAM_ADDR_W'(instr.addr);
          if (is_move) state <= d_dram ? S_REQ : S_RUN;
        end
        S_REQ: if (dram_req_ready[port]) state <= S_RUN;
        S_RUN: if (done) state <= S_IDLE;
        default: state <= S_IDLE;
      endcase
    end
  end

  a_no_overflow: assert property (@(posedge clk) disable iff (!rst_n) !(push && !pop && q_cnt == 2'd2));
  a_weights_rows: assert property (@(posedge clk) disable iff (!rst_n) arr_w_valid |-> (32'(dst_cnt) < N));
endmodule
