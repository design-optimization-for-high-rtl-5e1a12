// tcu_ref_pkg: instruction-level software model of the accelerator, used by
// the testbenches as the independent reference.
//
// The model executes one instruction at a time on its own copies of the
// local memory, the accumulators, the array weights and the two DRAMs,
// with the arithmetic spelled out directly: y[j] = sat((sum_i x[i] *
// W[i][j]) >>> 8), lane-wise saturating add for accumulation. Vectors are
// held as arrays of 16-bit lanes. The helper mk() builds instruction words.
package tcu_ref_pkg;
  import tcu_pkg::*;

  function automatic logic [63:0] mk(opcode_e op, logic [3:0] flags, int n_vectors,
                                     int local_addr, int addr);
    instr_t i;
    i.op = op; i.flags = flags; i.size = 16'(n_vectors - 1);
    i.local_addr = 16'(local_addr); i.addr = 24'(addr);
    return i;
  endfunction

  function automatic logic signed [15:0] sat(longint v);
    if (v > 32767) return 16'sh7fff;
    if (v < -32768) return 16'sh8000;
    return 16'(v);
  endfunction

  class tcu_model #(int N = 32);
    typedef logic signed [15:0] vec_t [N];
    vec_t lmem [];
    vec_t acc  [];
    vec_t dram [2][];
    logic signed [15:0] w [N][N];
    int n_matmul = 0, n_accumulate = 0, n_dram_rd = 0, n_dram_wr = 0, n_loadw = 0, n_acc_local = 0;

    function new(int local_depth, int acc_depth, int dram_depth);
      lmem = new[local_depth];
      acc  = new[acc_depth];
      dram[0] = new[dram_depth];
      dram[1] = new[dram_depth];
    endfunction

    function automatic vec_t add(vec_t a, vec_t b);
      vec_t r;
      for (int l = 0; l < N; l++) r[l] = sat(longint'(a[l]) + longint'(b[l]));
      return r;
    endfunction

    function automatic vec_t mul(vec_t x);
      vec_t y;
      for (int j = 0; j < N; j++) begin
        automatic longint s = 0;
        for (int i = 0; i < N; i++) s += longint'(x[i]) * longint'(w[i][j]);
        y[j] = sat(s >>> 8);
      end
      return y;
    endfunction

    function void exec(logic [63:0] word);
      instr_t in = instr_t'(word);
      int n = int'(in.size) + 1;
      int la = int'(in.local_addr), a = int'(in.addr);
      case (in.op)
        OP_LOADWEIGHTS: begin
          n_loadw++;
          for (int k = 0; k < n; k++) for (int j = 0; j < N; j++) w[k][j] = lmem[la + k][j];
        end
        OP_MATMUL: begin
          n_matmul++;
          if (in.flags[0]) n_accumulate++;
          for (int k = 0; k < n; k++)
            acc[a + k] = in.flags[0] ? add(acc[a + k], mul(lmem[la + k])) : mul(lmem[la + k]);
        end
        OP_DATAMOVE: begin
          case (dm_kind_e'(in.flags))
            DM_DRAM0_TO_LOCAL, DM_DRAM1_TO_LOCAL: begin
              n_dram_rd++;
              for (int k = 0; k < n; k++) lmem[la + k] = dram[in.flags[1]][a + k];
            end
            DM_LOCAL_TO_DRAM0, DM_LOCAL_TO_DRAM1: begin
              n_dram_wr++;
              for (int k = 0; k < n; k++) dram[in.flags[1]][a + k] = lmem[la + k];
            end
            DM_ACC_TO_LOCAL: begin
              n_acc_local++;
              for (int k = 0; k < n; k++) lmem[la + k] = acc[a + k];
            end
            DM_LOCAL_TO_ACC:  for (int k = 0; k < n; k++) acc[a + k] = lmem[la + k];
            DM_LOCAL_ADD_ACC: begin
              n_accumulate++;
              for (int k = 0; k < n; k++) acc[a + k] = add(acc[a + k], lmem[la + k]);
            end
            default: ;
          endcase
        end
        default: ;
      endcase
    endfunction
  endclass
endpackage
