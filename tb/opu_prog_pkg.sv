// opu_prog_pkg: helpers that encode instructions for the testbenches.
package opu_prog_pkg;
  import opu_pkg::*;

  function automatic instr_t i_simple(input opcode_e op, input bit barrier = 0);
    instr_t i;
    i = '0;
    i.op = op;
    i.barrier = barrier;
    return i;
  endfunction

  function automatic instr_t i_load(input load_dst_e dst, input bit bank, input int mem_addr,
                                    input int buf_addr, input int words, input bit barrier = 0);
    instr_t i;
    load_body_t b;
    b = '0;
    b.dst = dst; b.bank = bank; b.mem_addr = 32'(mem_addr);
    b.buf_addr = 16'(buf_addr); b.words = 16'(words);
    i = i_simple(OP_LOAD, barrier);
    i.body = b;
    return i;
  endfunction

  function automatic instr_t i_compute(input bit fm_bank, input int fm_addr, input bit w_bank,
                                       input int w_addr, input int ob_addr, input int count,
                                       input int group_log2, input bit window, input bit accumulate,
                                       input int row_w, input bit barrier = 0);
    instr_t i;
    compute_body_t b;
    b = '0;
    b.fm_bank = fm_bank; b.fm_addr = 16'(fm_addr); b.w_bank = w_bank; b.w_addr = 16'(w_addr);
    b.ob_addr = 16'(ob_addr); b.count = 16'(count); b.group_log2 = 3'(group_log2);
    b.window = window; b.accumulate = accumulate; b.row_w = 16'(row_w);
    i = i_simple(OP_COMPUTE, barrier);
    i.body = b;
    return i;
  endfunction

  function automatic instr_t i_post(input int ob_addr, input int count, input int pool_n,
                                    input bit pool_avg, input int avg_shift, input int shift,
                                    input bit res_en, input int res_addr, input bit res_bank,
                                    input act_e act, input int relu6_max, input bit bias_bank,
                                    input int bias_addr, input int mem_addr, input bit barrier = 0);
    instr_t i;
    post_body_t b;
    b = '0;
    b.ob_addr = 16'(ob_addr); b.count = 16'(count); b.pool_n = 8'(pool_n);
    b.pool_avg = pool_avg; b.avg_shift = 4'(avg_shift); b.shift = 5'(shift);
    b.res_en = res_en; b.res_addr = 16'(res_addr); b.res_bank = res_bank; b.act = act;
    b.relu6_max = 8'(relu6_max); b.bias_bank = bias_bank; b.bias_addr = 4'(bias_addr);
    b.mem_addr = 32'(mem_addr);
    i = i_simple(OP_POST, barrier);
    i.body = b;
    return i;
  endfunction
endpackage
