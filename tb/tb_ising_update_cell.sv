// tb_ising_update_cell: random stimulus against an integer-arithmetic model.
// The model computes the neighbour sum sum_j J_j x_j s_j with +-1 integers,
// derives the LUT index and the new spin for both algorithms and compares.
// The LUT word is drawn so that about half of the comparisons succeed.
module tb_ising_update_cell;
  import spin_pkg::*;
  int checks = 0, failures = 0;

  algo_e algo;
  logic field_en, s_old, x_self, h_bit, s_new;
  logic [5:0] nb, jc, xn;
  logic [4:0] idx;
  logic [31:0] lv, rnd;

  ising_update_cell dut (.algo, .field_en, .s_old, .x_self, .h_bit, .nb, .jc, .xn,
                         .lut_idx(idx), .lut_val(lv), .rnd, .s_new);

  function automatic int pm(logic b); return b ? 1 : -1; endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int k = 0; k < 4000; k++) begin
      int sum, e, exp_idx;
      logic f, exp_s;
      algo = algo_e'($urandom_range(0, 1));
      field_en = 1'($urandom); s_old = 1'($urandom); h_bit = 1'($urandom);
      x_self = ($urandom_range(0, 7) != 0);
      nb = 6'($urandom); jc = 6'($urandom);
      xn = (k % 2) ? 6'h3f : 6'($urandom);
      rnd = $urandom; lv = $urandom;
      sum = 0;
      for (int j = 0; j < 6; j++) sum += pm(jc[j]) * (xn[j] ? 1 : 0) * pm(nb[j]);
      if (algo == ALG_METROPOLIS) begin
        e = pm(s_old) * sum;
        f = field_en && (pm(h_bit) * pm(s_old) > 0);
      end else begin
        e = sum;
        f = field_en && h_bit;
      end
      exp_idx = (f ? 16 : 0) + e + 6;
      if (!x_self) exp_s = s_old;
      else if (algo == ALG_METROPOLIS) exp_s = (rnd < lv) ? !s_old : s_old;
      else exp_s = (rnd < lv);
      #1;
      checks += 2;
      if (idx !== 5'(exp_idx)) begin
        failures++;
        if (failures < 5) $display("idx got %0d exp %0d", idx, exp_idx);
      end
      if (s_new !== exp_s) failures++;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
