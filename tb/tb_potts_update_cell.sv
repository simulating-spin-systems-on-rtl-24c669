// tb_potts_update_cell: random spins, neighbours and permutation couplings
// against a software model that counts satisfied bonds delta(s_a, pi(s_b))
// with the bond's lower site a (the site itself for +d bonds, the neighbour
// for -d bonds), forms dE for the proposal s ^ rnd[31:30] and applies the
// Metropolis test on the remaining random bits.
module tb_potts_update_cell;
  int checks = 0, failures = 0;

  logic [1:0] s_old, s_new;
  logic [5:0][1:0] nb;
  logic [5:0][7:0] perm;
  logic [3:0] idx;
  logic [31:0] lv, rnd;
  logic acc;

  potts_update_cell dut (.s_old, .nb, .perm, .lut_idx(idx), .lut_val(lv), .rnd, .accept(acc), .s_new);

  // a random permutation of 0..3 as four 2-bit fields
  function automatic logic [7:0] rand_perm();
    int v[4] = '{0, 1, 2, 3};
    v.shuffle();
    return {2'(v[3]), 2'(v[2]), 2'(v[1]), 2'(v[0])};
  endfunction

  function automatic int sat(int s);
    int c = 0;
    for (int j = 0; j < 6; j++) begin
      int pi_of_nb = (perm[j] >> (2 * nb[j])) & 3;
      int pi_of_s  = (perm[j] >> (2 * s)) & 3;
      if (j % 2 == 0) c += (s == pi_of_nb);
      else            c += (nb[j] == pi_of_s);
    end
    return c;
  endfunction

  initial begin
    #1000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    int n_acc = 0;
    for (int k = 0; k < 4000; k++) begin
      int sp, de;
      bit a;
      s_old = 2'($urandom); rnd = $urandom; lv = $urandom;
      for (int j = 0; j < 6; j++) begin nb[j] = 2'($urandom); perm[j] = rand_perm(); end
      sp = s_old ^ rnd[31:30];
      de = sat(s_old) - sat(sp);
      a = ((rnd << 2) & 32'hFFFF_FFFF) < lv;
      #1;
      checks += 2;
      if (idx !== 4'(de + 6)) begin
        failures++;
        if (failures < 5) $display("idx %0d exp %0d", idx, de + 6);
      end
      if (s_new !== (a ? 2'(sp) : s_old)) failures++;
      n_acc += a;
    end
    checks++;
    if (n_acc == 0) failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
