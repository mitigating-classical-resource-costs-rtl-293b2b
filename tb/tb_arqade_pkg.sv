// tb_arqade_pkg -- checks the generated primitive table against the
// brute-force geometry of surface_ref_pkg for d = 3, 5, 7, 9 and 15:
//  * the table has the expected size and stage count;
//  * every single error (each data qubit in each round, each measurement
//    error) has a primitive with exactly its syndrome set, and the
//    observable mask of that primitive is the error's true flip;
//  * every primitive is one of those (no stray sets);
//  * no two primitives of one stage share a syndrome bit;
//  * no primitive has a proper subset in an earlier stage.
`timescale 1ns/1ps
module tb_arqade_pkg;
  import arqade_pkg::*;
  import surface_ref_pkg::*;

  int checks = 0, failures = 0;
  bit done = 0;

  task automatic check(bit ok, string what);
    checks++;
    if (!ok) begin
      failures++;
      if (failures < 10) $display("FAIL: %s", what);
    end
  endtask

  function automatic vec_t set_of(prim_t p);
    vec_t v = '0;
    for (int i = 0; i < int'(p.n_syn); i++) v[p.syn[i]] = 1'b1;
    return v;
  endfunction

  initial begin : watchdog
    #1000000;
    if (!done) begin
      failures++;
      $display("watchdog expired");
      $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
      $finish;
    end
  end

  initial begin
    int dl [5] = '{3, 5, 7, 9, 15};
    foreach (dl[x]) begin
      int d, np, nc, found;
      vec_t sets [];
      bit   obs  [];
      int   stg  [];
      d  = dl[x];
      nc = nchk(d);
      np = sc_nprim(d);
      check(sc_nchk(d) == nc, "check count");
      check(sc_nsyn(d) == 2 * nc, "syndrome width");
      sets = new[np]; obs = new[np]; stg = new[np];
      for (int k = 0; k < np; k++) begin
        automatic prim_t p = sc_prim(d, k);
        sets[k] = set_of(p);
        obs[k]  = p.obs[0];
        stg[k]  = int'(p.stage);
        check(stg[k] < sc_nstages(d), "stage in range");
      end
      // every single error is covered with the right observable
      for (int r = 0; r < 2; r++)
        for (int i = 0; i < d; i++)
          for (int j = 0; j < d; j++) begin
            automatic vec_t e = data_error(d, i, j, r);
            found = 0;
            for (int k = 0; k < np; k++)
              if (sets[k] == e) begin
                found++;
                check(obs[k] == (j == 0), $sformatf("d=%0d observable of qubit %0d,%0d", d, i, j));
              end
            check(found == 1, $sformatf("d=%0d qubit %0d,%0d covered %0d times", d, i, j, found));
          end
      for (int c = 0; c < nc; c++) begin
        automatic vec_t e = meas_error(d, c);
        found = 0;
        for (int k = 0; k < np; k++)
          if (sets[k] == e) begin
            found++;
            check(obs[k] == 0 && stg[k] == 0, "measurement primitive");
          end
        check(found == 1, $sformatf("d=%0d check %0d covered %0d times", d, c, found));
      end
      // no stray primitive: each is some single error's set
      for (int k = 0; k < np; k++) begin
        automatic bit ok = 0;
        for (int c = 0; c < nc && !ok; c++) if (sets[k] == meas_error(d, c)) ok = 1;
        for (int r = 0; r < 2 && !ok; r++)
          for (int i = 0; i < d && !ok; i++)
            for (int j = 0; j < d && !ok; j++) if (sets[k] == data_error(d, i, j, r)) ok = 1;
        check(ok, $sformatf("d=%0d primitive %0d is no single error", d, k));
      end
      // stage conflicts and subset ordering
      for (int k = 0; k < np; k++)
        for (int l = k + 1; l < np; l++) begin
          if (stg[k] == stg[l])
            check((sets[k] & sets[l]) == '0, $sformatf("d=%0d conflict %0d/%0d", d, k, l));
          if ((sets[k] & sets[l]) == sets[k] && sets[k] != sets[l])
            check(stg[k] > stg[l], $sformatf("d=%0d subset %0d before %0d", d, k, l));
          if ((sets[k] & sets[l]) == sets[l] && sets[k] != sets[l])
            check(stg[l] > stg[k], $sformatf("d=%0d subset %0d before %0d", d, l, k));
        end
    end
    done = 1;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
