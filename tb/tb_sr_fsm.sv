// tb_sr_fsm: random thresholds, diagonal counts and MaxC values for every
// state, compared with the transition rules written out in dsr_ref_pkg:
// 1/256x always goes to 1/64x; Reduce when MaxC_R < T_R; else Increase when
// MaxC_I >= T_I (not from 1x); else Maintain. Also checks the boundary values
// MaxC = T - 1, T, T + 1 and that the right D values are presented.
module tb_sr_fsm;
  import dsr_pkg::*;
  import dsr_ref_pkg::*;

  sr_level_e    cur;
  mag_t         maxc_reduce, maxc_increase;
  dsr_params_t  params;
  diag_t        d_reduce, d_increase;
  sr_level_e    nxt;
  sr_decision_e decision;
  int checks = 0, failures = 0;
  int seen [4];

  sr_fsm dut (.*);

  initial begin
    #10000000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check();
    int en, ed;
    #1;
    fsm_ref(int'(cur), int'(maxc_reduce), int'(maxc_increase), params, en, ed);
    checks++;
    if (int'(nxt) != en || int'(decision) != ed) begin
      failures++;
      $display("lvl %0d mr %0d mi %0d: nxt %0d dec %0d, expected %0d %0d",
               cur, maxc_reduce, maxc_increase, nxt, decision, en, ed);
    end
    checks++;
    if (int'(cur) != 4 && (int'(d_reduce) != d_reduce_of(int'(cur), params) ||
        (int'(cur) != 0 && int'(d_increase) != d_increase_of(int'(cur), params)))) begin
      failures++;
      $display("lvl %0d: D values %0d %0d", cur, d_reduce, d_increase);
    end
    seen[ed]++;
  endtask

  initial begin
    for (int t = 0; t < 5000; t++) begin
      params = dsr_params_t'({$urandom, $urandom, $urandom, $urandom});
      for (int i = 0; i < 4; i++) params.t_reduce[i] = mag_t'($urandom_range(200));
      for (int i = 0; i < 3; i++) params.t_increase[i] = mag_t'($urandom_range(100, 400));
      cur = sr_level_e'($urandom_range(4));
      maxc_reduce   = mag_t'($urandom_range(400));
      maxc_increase = mag_t'($urandom_range(500));
      check();
    end
    // boundaries
    for (int l = 0; l < 5; l++) begin
      cur = sr_level_e'(l);
      params.t_reduce   = {4{15'd100}};
      params.t_increase = {3{15'd300}};
      for (int dv = -1; dv <= 1; dv++) begin
        maxc_reduce = mag_t'(100 + dv); maxc_increase = 15'd0; check();
        maxc_reduce = 15'd200; maxc_increase = mag_t'(300 + dv); check();
      end
    end
    for (int d = 0; d < 4; d++) begin
      checks++;
      if (seen[d] == 0) begin failures++; $display("decision %0d never taken", d); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
