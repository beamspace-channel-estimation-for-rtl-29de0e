// tb_sort_pe: drives one sort processing element with random broadcast
// values, vector tags and neighbour signals and checks its move decision
// and register update against the insertion rule: an entry moves down when
// it is empty, stale (other vector) or smaller than the new value; a moving
// PE takes the previous PE's entry if that one moves too, else the new value.
module tb_sort_pe;
  import beaches_pkg::*;

  logic clk = 0, rst_n = 0;
  logic ins, cur_gen, prev_cmp, cmp;
  logic [XW-1:0] x;
  sort_entry_t prev_e, e, model;
  int checks = 0, failures = 0;
  int n_hold = 0, n_take_x = 0, n_take_prev = 0, n_stale = 0;

  always #5 clk = ~clk;

  sort_pe dut (.clk, .rst_n, .ins, .x, .cur_gen, .prev_e, .prev_cmp, .e, .cmp);

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin failures++; if (failures < 10) $display("FAIL %s", what); end
  endtask

  initial begin
    bit exp_cmp;
    ins = 0; x = '0; cur_gen = 0; prev_cmp = 0; prev_e = '0;
    model = '0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int i = 0; i < 5000; i++) begin
      @(negedge clk);
      ins      = ($urandom_range(0, 3) != 0);
      x        = XW'($urandom_range(0, 511));
      if (i % 50 == 0) cur_gen = ~cur_gen;
      prev_cmp = $urandom_range(0, 1);
      prev_e   = sort_entry_t'{valid: 1'($urandom_range(0, 1) | (i % 3 == 0)),
                               gen: 1'($urandom_range(0, 1)), val: XW'($urandom_range(0, 511))};
      #1;
      exp_cmp = !model.valid || (model.gen != cur_gen) || (ins && (x > model.val));
      check(cmp == exp_cmp, $sformatf("cmp=%0d expected %0d", cmp, exp_cmp));
      if (exp_cmp && model.valid && model.gen != cur_gen) n_stale++;
      if (!exp_cmp) n_hold++;
      else if (prev_cmp) n_take_prev++;
      else n_take_x++;
      if (exp_cmp) model = prev_cmp ? prev_e : sort_entry_t'{valid: ins, gen: cur_gen, val: x};
      @(posedge clk);
      #1;
      check(e == model, $sformatf("entry %p expected %p", e, model));
    end
    check(n_hold > 0 && n_take_x > 0 && n_take_prev > 0 && n_stale > 0, "all cases covered");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
