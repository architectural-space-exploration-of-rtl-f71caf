// tb_task_mapper: self-checking test of the task-to-core mapper.
// Random FPVF and power tables and random task mixes are mapped under both
// policies and every result (which tasks map, to which core, count, summed
// power and FPVF) is compared with a reference written as plain loops over
// the two flowcharts (sort the cores, walk them in order, take the first
// free core that meets the constraint, remove it).  The run time is checked
// against the bound 2 + T*(1 + cores) cycles.  Ten cores, four
// applications, up to eight tasks, as in the paper's run-time study.
module tb_task_mapper;
  localparam int NC = 10, NA = 4, MT = 8, CIW = 4, AIW = 2, TIW = 4, SW = 20;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;

  logic cfg_we, cfg_is_pwr; logic [AIW-1:0] cfg_app; logic [CIW-1:0] cfg_core; logic [15:0] cfg_data;
  logic start, policy; logic [TIW-1:0] num_tasks; logic [MT-1:0][AIW-1:0] task_app;
  logic [15:0] vul_const; logic [SW-1:0] power_budget;
  logic busy, done; logic [MT-1:0] task_mapped; logic [MT-1:0][CIW-1:0] task_core;
  logic [NC-1:0] core_used; logic [TIW-1:0] mapped_count; logic [SW-1:0] total_power;
  logic [SW+TIW-1:0] total_fpvf;

  task_mapper #(.NUM_CORES(NC), .NUM_APPS(NA), .MAX_TASKS(MT)) dut (
    .clk, .rst_n, .cfg_we, .cfg_is_pwr, .cfg_app, .cfg_core, .cfg_data,
    .start, .policy, .num_tasks, .task_app, .vul_const, .power_budget,
    .busy, .done, .task_mapped, .task_core, .core_used, .mapped_count, .total_power, .total_fpvf);

  int checks = 0, failures = 0;
  int fv [NA][NC], pw [NC];

  task automatic chk(input logic cond, input string what);
    checks++;
    if (!cond) begin failures++; $display("FAIL %s (t=%0t)", what, $time); end
  endtask

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  // stable ascending order of cores by key
  function automatic void sort_cores(input int key [NC], output int ord [NC]);
    int tmp;
    for (int j = 0; j < NC; j++) ord[j] = j;
    for (int a = 0; a < NC; a++)
      for (int b = 0; b < NC - 1 - a; b++)
        if (key[ord[b]] > key[ord[b + 1]]) begin
          tmp = ord[b]; ord[b] = ord[b + 1]; ord[b + 1] = tmp;
        end
  endfunction

  task automatic run_and_check(input bit pol, input int nt, input int apps [MT],
                               input int vc, input int pb);
    int ord [NC], key [NC];
    bit used [NC];
    int emap [MT], ecore [MT], ecount, epow, efv, cyc;
    for (int j = 0; j < NC; j++) used[j] = 0;
    ecount = 0; epow = 0; efv = 0;
    if (!pol) begin
      for (int j = 0; j < NC; j++) key[j] = pw[j];
      sort_cores(key, ord);
    end
    for (int a = 0; a < MT; a++) begin emap[a] = 0; ecore[a] = 0; end
    for (int a = 0; a < nt; a++) begin
      if (pol) begin
        for (int j = 0; j < NC; j++) key[j] = fv[apps[a]][j];
        sort_cores(key, ord);
      end
      for (int b = 0; b < NC; b++) begin
        int c;
        c = ord[b];
        if (!used[c] && (pol ? (epow + pw[c] <= pb) : (fv[apps[a]][c] <= vc))) begin
          used[c] = 1; emap[a] = 1; ecore[a] = c; ecount++; epow += pw[c]; efv += fv[apps[a]][c];
          break;
        end
      end
    end
    // run the hardware
    @(negedge clk);
    policy = pol; num_tasks = TIW'(nt); vul_const = 16'(vc); power_budget = SW'(pb);
    for (int a = 0; a < MT; a++) task_app[a] = AIW'(apps[a]);
    start = 1;
    @(negedge clk); start = 0;
    cyc = 1;
    while (!done && cyc < 500) begin @(negedge clk); cyc++; end
    chk(done, "mapping finishes");
    chk(cyc <= 2 + nt * (1 + NC) + 1, "mapping within the cycle bound");
    for (int a = 0; a < MT; a++) begin
      chk(task_mapped[a] == emap[a], "task mapped or not");
      if (emap[a]) chk(int'(task_core[a]) == ecore[a], "task core");
    end
    chk(int'(mapped_count) == ecount, "mapped count");
    chk(int'(total_power) == epow, "total power overhead");
    chk(int'(total_fpvf) == efv, "total FPVF");
    for (int j = 0; j < NC; j++) chk(core_used[j] == used[j], "core removed from pool");
  endtask

  initial begin
    int apps [MT];
    cfg_we = 0; cfg_is_pwr = 0; cfg_app = 0; cfg_core = 0; cfg_data = 0;
    start = 0; policy = 0; num_tasks = 0; task_app = '0; vul_const = 0; power_budget = 0;
    repeat (2) @(posedge clk); rst_n = 1;
    for (int trial = 0; trial < 40; trial++) begin
      // new tables (ties are frequent on purpose in some trials)
      for (int c = 0; c < NC; c++) begin
        pw[c] = (trial % 4 == 0) ? 10 * $urandom_range(5) : $urandom_range(200);
        @(negedge clk); cfg_we = 1; cfg_is_pwr = 1; cfg_core = CIW'(c); cfg_data = 16'(pw[c]);
        for (int a = 0; a < NA; a++) begin
          fv[a][c] = (trial % 4 == 1) ? 500 * $urandom_range(4) : $urandom_range(4000);
          @(negedge clk); cfg_we = 1; cfg_is_pwr = 0; cfg_app = AIW'(a); cfg_core = CIW'(c);
          cfg_data = 16'(fv[a][c]);
        end
      end
      @(negedge clk); cfg_we = 0;
      for (int k = 0; k < 4; k++) begin
        int nt;
        nt = $urandom_range(1, MT);
        for (int a = 0; a < MT; a++) apps[a] = $urandom_range(NA - 1);
        run_and_check(1'b0, nt, apps, $urandom_range(4000), 0);
        run_and_check(1'b1, nt, apps, 0, $urandom_range(100 * nt));
      end
    end
    // zero tasks
    for (int a = 0; a < MT; a++) apps[a] = 0;
    run_and_check(1'b0, 0, apps, 0, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
