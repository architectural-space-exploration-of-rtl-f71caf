// task_mapper: run-time task-to-core mapping for the heterogeneous
// multi-core, implementing the paper's two heuristics as a state machine.
//
// Tables (written through the cfg port before a run):
//   fpvf[app][core]  full-processor vulnerability factor of application
//                    `app` on core `core`, in hundredths of a percent;
//   pwr[core]        power overhead of the core's reliability mode, in %.
// A run starts with `start`, a list of num_tasks application ids
// (task_app) and one of two policies:
//   policy 0, vulnerability-constrained power minimisation: the cores are
//     sorted once by ascending power overhead; each task in turn goes to the
//     first free core, in that order, whose FPVF for the task is at most
//     vul_const;
//   policy 1, power-constrained vulnerability minimisation: for each task
//     the cores are sorted by ascending FPVF for that task's application;
//     the task goes to the first free core whose power overhead, added to
//     that of the cores already given a task, stays within power_budget.
// A task that finds no core is left unmapped and the next task is tried;
// a core given a task is removed from the pool.  The order of steps is
// taken from the paper's two flowcharts.  The flowchart's "Overhead <=
// PowerBud." is read as the running overhead of the whole processor, since
// the text calls it "a constraint on the maximum power overhead of the whole
// processor" (budget 100 % per task of the mix).  Ties in a sort are broken
// by the lower core number (own choice).
//
// Timing: one cycle latches the request, then per task one cycle to sort
// (policy 1, or the first task of policy 0) and one cycle per core examined,
// so a run takes at most 1 + T*(1 + NUM_CORES) + 1 cycles; `done` pulses for
// one cycle at the end and the results hold until the next start.
module task_mapper #(
  parameter int NUM_CORES = 10,
  parameter int NUM_APPS  = 4,
  parameter int MAX_TASKS = 8,
  parameter int VW        = 16,   // FPVF width (1/100 %)
  parameter int PWW       = 16,   // power overhead width (%)
  localparam int CIW      = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1,
  localparam int AIW      = (NUM_APPS > 1)  ? $clog2(NUM_APPS)  : 1,
  localparam int TIW      = $clog2(MAX_TASKS + 1),
  localparam int TXW      = (MAX_TASKS > 1) ? $clog2(MAX_TASKS) : 1,
  localparam int SW       = PWW + $clog2(NUM_CORES + 1)   // sum of overheads
) (
  input  logic                           clk,
  input  logic                           rst_n,
  // table write port
  input  logic                           cfg_we,
  input  logic                           cfg_is_pwr,
  input  logic [AIW-1:0]                 cfg_app,
  input  logic [CIW-1:0]                 cfg_core,
  input  logic [VW-1:0]                  cfg_data,
  // request
  input  logic                           start,
  input  logic                           policy,
  input  logic [TIW-1:0]                 num_tasks,
  input  logic [MAX_TASKS-1:0][AIW-1:0]  task_app,
  input  logic [VW-1:0]                  vul_const,
  input  logic [SW-1:0]                  power_budget,
  // result
  output logic                           busy,
  output logic                           done,
  output logic [MAX_TASKS-1:0]           task_mapped,
  output logic [MAX_TASKS-1:0][CIW-1:0]  task_core,
  output logic [NUM_CORES-1:0]           core_used,
  output logic [TIW-1:0]                 mapped_count,
  output logic [SW-1:0]                  total_power,
  output logic [SW+TIW-1:0]              total_fpvf
);
  typedef enum logic [1:0] {S_IDLE, S_SORT, S_SCAN, S_DONE} state_e;

  logic [VW-1:0]  fpvf_tab [NUM_APPS][NUM_CORES];
  logic [PWW-1:0] pwr_tab  [NUM_CORES];

  state_e                         st;
  logic                           pol_q;
  logic [TIW-1:0]                 ntask_q, a_q;
  logic [MAX_TASKS-1:0][AIW-1:0]  app_q;
  logic [VW-1:0]                  vc_q;
  logic [SW-1:0]                  pb_q;
  logic [CIW-1:0]                 order_q [NUM_CORES];
  logic [CIW:0]                   b_q;                 // position in sorted order

  // ---- ranking sort (combinational, used in S_SORT) -------------------
  logic [CIW-1:0] order_d [NUM_CORES];
  logic [AIW-1:0] cur_app;
  always_comb begin
    logic [VW-1:0] key [NUM_CORES];
    int rank;
    cur_app = app_q[a_q[TXW-1:0]];
    for (int j = 0; j < NUM_CORES; j++)
      key[j] = pol_q ? fpvf_tab[cur_app][j] : VW'(pwr_tab[j]);
    for (int j = 0; j < NUM_CORES; j++) order_d[j] = '0;
    for (int j = 0; j < NUM_CORES; j++) begin
      rank = 0;
      for (int k = 0; k < NUM_CORES; k++)
        if (key[k] < key[j] || (key[k] == key[j] && k < j)) rank++;
      order_d[rank] = CIW'(j);
    end
  end

  // ---- candidate test (S_SCAN) ------------------------------------------
  logic [CIW-1:0] cand;
  logic           cand_free, cand_ok;
  always_comb begin
    cand      = order_q[b_q[CIW-1:0] < CIW'(NUM_CORES) ? b_q[CIW-1:0] : '0];
    cand_free = !core_used[cand];
    if (pol_q) cand_ok = (total_power + SW'(pwr_tab[cand])) <= pb_q;
    else       cand_ok = fpvf_tab[cur_app][cand] <= vc_q;
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      for (int a = 0; a < NUM_APPS; a++)
        for (int c = 0; c < NUM_CORES; c++) fpvf_tab[a][c] <= '0;
      for (int c = 0; c < NUM_CORES; c++) begin
        pwr_tab[c] <= '0;
        order_q[c] <= '0;
      end
      st           <= S_IDLE;
      pol_q        <= 1'b0;
      ntask_q      <= '0;
      a_q          <= '0;
      app_q        <= '0;
      vc_q         <= '0;
      pb_q         <= '0;
      b_q          <= '0;
      done         <= 1'b0;
      task_mapped  <= '0;
      task_core    <= '0;
      core_used    <= '0;
      mapped_count <= '0;
      total_power  <= '0;
      total_fpvf   <= '0;
    end else begin
      done <= 1'b0;
      if (cfg_we && st == S_IDLE) begin
        if (cfg_is_pwr) pwr_tab[cfg_core] <= PWW'(cfg_data);
        else            fpvf_tab[cfg_app][cfg_core] <= cfg_data;
      end
      unique case (st)
        S_IDLE: if (start) begin
          pol_q        <= policy;
          ntask_q      <= (int'(num_tasks) > MAX_TASKS) ? TIW'(MAX_TASKS) : num_tasks;
          app_q        <= task_app;
          vc_q         <= vul_const;
          pb_q         <= power_budget;
          a_q          <= '0;
          b_q          <= '0;
          task_mapped  <= '0;
          task_core    <= '0;
          core_used    <= '0;
          mapped_count <= '0;
          total_power  <= '0;
          total_fpvf   <= '0;
          st           <= (num_tasks == '0) ? S_DONE : S_SORT;
        end
        S_SORT: begin
          order_q <= order_d;
          b_q     <= '0;
          st      <= S_SCAN;
        end
        S_SCAN: begin
          if (cand_free && cand_ok) begin
            // map task A to core B, remove B from the pool
            task_mapped[a_q[TXW-1:0]] <= 1'b1;
            task_core[a_q[TXW-1:0]]   <= cand;
            core_used[cand]   <= 1'b1;
            mapped_count      <= mapped_count + 1'b1;
            total_power       <= total_power + SW'(pwr_tab[cand]);
            total_fpvf        <= total_fpvf + (SW+TIW)'(fpvf_tab[cur_app][cand]);
          end
          if ((cand_free && cand_ok) || int'(b_q) == NUM_CORES - 1) begin
            // next task, or stop at the end of the workload
            if (a_q + 1'b1 >= ntask_q) begin
              st <= S_DONE;
            end else begin
              a_q <= a_q + 1'b1;
              b_q <= '0;
              st  <= pol_q ? S_SORT : S_SCAN;
            end
          end else begin
            b_q <= b_q + 1'b1;
          end
        end
        S_DONE: begin
          done <= 1'b1;
          st   <= S_IDLE;
        end
        default: st <= S_IDLE;
      endcase
    end
  end

  assign busy = (st != S_IDLE);
endmodule
