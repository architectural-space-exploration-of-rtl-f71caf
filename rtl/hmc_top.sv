// hmc_top: reliability-heterogeneous multi-core (HMC) with run-time task
// mapping.
//
// NUM_CORES iso-ISA cores whose hardenable components (register files,
// rename maps, issue queues, re-order buffer, load and store queues) are
// built in different reliability modes: core j uses mode j mod 10, so the
// default ten cores cover the unprotected core U and the nine heterogeneous
// modes RM1..RM9 once each, as in the paper's 10-core HMC.  A task mapper
// assigns the tasks of a workload mix to cores with one of the paper's two
// policies (vulnerability-constrained power minimisation or
// power-constrained vulnerability minimisation); the cores that receive a
// task are switched on (core_active), the others stay off and accept no new
// work.
//
// The out-of-order pipelines around the hardened components (fetch,
// execution units, caches) are outside this design: each core's component
// ports appear at the top as core_in[j]/core_out[j].  The mapper's tables
// (FPVF per application and core, power overhead per core) are written
// through the cfg port.  Timing: components respond one edge after their
// inputs; the mapper finishes a mix within 2 + T*(1 + NUM_CORES) cycles and
// core_active follows its result one cycle later.
//
// Remaining lint note: Verilator reports SYNCASYNCNET on rst_n because the
// components' concurrent assertions use it in "disable iff" while their
// flops use it as an asynchronous reset.  The assertions are simulation
// only; the reset net drives nothing synchronously in hardware.
module hmc_top
  import hrm_pkg::core_in_t, hrm_pkg::core_out_t, hrm_pkg::rel_mode_e, hrm_pkg::NUM_APPS,
         hrm_pkg::MAX_TASKS, hrm_pkg::NUM_MODES;
#(
  parameter int NUM_CORES = hrm_pkg::NUM_CORES,
  localparam int CIW      = (NUM_CORES > 1) ? $clog2(NUM_CORES) : 1,
  localparam int AIW      = $clog2(NUM_APPS),
  localparam int TIW      = $clog2(MAX_TASKS + 1),
  localparam int SW       = 16 + $clog2(NUM_CORES + 1)
) (
  input  logic                                clk,
  input  logic                                rst_n,
  // component ports of every core, towards its pipeline
  input  core_in_t  [NUM_CORES-1:0]           core_in,
  output core_out_t [NUM_CORES-1:0]           core_out,
  output logic      [NUM_CORES-1:0]           core_active,
  output rel_mode_e [NUM_CORES-1:0]           core_mode,
  // mapper tables
  input  logic                                cfg_we,
  input  logic                                cfg_is_pwr,
  input  logic [AIW-1:0]                      cfg_app,
  input  logic [CIW-1:0]                      cfg_core,
  input  logic [15:0]                         cfg_data,
  // workload mix
  input  logic                                map_start,
  input  logic                                map_policy,
  input  logic [TIW-1:0]                      num_tasks,
  input  logic [MAX_TASKS-1:0][AIW-1:0]       task_app,
  input  logic [15:0]                         vul_const,
  input  logic [SW-1:0]                       power_budget,
  output logic                                map_busy,
  output logic                                map_done,
  output logic [MAX_TASKS-1:0]                task_mapped,
  output logic [MAX_TASKS-1:0][CIW-1:0]       task_core,
  output logic [TIW-1:0]                      mapped_count,
  output logic [SW-1:0]                       total_power,
  output logic [SW+TIW-1:0]                   total_fpvf
);
  logic [NUM_CORES-1:0] used;

  task_mapper #(.NUM_CORES(NUM_CORES), .NUM_APPS(NUM_APPS), .MAX_TASKS(MAX_TASKS),
                .VW(16), .PWW(16)) u_mapper (
    .clk, .rst_n,
    .cfg_we, .cfg_is_pwr, .cfg_app, .cfg_core, .cfg_data,
    .start(map_start), .policy(map_policy), .num_tasks, .task_app,
    .vul_const, .power_budget,
    .busy(map_busy), .done(map_done), .task_mapped, .task_core,
    .core_used(used), .mapped_count, .total_power, .total_fpvf
  );

  // cores are switched on once a completed mapping has given them a task
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n)        core_active <= '0;
    else if (map_done) core_active <= used;
  end

  for (genvar j = 0; j < NUM_CORES; j++) begin : g_core
    localparam rel_mode_e M = rel_mode_e'(j % NUM_MODES);
    assign core_mode[j] = M;
    hrm_core #(.MODE(M)) u_core (
      .clk, .rst_n,
      .core_en(core_active[j]),
      .core_in(core_in[j]),
      .core_out(core_out[j])
    );
  end
endmodule
