// pcircuit_fsm: the p-circuit controller.
//
// States:
//   IDLE    waiting. config=1 enters CONFIG; a non-zero start field starts
//           a run (the start field must have been zero since the last
//           run began, so a held instruction starts only one run).
//   CONFIG  cfg_mode=1: J words, the initial state, the seeds and the beta
//           inputs are written every clock. Leaves when config drops.
//   FETCH   the first clock of every sample: J rows of group 0 are read.
//   UPDATE  one clock per group of K p-bits: group g is updated from the
//           rows read in the previous clock while group g+1 is read. The
//           last group of a sample also steps beta by the anneal rate.
//   DONE    done=1 until the next run or configuration.
// A sample therefore takes ceil(N_m/K) + 1 clocks and a run
// (ceil(N_m/K) + 1) * N_s clocks, plus one clock from the start
// instruction to the first FETCH. Lanes at or beyond N_m are masked.
// N_m or N_s of zero goes straight to DONE. The state set and the use of
// the start and config fields are this design's own; the cycle count is
// the published one. Synchronous, active-high reset to IDLE.
module pcircuit_fsm
  import pccop_pkg::*;
#(
  parameter int unsigned N     = 2048,
  parameter int unsigned K     = 4,
  parameter int unsigned GRP_W = (N / K > 1) ? $clog2(N / K) : 1
) (
  input  logic             clk,
  input  logic             rst,
  input  instr_t           instr,
  input  logic [CNT_W-1:0] nm,          // from ctrl_regs, valid after run_load
  input  logic [CNT_W-1:0] ns,
  output state_t           state,
  output logic             cfg_mode,
  output logic             run_load,
  output logic             fetch,
  output logic             update,
  output logic             beta_update,
  output logic [GRP_W-1:0] group,
  output logic [GRP_W-1:0] rd_addr,
  output logic [K-1:0]     lane_mask,
  output logic             done
);
  localparam int unsigned KW = (K > 1) ? $clog2(K) : 0;

  logic [CNT_W-1:0] sample;
  logic [CNT_W-1:0] last_group;
  logic             armed;
  logic             start_req;
  logic             last_of_sample;

  assign last_group     = CNT_W'((nm + CNT_W'(K - 1)) >> KW) - CNT_W'(1);
  assign start_req      = (instr.start != '0) && !instr.cfg && armed;
  assign last_of_sample = (CNT_W'(group) == last_group);

  assign cfg_mode    = (state == ST_CONFIG);
  assign fetch       = (state == ST_FETCH);
  assign update      = (state == ST_UPDATE);
  assign done        = (state == ST_DONE);
  assign beta_update = update && last_of_sample;
  assign run_load    = (state == ST_IDLE || state == ST_DONE) && start_req;
  assign rd_addr     = fetch ? '0 : GRP_W'(group + GRP_W'(1));

  always_comb begin
    for (int r = 0; r < K; r++)
      lane_mask[r] = ((CNT_W'(group) << KW) + CNT_W'(r)) < nm;
  end

  always_ff @(posedge clk) begin
    if (rst) begin
      state  <= ST_IDLE;
      group  <= '0;
      sample <= '0;
      armed  <= 1'b0;
    end else begin
      if (instr.start == '0) armed <= 1'b1;
      unique case (state)
        ST_IDLE, ST_DONE: begin
          if (instr.cfg) state <= ST_CONFIG;
          else if (start_req) begin
            armed  <= 1'b0;
            group  <= '0;
            sample <= '0;
            state  <= (instr.nm == '0 || instr.ns == '0) ? ST_DONE : ST_FETCH;
          end
        end
        ST_CONFIG: if (!instr.cfg) state <= ST_IDLE;
        ST_FETCH: begin
          group <= '0;
          state <= ST_UPDATE;
        end
        ST_UPDATE: begin
          if (last_of_sample) begin
            group <= '0;
            if (sample == ns - CNT_W'(1)) state <= ST_DONE;
            else begin
              sample <= sample + CNT_W'(1);
              state  <= ST_FETCH;
            end
          end else begin
            group <= group + GRP_W'(1);
          end
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

  // Exactly one of the run-phase strobes at a time.
  always_ff @(posedge clk) if (!rst) assert ($onehot0({cfg_mode, fetch, update, done}))
    else $error("pcircuit_fsm: more than one phase active");
endmodule
