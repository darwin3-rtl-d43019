// time_mgmt: time management unit of a neuron core.
//
// Two jobs, as the design assigns them to this unit. The local time step
// generator turns the global time step (a level that toggles once per step,
// so it can cross from the tick generator's clock island with a two-flop
// synchroniser) into a one-cycle local tick. The time-division multiplexer
// then walks the configured number of logical neurons (1..4096) and hands
// each to the controller as an inference job; if learning is enabled it
// then walks the plastic synapses as learning jobs.
//
// Before the first job of a step it raises `compute` and waits for AER IN to
// finish the packet it is working on (ain_idle), so that spike delivery and
// neuron updates never touch the dendritic accumulators at the same time.
// A tick that arrives while the previous step is still being computed is
// counted in `overruns` and served when the current step ends. The
// synchroniser, handshake and overrun policy are this implementation's
// choices; the design gives only the two functions.
module time_mgmt #(
  parameter int unsigned NID_BITS = 12,
  parameter int unsigned LID_BITS = 10
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                gstep,         // global time step (toggle)
  input  logic [NID_BITS:0]   n_neurons,     // 1..2^NID_BITS
  input  logic                learn_en,
  input  logic [LID_BITS:0]   n_syn,         // plastic synapses to update
  input  logic                ain_idle,
  output logic                compute,       // step in progress: hold AER IN
  output logic                local_tick,
  output logic                job_start,
  output logic                job_learn,
  output logic [NID_BITS-1:0] job_id,
  input  logic                job_done,
  output logic [15:0]         step_count,
  output logic [15:0]         overruns
);

  logic [2:0] sync_q;
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) sync_q <= '0;
    else        sync_q <= {sync_q[1:0], gstep};
  assign local_tick = sync_q[2] ^ sync_q[1];

  typedef enum logic [2:0] {T_IDLE, T_DRAIN, T_ISSUE, T_WAIT, T_NEXT} tstate_e;
  tstate_e st;
  logic pending;
  logic [NID_BITS:0] cnt;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st <= T_IDLE; pending <= 1'b0; cnt <= '0; job_learn <= 1'b0;
      step_count <= '0; overruns <= '0;
    end else begin
      if (local_tick && st != T_IDLE) begin
        pending  <= 1'b1;
        overruns <= overruns + 1'b1;
      end
      unique case (st)
        T_IDLE: if (local_tick || pending) begin
          if (!local_tick) pending <= 1'b0;
          cnt <= '0; job_learn <= 1'b0;
          st <= T_DRAIN;
        end
        T_DRAIN: if (ain_idle) st <= (n_neurons == '0) ? T_NEXT : T_ISSUE;
        T_ISSUE: st <= T_WAIT;
        T_WAIT:  if (job_done) begin
          cnt <= cnt + 1'b1;
          st  <= T_NEXT;
        end
        T_NEXT: begin
          if (!job_learn && cnt < n_neurons && n_neurons != '0) st <= T_ISSUE;
          else if (!job_learn && learn_en && n_syn != '0) begin
            job_learn <= 1'b1; cnt <= '0; st <= T_ISSUE;
          end else if (job_learn && cnt < (NID_BITS+1)'(n_syn)) st <= T_ISSUE;
          else begin
            step_count <= step_count + 1'b1;
            st <= T_IDLE;
          end
        end
        default: st <= T_IDLE;
      endcase
    end
  end

  assign compute   = (st != T_IDLE);
  assign job_start = (st == T_ISSUE);
  assign job_id    = cnt[NID_BITS-1:0];

endmodule
