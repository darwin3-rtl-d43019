// tb_time_mgmt: self-checking test of the time management unit.
//
// A model controller answers each job a few cycles after it starts. The test
// checks that a toggle of the global time step yields one local tick, that
// no job starts while AER IN is busy, that inference jobs cover neurons
// 0..n-1 in order followed by learning jobs 0..s-1, that the step counter
// advances, and that a tick arriving mid-step is counted as an overrun and
// served afterwards.
module tb_time_mgmt;
  logic clk = 0, rst_n = 0;
  always #5 clk = ~clk;
  logic gstep, learn_en, ain_idle, compute, local_tick, job_start, job_learn, job_done;
  logic [12:0] n_neurons;
  logic [10:0] n_syn;
  logic [11:0] job_id;
  logic [15:0] step_count, overruns;

  time_mgmt dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(int got, int exp, string what);
    checks++;
    if (got != exp) begin failures++; $display("FAIL %s: got %0d expected %0d", what, got, exp); end
  endtask

  int inf_ids [$], lrn_ids [$], ticks = 0, early = 0;
  always @(posedge clk) begin
    job_done <= 1'b0;
    if (job_start) begin
      if (job_learn) lrn_ids.push_back(int'(job_id)); else inf_ids.push_back(int'(job_id));
      if (!ain_idle) early++;
      fork begin repeat (3) @(posedge clk); job_done <= 1'b1; end join_none
    end
    if (local_tick && rst_n) ticks++;
  end

  initial begin
    #1000000; failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    gstep = 0; learn_en = 1; ain_idle = 0; n_neurons = 13'd10; n_syn = 11'd4; job_done = 0;
    repeat (3) @(posedge clk); rst_n = 1;
    repeat (2) @(posedge clk);
    gstep = ~gstep;
    repeat (20) @(posedge clk);
    chk(inf_ids.size(), 0, "no job while AER IN busy");
    chk(int'(compute), 1, "compute raised");
    ain_idle = 1;
    wait (!compute);
    @(posedge clk);
    chk(ticks, 1, "one local tick");
    chk(inf_ids.size(), 10, "inference jobs");
    foreach (inf_ids[i]) chk(inf_ids[i], i, "inference order");
    chk(lrn_ids.size(), 4, "learning jobs");
    foreach (lrn_ids[i]) chk(lrn_ids[i], i, "learning order");
    chk(int'(step_count), 1, "step count");
    chk(early, 0, "job issued during AER IN activity");
    // overrun: second tick during a step
    inf_ids.delete(); lrn_ids.delete();
    gstep = ~gstep;
    repeat (12) @(posedge clk);
    gstep = ~gstep;
    wait (step_count == 16'd3);
    @(posedge clk);
    chk(int'(overruns), 1, "overrun counted");
    chk(inf_ids.size(), 20, "both steps served");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
