// tb_gs_control: self-checking test of the SSD control unit.
//
// Runs EM and NM jobs with random preparation and filtering times, checks the
// state sequence IDLE -> PREP -> EM/NM -> DONE -> IDLE, the one-cycle start and
// done pulses, that an NM job waits for every channel, that stale done flags
// in the start cycle are ignored, and the filtered/host read counters against
// a count kept by the test.
module tb_gs_control;
  import gs_pkg::*;
  localparam int CH = 4;
  logic clk = 0, rst_n = 0;
  logic cmd_valid = 0, cmd_ready, prep_done = 0, em_done = 0;
  gs_mode_e cmd_mode = MODE_EM;
  logic [CH-1:0] nm_done = '0, nm_res = '0, nm_res_host = '0;
  logic em_res = 0, em_res_exact = 0;
  gs_state_e state;
  logic accel_mode, em_run, nm_run, start, done;
  logic [39:0] filtered_cnt, host_cnt;
  int checks = 0, failures = 0;
  longint exp_filt = 0, exp_host = 0;
  bit counting = 0;

  gs_control #(.CH(CH)) dut (.*);
  always #5 clk = ~clk;

  task automatic chk(input bit ok, input string msg);
    checks++;
    if (!ok) begin failures++; $display("FAIL: %s (state %s)", msg, state.name()); end
  endtask

  // random results while a job runs
  always @(negedge clk) begin
    if (counting) begin
      em_res = em_run && ($urandom_range(1) == 1);
      em_res_exact = ($urandom_range(99) < 80);
      nm_res = nm_run ? CH'($urandom) : '0;
      nm_res_host = CH'($urandom);
    end else begin
      em_res = 0; nm_res = '0;
    end
  end
  always @(posedge clk) if (rst_n) begin
    if (em_res) begin if (em_res_exact) exp_filt++; else exp_host++; end
    for (int c = 0; c < CH; c++) if (nm_res[c]) begin
      if (nm_res_host[c]) exp_host++; else exp_filt++;
    end
  end

  initial begin
    #2000000;
    failures++;
    $display("FAIL: watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic job(input gs_mode_e m);
    int t;
    @(negedge clk);
    chk(state == ST_IDLE && cmd_ready && !accel_mode, "idle before command");
    cmd_valid = 1; cmd_mode = m;
    @(negedge clk);
    cmd_valid = 0;
    exp_filt = 0; exp_host = 0;
    chk(state == ST_PREP && accel_mode && !cmd_ready, "prep after command");
    chk(filtered_cnt == 0 && host_cnt == 0, "counters cleared");
    repeat ($urandom_range(1, 20)) begin
      @(negedge clk);
      chk(state == ST_PREP && !start, "waiting in prep");
    end
    prep_done = 1;
    // stale done flags from the previous job
    em_done = 1; nm_done = '1;
    @(negedge clk);
    prep_done = 0;
    chk(start, "start pulse");
    chk(m == MODE_EM ? (state == ST_EM && em_run && !nm_run) : (state == ST_NM && nm_run && !em_run),
        "filter state entered");
    em_done = 0; nm_done = '0;
    counting = 1;
    @(negedge clk);
    chk(!start, "start is one cycle");
    t = $urandom_range(10, 60);
    for (int i = 0; i < t; i++) begin
      @(negedge clk);
      if (m == MODE_NM && i > 3 && $urandom_range(3) == 0) nm_done[$urandom_range(CH - 1)] = 1;
      if (m == MODE_NM) chk(state == ST_NM || &nm_done, "NM waits for all channels");
      if (state == ST_DONE) break;
    end
    counting = 0;
    if (m == MODE_EM) em_done = 1; else nm_done = '1;
    while (state != ST_DONE) @(negedge clk);
    em_done = 0; nm_done = '0;
    chk(accel_mode && !done, "done state");
    @(negedge clk);
    chk(done && state == ST_IDLE && !accel_mode, "done pulse and regular mode");
    @(negedge clk);
    chk(!done, "done is one cycle");
    chk(filtered_cnt == 40'(exp_filt) && host_cnt == 40'(exp_host), "read counters");
    $display("job %s: filtered %0d host %0d", m.name(), filtered_cnt, host_cnt);
  endtask

  initial begin
    repeat (2) @(posedge clk);
    rst_n = 1;
    repeat (6) job($urandom_range(1) ? MODE_NM : MODE_EM);
    job(MODE_EM);
    job(MODE_NM);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
