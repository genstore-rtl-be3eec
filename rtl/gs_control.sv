// gs_control: SSD-level control unit of GenStore.
//
// Switches the SSD between regular operation and accelerator mode and runs one
// filtering job at a time:
//   IDLE  regular SSD; a host command (cmd_valid with cmd_mode EM or NM) starts a job.
//   PREP  the FTL flushes its L2P mappings and loads GenStore metadata; it
//         signals prep_done.
//   EM/NM the chosen filter runs (em_run / nm_run); start pulses for one cycle on
//         entry so the filters clear their state. The state ends when the
//         filter reports done (em_done, or nm_done of every channel).
//   DONE  lasts one cycle; done is high in the following cycle, when the SSD is
//         back in regular mode (IDLE).
// accel_mode is set in PREP, EM, NM and DONE. The unit also counts, per job,
// the reads kept in the SSD (filtered) and the reads sent to the host.
//
// From the paper: the sequence start analysis -> preparation (flush L2P, load
// metadata) -> filtering -> unfiltered reads to host, and a single control unit
// per SSD. Own choices: the states, the handshake and the counters.
module gs_control
  import gs_pkg::*;
#(
  parameter int unsigned CH = CHANNELS,
  parameter int unsigned CNT_W = 40
) (
  input  logic             clk,
  input  logic             rst_n,
  input  logic             cmd_valid,
  input  gs_mode_e         cmd_mode,
  output logic             cmd_ready,
  input  logic             prep_done,
  input  logic             em_done,
  input  logic [CH-1:0]    nm_done,
  // per-read events
  input  logic             em_res,         // an EM result was taken
  input  logic             em_res_exact,
  input  logic [CH-1:0]    nm_res,         // an NM verdict was taken, per channel
  input  logic [CH-1:0]    nm_res_host,
  output gs_state_e        state,
  output logic             accel_mode,
  output logic             em_run,
  output logic             nm_run,
  output logic             start,
  output logic             done,
  output logic [CNT_W-1:0] filtered_cnt,
  output logic [CNT_W-1:0] host_cnt
);

  gs_mode_e mode;

  assign cmd_ready  = (state == ST_IDLE);
  assign accel_mode = (state != ST_IDLE);
  assign em_run     = (state == ST_EM);
  assign nm_run     = (state == ST_NM);

  // Reads counted in this cycle.
  logic [$clog2(CH+2)-1:0] n_filt, n_host;
  always_comb begin
    n_filt = '0;
    n_host = '0;
    if (em_res) begin
      if (em_res_exact) n_filt = n_filt + 1'b1;
      else              n_host = n_host + 1'b1;
    end
    for (int c = 0; c < int'(CH); c++) begin
      if (nm_res[c]) begin
        if (nm_res_host[c]) n_host = n_host + 1'b1;
        else                n_filt = n_filt + 1'b1;
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= ST_IDLE;
      mode         <= MODE_EM;
      start        <= 1'b0;
      done         <= 1'b0;
      filtered_cnt <= '0;
      host_cnt     <= '0;
    end else begin
      start <= 1'b0;
      done  <= 1'b0;
      filtered_cnt <= filtered_cnt + CNT_W'(n_filt);
      host_cnt     <= host_cnt + CNT_W'(n_host);
      unique case (state)
        ST_IDLE: if (cmd_valid) begin
          mode         <= cmd_mode;
          filtered_cnt <= '0;
          host_cnt     <= '0;
          state        <= ST_PREP;
        end
        ST_PREP: if (prep_done) begin
          state <= (mode == MODE_EM) ? ST_EM : ST_NM;
          start <= 1'b1;
        end
        ST_EM: if (em_done && !start) state <= ST_DONE;
        ST_NM: if ((&nm_done) && !start) state <= ST_DONE;
        ST_DONE: begin
          done  <= 1'b1;
          state <= ST_IDLE;
        end
        default: state <= ST_IDLE;
      endcase
    end
  end

endmodule
