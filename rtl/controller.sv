// controller: runs the event-driven simulation loop and talks to the host.
//
// Simulation loop (algorithm "event-driven implementation"): when the event
// queue's root has settled, the merger's output is the next event, the
// neuron with the earliest predicted firing time. The controller advances
// the simulation time to that firing time and hands the processing element
// the nine synapse numbers 0..N_SYN-1 of the event, one every ISSUE_INTERVAL
// (7) cycles, the rate at which the event queue accepts the resulting
// delete-inserts. It then waits for the processing element to drain and the
// root to settle before taking the next event. One event thus takes
// 9 * 7 cycles of issue plus the pipeline and root latency.
// The run ends when the next event would pass the requested run time
// (counted in firing-time units in a 32-bit elapsed-time register, so runs
// may span many wraps of the 13-bit time) or when the queue is empty.
//
// Host commands (h_valid/h_ready handshake, see hcmd_e): table and
// threshold writes go to the processing element; H_INIT_NRN writes a neuron's
// pixel and initial firing time to the neuron state memory and inserts it
// into the event queue; H_RUN starts a run; H_READ_NRN sends a probe through
// the processing element and returns the neuron's firing time, pixel and
// present membrane potential on r_*. Commands are taken only while no run is
// going on. The loop follows the paper; the host protocol, the elapsed-time
// stop rule and the probe are this design's own.
module controller
  import hsnn_pkg::*;
#(
  parameter int unsigned ISSUE_INTERVAL = DELINS_INTERVAL
) (
  input  logic        clk,
  input  logic        rst_n,
  // host
  input  logic        h_valid,
  input  hcmd_e       h_cmd,
  input  id_t         h_addr,
  input  logic [31:0] h_data,
  output logic        h_ready,
  output logic        r_valid,
  output time_t       r_ftime,
  output pixel_t      r_pixel,
  output pot_t        r_potential,
  output logic        running,
  output logic [31:0] events,
  output logic [31:0] elapsed,
  // merger
  input  logic        ev_valid,
  input  elem_t       ev,
  input  logic        ev_settled,
  // processing element
  output logic        pe_valid,
  output logic        pe_probe,
  output syn_t        pe_syn,
  output id_t         pe_pre_id,
  output pixel_t      pe_pre_pixel,
  output time_t       sim_time,
  output logic        cfg_wr_en,
  output hcmd_e       cfg_sel,
  output id_t         cfg_addr,
  output logic [31:0] cfg_data,
  input  logic        pe_busy,
  input  logic        probe_valid,
  input  time_t       probe_ftime,
  input  pixel_t      probe_pixel,
  input  pot_t        probe_potential,
  // event queue, initial inserts
  output logic        ins_valid,
  output elem_t       ins_elem,
  input  logic        ins_ready
);

  typedef enum logic [2:0] {S_IDLE, S_WAIT, S_ISSUE, S_DRAIN, S_PROBE} state_e;

  state_e      state;
  logic [31:0] run_time;
  elem_t       pre;
  syn_t        syn;
  logic [2:0]  gap;
  time_t       delta;

  assign delta = ev.ftime - sim_time;

  // host command decoding (idle only)
  logic idle_cmd;
  assign idle_cmd = (state == S_IDLE) && h_valid;

  always_comb begin
    h_ready   = 1'b0;
    cfg_wr_en = 1'b0;
    cfg_sel   = h_cmd;
    cfg_addr  = h_addr;
    cfg_data  = h_data;
    ins_valid = 1'b0;
    ins_elem  = '{id: h_addr, ftime: h_data[TIME_W-1:0], pixel: h_data[TIME_W +: PIXEL_W]};
    if (idle_cmd) begin
      case (h_cmd)
        H_WR_TOPO, H_WR_WEIGHT, H_WR_MEMB, H_WR_INVMEMB, H_WR_THRESH: begin
          h_ready   = 1'b1;
          cfg_wr_en = 1'b1;
        end
        H_INIT_NRN: begin
          ins_valid = 1'b1;
          h_ready   = ins_ready;
          cfg_wr_en = ins_ready;
        end
        H_RUN, H_READ_NRN, H_NOP: h_ready = 1'b1;
        default: h_ready = 1'b1;
      endcase
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      state        <= S_IDLE;
      run_time     <= '0;
      pre          <= '0;
      syn          <= '0;
      gap          <= '0;
      sim_time     <= '0;
      events       <= '0;
      elapsed      <= '0;
      pe_valid     <= 1'b0;
      pe_probe     <= 1'b0;
      pe_syn       <= '0;
      pe_pre_id    <= '0;
      pe_pre_pixel <= '0;
      r_valid      <= 1'b0;
      r_ftime      <= '0;
      r_pixel      <= '0;
      r_potential  <= '0;
    end else begin
      pe_valid <= 1'b0;
      pe_probe <= 1'b0;
      r_valid  <= 1'b0;
      case (state)
        S_IDLE: if (h_valid) begin
          if (h_cmd == H_RUN) begin
            run_time <= h_data;
            elapsed  <= '0;
            events   <= '0;
            state    <= S_WAIT;
          end else if (h_cmd == H_READ_NRN) begin
            pe_valid  <= 1'b1;
            pe_probe  <= 1'b1;
            pe_pre_id <= h_addr;
            state     <= S_PROBE;
          end
        end
        S_PROBE: if (probe_valid) begin
          r_valid     <= 1'b1;
          r_ftime     <= probe_ftime;
          r_pixel     <= probe_pixel;
          r_potential <= probe_potential;
          state       <= S_IDLE;
        end
        S_WAIT: if (ev_settled && !pe_busy) begin
          if (!ev_valid || (elapsed + 32'(delta)) > run_time) begin
            state <= S_IDLE;             // run time reached or queue empty
          end else begin
            sim_time <= ev.ftime;
            elapsed  <= elapsed + 32'(delta);
            pre      <= ev;
            syn      <= '0;
            gap      <= '0;
            state    <= S_ISSUE;
          end
        end
        S_ISSUE: begin
          if (gap == 3'd0) begin
            pe_valid     <= 1'b1;
            pe_syn       <= syn;
            pe_pre_id    <= pre.id;
            pe_pre_pixel <= pre.pixel;
            syn          <= syn + 1'b1;
            if (int'(syn) == N_SYN - 1) begin
              events <= events + 1'b1;
              state  <= S_DRAIN;
            end
          end
          gap <= (int'(gap) == ISSUE_INTERVAL - 1) ? 3'd0 : gap + 3'd1;
        end
        S_DRAIN: if (!pe_valid) state <= S_WAIT;
        default: state <= S_IDLE;
      endcase
    end
  end

  assign running = (state == S_WAIT) || (state == S_ISSUE) || (state == S_DRAIN);

endmodule
