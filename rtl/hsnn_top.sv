// hsnn_top: event-driven spiking neural network for image segmentation.
//
// One controller, one processing element, one event queue and the merger,
// connected as in the system overview: the merger passes the event queue's
// root (the neuron that fires next, with its firing time and pixel value) to
// the controller; the controller advances the simulation time and feeds the
// nine synapse numbers of the event to the processing element; the
// processing element computes the new firing time of each involved neuron,
// writes it to its neuron state memory and sends it to the event queue as a
// delete-insert, which re-sorts the queue on the fly.
// The host, which is not part of this design, drives the h_* port: it loads
// the tables and the neurons (each H_INIT_NRN also inserts the neuron into
// the queue, one per 3 cycles), starts a run and reads the neurons back.
// With the defaults the network has 65 536 neurons (a 17-level queue).
// The queue's op port is shared: delete-inserts from the processing element
// during a run, inserts from the controller during initialisation.
module hsnn_top
  import hsnn_pkg::*;
#(
  parameter int unsigned LEVELS    = 17,
  parameter int unsigned N_NEURONS = 2 ** (LEVELS - 1),
  parameter pot_t        THRESHOLD = pot_t'(4096)
) (
  input  logic        clk,
  input  logic        rst_n,
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
  output time_t       sim_time,
  output logic        queue_overflow
);

  // merger <-> queue / controller
  logic  q_top_valid [1];
  elem_t q_top       [1];
  logic  q_settled   [1];
  logic  ev_valid, ev_settled;
  elem_t ev;
  logic  ev_queue;

  // controller <-> processing element
  logic        pe_valid, pe_probe, pe_busy;
  syn_t        pe_syn;
  id_t         pe_pre_id;
  pixel_t      pe_pre_pixel;
  logic        cfg_wr_en;
  hcmd_e       cfg_sel;
  id_t         cfg_addr;
  logic [31:0] cfg_data;
  logic        probe_valid;
  id_t         probe_id;
  time_t       probe_ftime;
  pixel_t      probe_pixel;
  pot_t        probe_potential;

  // event queue operation port
  logic  pe_q_valid, ins_valid, q_ready;
  elem_t pe_q_elem, ins_elem;
  logic  q_op_valid;
  qop_e  q_op;
  elem_t q_op_elem;

  controller u_ctrl (
    .clk            (clk),
    .rst_n          (rst_n),
    .h_valid        (h_valid),
    .h_cmd          (h_cmd),
    .h_addr         (h_addr),
    .h_data         (h_data),
    .h_ready        (h_ready),
    .r_valid        (r_valid),
    .r_ftime        (r_ftime),
    .r_pixel        (r_pixel),
    .r_potential    (r_potential),
    .running        (running),
    .events         (events),
    .elapsed        (elapsed),
    .ev_valid       (ev_valid),
    .ev             (ev),
    .ev_settled     (ev_settled),
    .pe_valid       (pe_valid),
    .pe_probe       (pe_probe),
    .pe_syn         (pe_syn),
    .pe_pre_id      (pe_pre_id),
    .pe_pre_pixel   (pe_pre_pixel),
    .sim_time       (sim_time),
    .cfg_wr_en      (cfg_wr_en),
    .cfg_sel        (cfg_sel),
    .cfg_addr       (cfg_addr),
    .cfg_data       (cfg_data),
    .pe_busy        (pe_busy),
    .probe_valid    (probe_valid),
    .probe_ftime    (probe_ftime),
    .probe_pixel    (probe_pixel),
    .probe_potential(probe_potential),
    .ins_valid      (ins_valid),
    .ins_elem       (ins_elem),
    .ins_ready      (q_ready)
  );

  processing_element #(.N_NEURONS(N_NEURONS), .THRESHOLD(THRESHOLD)) u_pe (
    .clk            (clk),
    .rst_n          (rst_n),
    .in_valid       (pe_valid),
    .in_probe       (pe_probe),
    .synapse_nbr    (pe_syn),
    .pre_id         (pe_pre_id),
    .pre_pixel      (pe_pre_pixel),
    .sim_time       (sim_time),
    .cfg_wr_en      (cfg_wr_en),
    .cfg_sel        (cfg_sel),
    .cfg_addr       (cfg_addr),
    .cfg_data       (cfg_data),
    .q_valid        (pe_q_valid),
    .q_elem         (pe_q_elem),
    .probe_valid    (probe_valid),
    .probe_id       (probe_id),
    .probe_ftime    (probe_ftime),
    .probe_pixel    (probe_pixel),
    .probe_potential(probe_potential),
    .busy           (pe_busy)
  );

  always_comb begin
    q_op_valid = pe_q_valid || ins_valid;
    q_op       = pe_q_valid ? Q_DELINS : Q_INSERT;
    q_op_elem  = pe_q_valid ? pe_q_elem : ins_elem;
  end

  shq_event_queue #(.LEVELS(LEVELS)) u_queue (
    .clk        (clk),
    .rst_n      (rst_n),
    .op_valid   (q_op_valid),
    .op         (q_op),
    .op_elem    (q_op_elem),
    .op_ready   (q_ready),
    .top_valid  (q_top_valid[0]),
    .top        (q_top[0]),
    .top_settled(q_settled[0]),
    .overflow   (queue_overflow)
  );

  merger #(.N_QUEUES(1)) u_merger (
    .clk        (clk),
    .rst_n      (rst_n),
    .top_valid  (q_top_valid),
    .top        (q_top),
    .top_settled(q_settled),
    .next_valid (ev_valid),
    .next       (ev),
    .next_queue (ev_queue),
    .settled    (ev_settled)
  );

  // the controller paces the processing element so that the queue is always
  // ready for its delete-inserts
  always_ff @(posedge clk) begin
    if (rst_n)
      assert (!(pe_q_valid && !q_ready))
        else $error("hsnn_top: event queue not ready for a delete-insert");
  end

endmodule
