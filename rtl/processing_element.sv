// processing_element: the five-stage pipeline that applies a spike to one
// neuron per issue.
//
// For each of the nine neurons involved in an event the controller hands in
// the synapse number, the firing (pre-synaptic) neuron's ID and pixel value
// and the simulation time. The stages, one clock cycle each:
//   1  topology solver: involved neuron ID and the "same neuron" flag;
//   2  neuron state memory read: its firing time and pixel value;
//   3  membrane model (potential now) and weight calculator (weight);
//   4  synapse model (add the weight, or reset by the threshold) and the
//      inverse membrane model's table read;
//   5  new firing time = table output + simulation time; it is written back
//      to the neuron state memory and sent to the event queue as a
//      delete-insert of {ID, new firing time, pixel}.
// The pipeline accepts one neuron per cycle; the event queue limits the
// controller to one per 7 cycles. The paper's structure is kept as drawn.
// This design adds: the pixel value travelling with the queue element (the
// queue's root must supply the pixel of the next firing neuron), a probe
// (in_probe) that sends a neuron through stages 1-4 without changing it and
// returns its firing time, pixel and present potential for read-back, and a
// configuration port through which the host loads the four tables, the
// threshold and the neuron state. Host writes to the neuron state memory
// are only made while stage 5 is idle (the controller sees to it).
module processing_element
  import hsnn_pkg::*;
#(
  parameter int unsigned N_NEURONS = 2 ** ID_W,
  parameter pot_t        THRESHOLD = pot_t'(4096)
) (
  input  logic        clk,
  input  logic        rst_n,
  // from the controller
  input  logic        in_valid,
  input  logic        in_probe,
  input  syn_t        synapse_nbr,
  input  id_t         pre_id,
  input  pixel_t      pre_pixel,
  input  time_t       sim_time,
  // configuration from the host (through the controller)
  input  logic        cfg_wr_en,
  input  hcmd_e       cfg_sel,
  input  id_t         cfg_addr,
  input  logic [31:0] cfg_data,
  // to the event queue
  output logic        q_valid,
  output elem_t       q_elem,
  // read-back
  output logic        probe_valid,
  output id_t         probe_id,
  output time_t       probe_ftime,
  output pixel_t      probe_pixel,
  output pot_t        probe_potential,
  output logic        busy
);

  typedef struct packed {
    logic   valid;
    logic   probe;
    logic   same;
    id_t    id;
    time_t  sim_time;
    pixel_t pre_pixel;
    pixel_t post_pixel;
    time_t  post_ftime;
  } ctl_t;

  ctl_t c2, c3, c4, c5;   // control in stages 2..5

  pot_t threshold_q;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) threshold_q <= THRESHOLD;
    else if (cfg_wr_en && cfg_sel == H_WR_THRESH) threshold_q <= cfg_data[POT_W-1:0];
  end

  // ------------------------------------------------------------ stage 1
  logic ts_valid, ts_same;
  id_t  ts_post;
  topology_solver #(.N_NEURONS(N_NEURONS)) u_topo (
    .clk          (clk),
    .rst_n        (rst_n),
    .wr_en        (cfg_wr_en && cfg_sel == H_WR_TOPO),
    .wr_addr      (syn_t'(cfg_addr)),
    .wr_offset    (cfg_data[ID_W-1:0]),
    .in_valid     (in_valid),
    .synapse_nbr  (synapse_nbr),
    .pre_id       (pre_id),
    .out_valid    (ts_valid),
    .post_id      (ts_post),
    .same_pre_post(ts_same)
  );

  logic   p1_probe;
  id_t    p1_id;
  pixel_t p1_pixel;
  time_t  p1_time;
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      p1_probe <= 1'b0;
      p1_id    <= '0;
      p1_pixel <= '0;
      p1_time  <= '0;
    end else begin
      p1_probe <= in_valid && in_probe;
      p1_id    <= pre_id;
      p1_pixel <= pre_pixel;
      p1_time  <= sim_time;
    end
  end

  always_comb begin
    c2            = '0;
    c2.valid      = ts_valid;
    c2.probe      = p1_probe;
    c2.same       = ts_same && !p1_probe;
    c2.id         = p1_probe ? p1_id : ts_post;
    c2.sim_time   = p1_time;
    c2.pre_pixel  = p1_pixel;
  end

  // ------------------------------------------------------------ stage 2
  time_t  nm_ftime;
  pixel_t nm_pixel;
  logic   nm_wr_en, nm_wr_pixel_en;
  id_t    nm_wr_addr;
  time_t  nm_wr_ftime;
  pixel_t nm_wr_pixel;

  neuron_state_memory #(.DEPTH(N_NEURONS)) u_nsm (
    .clk        (clk),
    .rd_en      (c2.valid),
    .rd_addr    (c2.id),
    .rd_ftime   (nm_ftime),
    .rd_pixel   (nm_pixel),
    .wr_en      (nm_wr_en),
    .wr_pixel_en(nm_wr_pixel_en),
    .wr_addr    (nm_wr_addr),
    .wr_ftime   (nm_wr_ftime),
    .wr_pixel   (nm_wr_pixel)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c3 <= '0;
    else        c3 <= c2;
  end

  // ------------------------------------------------------------ stage 3
  weight_t syn_weight;
  pot_t    post_potential;

  weight_calculator u_wcalc (
    .clk       (clk),
    .wr_en     (cfg_wr_en && cfg_sel == H_WR_WEIGHT),
    .wr_addr   (cfg_addr[PIXEL_W:0]),
    .wr_weight (cfg_data[WEIGHT_W-1:0]),
    .in_valid  (c3.valid),
    .pre_pixel (c3.pre_pixel),
    .post_pixel(nm_pixel),
    .syn_weight(syn_weight)
  );

  membrane_model u_memb (
    .clk           (clk),
    .wr_en         (cfg_wr_en && cfg_sel == H_WR_MEMB),
    .wr_addr       (cfg_addr[TIME_W-1:0]),
    .wr_pot        (cfg_data[POT_W-1:0]),
    .in_valid      (c3.valid),
    .post_ftime    (nm_ftime),
    .sim_time      (c3.sim_time),
    .post_potential(post_potential)
  );

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c4 <= '0;
    else begin
      c4            <= c3;
      c4.post_pixel <= nm_pixel;
      c4.post_ftime <= nm_ftime;
    end
  end

  // ------------------------------------------------------------ stage 4
  pot_t post_new_potential;
  synapse_model u_syn (
    .same_pre_post     (c4.same),
    .syn_weight        (syn_weight),
    .threshold         (threshold_q),
    .post_potential    (post_potential),
    .post_new_potential(post_new_potential)
  );

  time_t post_new_ftime;
  inverse_membrane_model u_inv (
    .clk               (clk),
    .wr_en             (cfg_wr_en && cfg_sel == H_WR_INVMEMB),
    .wr_addr           (cfg_addr[POT_W-1:0]),
    .wr_phase          (cfg_data[TIME_W-1:0]),
    .in_valid          (c4.valid && !c4.probe),
    .post_new_potential(post_new_potential),
    .sim_time          (c5.sim_time),
    .post_new_ftime    (post_new_ftime)
  );

  assign probe_valid     = c4.valid && c4.probe;
  assign probe_id        = c4.id;
  assign probe_ftime     = c4.post_ftime;
  assign probe_pixel     = c4.post_pixel;
  assign probe_potential = post_potential;

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) c5 <= '0;
    else begin
      c5       <= c4;
      c5.valid <= c4.valid && !c4.probe;
    end
  end

  // ------------------------------------------------------------ stage 5
  assign q_valid        = c5.valid;
  assign q_elem.id      = c5.id;
  assign q_elem.ftime   = post_new_ftime;
  assign q_elem.pixel   = c5.post_pixel;

  always_comb begin
    nm_wr_en       = c5.valid;
    nm_wr_pixel_en = 1'b0;
    nm_wr_addr     = c5.id;
    nm_wr_ftime    = post_new_ftime;
    nm_wr_pixel    = c5.post_pixel;
    if (!c5.valid && cfg_wr_en && cfg_sel == H_INIT_NRN) begin
      nm_wr_en       = 1'b1;
      nm_wr_pixel_en = 1'b1;
      nm_wr_addr     = cfg_addr;
      nm_wr_ftime    = cfg_data[TIME_W-1:0];
      nm_wr_pixel    = cfg_data[TIME_W +: PIXEL_W];
    end
  end

  assign busy = in_valid || ts_valid || c3.valid || c4.valid || c5.valid;

  always_ff @(posedge clk) begin
    if (rst_n)
      assert (!(c5.valid && cfg_wr_en && cfg_sel == H_INIT_NRN))
        else $error("processing_element: host write while the pipeline writes back");
  end

endmodule
