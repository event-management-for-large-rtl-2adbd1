// hsnn_pkg: widths, types and constants shared by the event-driven spiking
// neural network.
//
// The network is a 256 x 256 grid of leaky integrate-and-fire neurons. Each
// neuron's state is its predicted firing time; the event queue keeps these
// times partially sorted so that the next neuron to fire is always at its root.
// Firing times and membrane potentials are 13 bits, pixel values 8 bits and
// synaptic weights 9 bits, as in the FPGA implementation this design follows.
// The neuron ID is 16 bits (65 536 neurons). Synapse number 0..8 selects one of
// the nine neurons involved in an event: the eight neighbours and the firing
// neuron itself. The 4-bit synapse number width is this design's choice.
package hsnn_pkg;

  localparam int unsigned ID_W     = 16;  // neuron number
  localparam int unsigned TIME_W   = 13;  // firing time / simulation time
  localparam int unsigned POT_W    = 13;  // membrane potential
  localparam int unsigned PIXEL_W  = 8;   // pixel value (grey level)
  localparam int unsigned WEIGHT_W = 9;   // synaptic weight
  localparam int unsigned SYN_W    = 4;   // synapse number
  localparam int unsigned N_SYN    = 9;   // neurons involved in one event

  // Cycles between two delete-insert operations accepted by the event queue,
  // and hence between two neurons handed to the processing element.
  localparam int unsigned DELINS_INTERVAL = 7;
  localparam int unsigned INSERT_INTERVAL = 3;
  localparam int unsigned DELETE_INTERVAL = 6;

  typedef logic [ID_W-1:0]     id_t;
  typedef logic [TIME_W-1:0]   time_t;
  typedef logic [POT_W-1:0]    pot_t;
  typedef logic [PIXEL_W-1:0]  pixel_t;
  typedef logic [WEIGHT_W-1:0] weight_t;
  typedef logic [SYN_W-1:0]    syn_t;

  // One element of the event queue: neuron number, predicted firing time and
  // the neuron's pixel value, which travels with the event to the controller.
  typedef struct packed {
    id_t    id;
    time_t  ftime;
    pixel_t pixel;
  } elem_t;

  // One node of the binary memory tree.
  typedef struct packed {
    logic  valid;
    elem_t e;
  } node_t;

  typedef enum logic [1:0] {
    Q_NOP    = 2'd0,
    Q_INSERT = 2'd1,
    Q_DELETE = 2'd2,
    Q_DELINS = 2'd3   // delete the element with this ID, then insert it anew
  } qop_e;

  // Firing times wrap around at 2^TIME_W. All pending events lie less than
  // half the time range after the simulation time, so "a is earlier than b"
  // is decided on the signed difference a - b.
  function automatic logic time_before(time_t a, time_t b);
    time_t d;
    d = a - b;
    return d[TIME_W-1];
  endfunction

  // A delete travelling down the structured heap queue: locating the
  // element with ID `id`, or (promote = 1) filling the hole at node `idx`.
  typedef struct packed {
    logic valid;
    logic promote;
    id_t  id;
    id_t  idx;
  } dtok_t;

  // An insert travelling down the queue, carrying the element to place.
  typedef struct packed {
    logic  valid;
    elem_t e;
  } itok_t;

  // Host command port of the controller.
  typedef enum logic [3:0] {
    H_NOP        = 4'd0,
    H_WR_TOPO    = 4'd1,  // addr = synapse number, data = neuron offset
    H_WR_WEIGHT  = 4'd2,  // addr = 9-bit pixel difference, data = weight
    H_WR_MEMB    = 4'd3,  // addr = phase, data = potential
    H_WR_INVMEMB = 4'd4,  // addr = potential, data = phase
    H_WR_THRESH  = 4'd5,  // data = threshold potential
    H_INIT_NRN   = 4'd6,  // addr = neuron, data = {pixel, firing time}: memory + queue insert
    H_RUN        = 4'd7,  // data = simulated time to run, in firing-time units
    H_READ_NRN   = 4'd8   // addr = neuron: returns firing time, pixel and potential
  } hcmd_e;

endpackage
