// nn_pkg: types and constants shared by the neural multicore.
//
// The on-chip network moves 8-bit values (the paper's link width). Each link
// here also carries a valid bit, which is this design's own addition so that a
// receiver can tell an idle slot from a zero byte. Switch ports are numbered
// N, E, S, W and the local core (L). A route entry of a switch says, for one
// output port in one time slot, whether it is driven and from which input.
package nn_pkg;

  localparam int FLIT_W = 8;   // network bus width in bits (paper: 8)
  localparam int NPORTS = 5;   // N, E, S, W, local core

  typedef struct packed {
    logic              valid;
    logic [FLIT_W-1:0] data;
  } flit_t;

  typedef enum logic [2:0] {
    P_N = 3'd0,
    P_E = 3'd1,
    P_S = 3'd2,
    P_W = 3'd3,
    P_L = 3'd4
  } port_e;

  typedef struct packed {
    logic  en;    // output driven in this slot
    port_e src;   // input port it is connected to
  } route_t;

  typedef enum logic [0:0] {
    CORE_MEMRISTOR = 1'b0,
    CORE_DIGITAL   = 1'b1
  } core_kind_e;

  // Per-core configuration registers (address map shared by both core types;
  // digital cores additionally decode the LUT and weight regions).
  localparam logic [19:0] CFG_NUM_IN  = 20'h0_0000; // input values/flits per pattern
  localparam logic [19:0] CFG_NUM_OUT = 20'h0_0001; // output flits per pattern
  localparam logic [19:0] CFG_SHIFT   = 20'h0_0002; // digital: accumulator scaling
  localparam logic [19:0] CFG_MODE    = 20'h0_0003; // memristor: 1 = programming mode
  localparam logic [19:0] CFG_LUT     = 20'h0_0100; // digital: 0x100..0x1FF activation LUT
  localparam logic [19:0] CFG_WEIGHT  = 20'h8_0000; // digital: 0x80000 | row<<7 | col

  // Memristor programming commands issued by the off-chip programmer.
  typedef enum logic [1:0] {
    PG_READ  = 2'd0,  // read one device through the column sense resistor and ADC
    PG_SET   = 2'd1,  // one pulse that raises the device conductance
    PG_RESET = 2'd2   // one pulse that lowers the device conductance
  } pg_op_e;

  typedef struct packed {
    pg_op_e     op;
    logic [7:0] row;   // crossbar input row (0..N_IN, N_IN is the bias row)
    logic [7:0] col;   // crossbar column (neuron)
    logic       neg;   // 0: device on the true input line, 1: on the inverted line
  } pg_cmd_t;

endpackage
