// encrypted_control_top: encrypted feedback loop of plant interface,
// communication network and controller.
//
// Plant outputs are encrypted in the plant interface, travel over a network
// link to the controller, which evaluates the control law on ciphertexts,
// and the encrypted control inputs travel over a second link back to the
// plant interface, which decrypts them for the actuator.  Only ciphertexts
// (in Montgomery form) cross the links; the controller never holds a
// plaintext or the private key.  The random numbers for encryption and the
// encrypted setpoints come in from outside, as do all key constants and the
// controller's coefficient matrices (plaintext n'-bit integers).
//
// Each of the two engines owns a single Montgomery exponentiator with two
// multipliers (the paper's experimental configuration) and its own control
// unit; their activity is triggered by the sample strobe and by the arrival
// of data from the network.  While the controller works on one sample the
// plant interface computes r^N for the next one.
//
// Interface: see plant_interface and secure_controller.  sample_valid starts
// a control period; u_valid/u_hat deliver its decrypted control input.  The
// sampling period must cover encryption, two network latencies, the
// controller's full step and decryption (a sample must not reach a busy
// controller).  Default sizes are the paper's pendulum experiment: 256-bit
// key, 4 states, 3 outputs, 1 input, n' = 32, m = 7.  NET_LAT is this
// design's own choice.
module encrypted_control_top
  import paillier_pkg::*;
#(
  parameter int unsigned KEY_BITS = DEFAULT_KEY_BITS,
  parameter int unsigned NX       = 4,
  parameter int unsigned NY       = 3,
  parameter int unsigned NU       = 1,
  parameter int unsigned NPRIME   = DEFAULT_NPRIME,
  parameter int unsigned MFRAC    = DEFAULT_MFRAC,
  parameter int unsigned TW       = 16,
  parameter int unsigned NET_LAT  = 4,
  localparam int unsigned OPW     = opw_for_key(KEY_BITS)
) (
  input  logic                               clk,
  input  logic                               rst_n,
  // key constants (public key for the controller; the plant interface also
  // holds lambda and mu)
  input  logic [KEY_BITS-1:0]                n_key,
  input  logic [KEY_BITS-1:0]                lambda,
  input  logic [NUM_MODS-1:0][OPW-1:0]       mods,
  input  logic [NUM_MODS-1:0][WORD_BITS-1:0] mprime,
  input  logic [OPW-1:0]                     one_n2,
  input  logic [OPW-1:0]                     r2_n2,
  input  logic [OPW-1:0]                     nr_n2,
  input  logic [OPW-1:0]                     ninv_r2,
  input  logic [OPW-1:0]                     mu_r2,
  // controller coefficients and reset period
  input  logic [NX-1:0][NX-1:0][NPRIME-1:0]  a_hat,
  input  logic [NX-1:0][NY-1:0][NPRIME-1:0]  b_hat,
  input  logic [NU-1:0][NX-1:0][NPRIME-1:0]  c_hat,
  input  logic [TW-1:0]                      t_period,
  input  logic [NY-1:0][OPW-1:0]             sct,        // encrypted setpoints
  // random number source
  input  logic                               rnd_valid,
  input  logic [NY-1:0][KEY_BITS-1:0]        rnd,
  output logic                               rnd_ready,
  // sensors and actuators
  input  logic                               sample_valid,
  input  logic [NY-1:0][NPRIME-1:0]          y_hat,
  output logic                               sample_ready,
  output logic                               u_valid,
  output logic [NU-1:0][NPRIME-1:0]          u_hat,
  // status
  output logic                               plant_busy,
  output logic                               ctrl_busy,
  output logic                               state_reset,
  output logic [TW-1:0]                      k_mod
);

  localparam int unsigned NCW = $clog2(NET_LAT + 1);

  logic                   pi_yct_valid, c_yct_valid, c_uct_valid, pi_uct_valid;
  logic [NY-1:0][OPW-1:0] pi_yct, c_yct;
  logic [NU-1:0][OPW-1:0] c_uct, pi_uct;
  logic [NCW-1:0]         up_in_flight, down_in_flight;

  plant_interface #(.KEY_BITS(KEY_BITS), .NY(NY), .NU(NU), .NPRIME(NPRIME)) u_plant_if (
    .clk, .rst_n,
    .n_key, .lambda, .mods, .mprime, .one_n2, .r2_n2, .nr_n2, .ninv_r2, .mu_r2,
    .rnd_valid, .rnd, .rnd_ready,
    .sample_valid, .y_hat, .sample_ready,
    .yct_valid(pi_yct_valid), .yct(pi_yct),
    .uct_valid(pi_uct_valid), .uct(pi_uct),
    .u_valid, .u_hat,
    .busy(plant_busy)
  );

  network_link #(.DW(NY * OPW), .LATENCY(NET_LAT)) u_net_up (
    .clk, .rst_n,
    .in_valid(pi_yct_valid), .in_data(pi_yct),
    .out_valid(c_yct_valid), .out_data(c_yct),
    .in_flight(up_in_flight)
  );

  secure_controller #(.KEY_BITS(KEY_BITS), .NX(NX), .NY(NY), .NU(NU), .NPRIME(NPRIME),
                      .MFRAC(MFRAC), .TW(TW)) u_ctrl (
    .clk, .rst_n,
    .mods, .mprime, .one_n2,
    .a_hat, .b_hat, .c_hat, .t_period, .sct,
    .yct_valid(c_yct_valid), .yct(c_yct),
    .uct_valid(c_uct_valid), .uct(c_uct),
    .state_reset, .k_mod,
    .busy(ctrl_busy)
  );

  network_link #(.DW(NU * OPW), .LATENCY(NET_LAT)) u_net_down (
    .clk, .rst_n,
    .in_valid(c_uct_valid), .in_data(c_uct),
    .out_valid(pi_uct_valid), .out_data(pi_uct),
    .in_flight(down_in_flight)
  );

endmodule
