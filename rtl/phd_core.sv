// phd_core: a directable main logical core.
//
// The host program (a network service such as a DNS server or a key/value
// cache) sits in the packet path between the input arbiter and the output
// queues of a network card. This core wraps it with program-hosted
// directability: every received packet first meets dir_classifier, which hands
// direction packets to the embedded CASP controller and everything else to the
// program; the program's output and the controller's replies are joined again
// by pkt_merge. The program itself reaches the controller through an extension
// point (ep_req / ep_labels / ep_ack) in its main loop, and keeps its variables
// in the controller's counters, so that the director can read and change them
// at packet rate and stop the program at a breakpoint.
//
// The host program is not part of this RTL: its packet streams (prog_in_*,
// prog_out_*), its extension point and its variable writes are ports. The
// structure (classify, controller beside the program, merge) follows the
// paper's description of its prototype; the stream and handshake details are
// this design's own.
//
// Timing: the classifier and the merge add no latency; see casp_controller for
// the cycle counts of direction packets and extension points.
module phd_core
  import casp_pkg::*;
#(
  parameter int unsigned NUM_CTR       = 32,
  parameter int unsigned NUM_HOST_VARS = 8,
  parameter int unsigned NUM_ARR       = 2,
  parameter int unsigned ARR_DEPTH     = 512,
  parameter int unsigned NUM_LABELS    = 4,
  parameter int unsigned SP_DEPTH      = 16
) (
  input  logic                       clk,
  input  logic                       rst_n,
  // from the input arbiter
  input  logic                       net_in_valid,
  output logic                       net_in_ready,
  input  beat_t                      net_in_beat,
  // to the output queues
  output logic                       net_out_valid,
  input  logic                       net_out_ready,
  output beat_t                      net_out_beat,
  // to the host program: ordinary packets
  output logic                       prog_in_valid,
  input  logic                       prog_in_ready,
  output beat_t                      prog_in_beat,
  // from the host program: its output packets
  input  logic                       prog_out_valid,
  output logic                       prog_out_ready,
  input  beat_t                      prog_out_beat,
  // the host program's extension point
  input  logic                       ep_req,
  input  logic [NUM_LABELS-1:0]      ep_labels,
  output logic                       ep_ack,
  // the host program's variables
  input  logic                       host_wr_en,
  input  logic [$clog2(NUM_CTR)-1:0] host_wr_id,
  input  word_t                      host_wr_data,
  output word_t                      host_vars [NUM_HOST_VARS],
  // status
  output mode_e                      mode,
  output logic [7:0]                 brk_code,
  output logic [31:0]                dir_pkts,
  output logic [31:0]                data_pkts
);

  logic  ctl_in_valid, ctl_in_ready;
  beat_t ctl_in_beat;
  logic  rsp_valid, rsp_ready;
  beat_t rsp_beat;

  dir_classifier u_classifier (
    .clk, .rst_n,
    .in_valid   (net_in_valid),
    .in_ready   (net_in_ready),
    .in_beat    (net_in_beat),
    .prog_valid (prog_in_valid),
    .prog_ready (prog_in_ready),
    .prog_beat  (prog_in_beat),
    .ctl_valid  (ctl_in_valid),
    .ctl_ready  (ctl_in_ready),
    .ctl_beat   (ctl_in_beat),
    .dir_pkts,
    .data_pkts
  );

  casp_controller #(
    .NUM_CTR       (NUM_CTR),
    .NUM_HOST_VARS (NUM_HOST_VARS),
    .NUM_ARR       (NUM_ARR),
    .ARR_DEPTH     (ARR_DEPTH),
    .NUM_LABELS    (NUM_LABELS),
    .SP_DEPTH      (SP_DEPTH)
  ) u_controller (
    .clk, .rst_n,
    .cmd_valid    (ctl_in_valid),
    .cmd_ready    (ctl_in_ready),
    .cmd_beat     (ctl_in_beat),
    .rsp_valid,
    .rsp_ready,
    .rsp_beat,
    .ep_req,
    .ep_labels,
    .ep_ack,
    .host_wr_en,
    .host_wr_id,
    .host_wr_data,
    .host_vars,
    .mode,
    .brk_code
  );

  pkt_merge u_merge (
    .clk, .rst_n,
    .in0_valid (prog_out_valid),
    .in0_ready (prog_out_ready),
    .in0_beat  (prog_out_beat),
    .in1_valid (rsp_valid),
    .in1_ready (rsp_ready),
    .in1_beat  (rsp_beat),
    .out_valid (net_out_valid),
    .out_ready (net_out_ready),
    .out_beat  (net_out_beat)
  );

endmodule
