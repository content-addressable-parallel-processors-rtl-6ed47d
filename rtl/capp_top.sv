// capp_top: the CAPP device, the protocol controller driving the CAPP core.
//
// The host talks to the device over a serial byte stream; in the complete
// device a USB serial core on the FPGA pins carries it, and here its two byte
// streams are the top's ports. capp_fsm decodes the host's commands and drives
// the control lines of capp_core; capp_core holds the comparand, mask, memory
// cells and tags. SOME/NONE and busy are brought out for a LED or a probe.
//
// Interface: rx_* carries bytes from the host, tx_* bytes to the host, each a
// valid/ready handshake; clk is the 48 MHz system clock, rst a synchronous
// active-high reset.
//
// Timing: see capp_fsm for the cycles each command takes.
//
// The pairing of a protocol controller with the CAPP core, the 48 MHz clock
// and the byte-serial host link follow the paper; leaving the USB serial core
// outside, with valid/ready byte streams as the boundary, is this design's
// choice.
module capp_top
  import capp_pkg::*;
#(
  parameter int unsigned CELLS        = DEFAULT_CELLS,
  parameter int unsigned WIDTH        = DEFAULT_WIDTH,
  parameter int unsigned SEARCH_DELAY = DEFAULT_SEARCH_DELAY,
  parameter int unsigned SELECT_DELAY = DEFAULT_SEARCH_DELAY
) (
  input  logic       clk,
  input  logic       rst,
  input  logic [7:0] rx_data,
  input  logic       rx_valid,
  output logic       rx_ready,
  output logic [7:0] tx_data,
  output logic       tx_valid,
  input  logic       tx_ready,
  output logic       some_none,
  output logic       busy
);

  capp_ctrl_t       ctrl;
  logic [WIDTH-1:0] comparand, mask, host_word;
  logic [CELLS-1:0] tags;

  capp_fsm #(
    .CELLS(CELLS), .WIDTH(WIDTH),
    .SEARCH_DELAY(SEARCH_DELAY), .SELECT_DELAY(SELECT_DELAY)
  ) u_fsm (
    .clk       (clk),
    .rst       (rst),
    .rx_data   (rx_data),
    .rx_valid  (rx_valid),
    .rx_ready  (rx_ready),
    .tx_data   (tx_data),
    .tx_valid  (tx_valid),
    .tx_ready  (tx_ready),
    .ctrl      (ctrl),
    .host_word (host_word),
    .comparand (comparand),
    .mask      (mask),
    .tags      (tags),
    .busy      (busy)
  );

  capp_core #(.CELLS(CELLS), .WIDTH(WIDTH)) u_core (
    .clk        (clk),
    .rst        (rst),
    .ctrl       (ctrl),
    .host_word  (host_word),
    .comparand  (comparand),
    .mask       (mask),
    .tags       (tags),
    .some_none  (some_none),
    .read_lines ()
  );

endmodule
