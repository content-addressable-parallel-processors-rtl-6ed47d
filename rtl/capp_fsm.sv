// capp_fsm: the host protocol controller of the CAPP.
//
// The host sends one-byte commands, "a" to "k" (see capp_pkg). From READY
// the controller runs each command as a few short states and returns to READY:
//   Set Comparand / Set Mask (i)  push the matching (ii) state as the return
//                                 state and enter RECEIVE, which takes one word
//                                 (WIDTH/8 bytes, most significant first) and
//                                 returns to it; (ii) loads the register.
//   Get Comparand / Get Mask      send the register, WIDTH/8 bytes.
//   Get Tags                      send the tags, CELLS/8 bytes (rounded up);
//                                 all three go through one SEND state.
//   Set Tags High / Low           drive the SET line high / low and leave it.
//   Write                         enable the write lines for one cycle.
//   Read                          copy the read lines into the comparand.
//   Search                        SEARCH_1 raises SEARCH and loads the delay,
//                                 IDLE waits SEARCH_DELAY cycles, SEARCH_2
//                                 lowers SEARCH.
//   Select First                  the same through SELECT_1, IDLE, SELECT_2.
// RECEIVE and IDLE are each shared by two commands; a one-entry return-state
// register says where they go next. Unknown bytes in READY are dropped.
//
// Interface: valid/ready byte streams to and from the host link (a byte moves
// on a cycle where both are high), the capp_ctrl_t control lines to the CAPP
// core with the last word received (host_word), and the core's comparand, mask and tags to send back. busy is high
// outside READY.
//
// Timing: one byte per cycle at most in each direction. Search takes
// SEARCH_DELAY + 2 cycles after the command byte is taken, Select First
// SELECT_DELAY + 2, every other command without data 1.
//
// The states, the shared RECEIVE and IDLE, the push of the return state, the
// search micro-steps and the delay of 5 follow the paper; the byte order, the
// handshake, the select delay and the one-cycle Write and Read are this
// design's choices.
module capp_fsm
  import capp_pkg::*;
#(
  parameter int unsigned CELLS        = DEFAULT_CELLS,
  parameter int unsigned WIDTH        = DEFAULT_WIDTH,
  parameter int unsigned SEARCH_DELAY = DEFAULT_SEARCH_DELAY,
  parameter int unsigned SELECT_DELAY = DEFAULT_SEARCH_DELAY
) (
  input  logic             clk,
  input  logic             rst,
  input  logic [7:0]       rx_data,
  input  logic             rx_valid,
  output logic             rx_ready,
  output logic [7:0]       tx_data,
  output logic             tx_valid,
  input  logic             tx_ready,
  output capp_ctrl_t       ctrl,
  output logic [WIDTH-1:0] host_word,
  input  logic [WIDTH-1:0] comparand,
  input  logic [WIDTH-1:0] mask,
  input  logic [CELLS-1:0] tags,
  output logic             busy
);

  if (WIDTH % 8 != 0) begin : g_width_check
    $error("capp_fsm: WIDTH must be a multiple of 8");
  end
  if (SEARCH_DELAY < 1 || SELECT_DELAY < 1) begin : g_delay_check
    $error("capp_fsm: delays must be at least 1");
  end

  localparam int unsigned WORD_BYTES = WIDTH / 8;
  localparam int unsigned TAG_BYTES  = (CELLS + 7) / 8;
  localparam int unsigned SEND_BYTES = (WORD_BYTES > TAG_BYTES) ? WORD_BYTES : TAG_BYTES;
  localparam int unsigned SBW        = SEND_BYTES * 8;
  localparam int unsigned CNT_W      = $clog2(SEND_BYTES + 1);
  localparam int unsigned MAX_DELAY  = (SEARCH_DELAY > SELECT_DELAY) ? SEARCH_DELAY : SELECT_DELAY;
  localparam int unsigned DLY_W      = $clog2(MAX_DELAY + 1);

  typedef enum logic [4:0] {
    S_READY,
    S_SET_CMP_1,  S_SET_CMP_2,
    S_SET_MASK_1, S_SET_MASK_2,
    S_RECEIVE,
    S_GET_CMP, S_GET_MASK, S_GET_TAGS,
    S_SEND,
    S_SET_TAGS_HIGH, S_SET_TAGS_LOW,
    S_WRITE, S_READ,
    S_SEARCH_1, S_SEARCH_2,
    S_SELECT_1, S_SELECT_2,
    S_IDLE
  } state_e;

  state_e             state, ret_state;
  logic [WIDTH-1:0]   word;       // word being received
  logic [SBW-1:0]     send_buf;   // bytes still to send, next one on top
  logic [CNT_W-1:0]   byte_cnt;   // bytes left to receive or send
  logic [DLY_W-1:0]   delay;      // IDLE cycles left
  logic               set_q, search_q, select_q;

  always_ff @(posedge clk) begin
    if (rst) begin
      state     <= S_READY;
      ret_state <= S_READY;
      word      <= '0;
      send_buf  <= '0;
      byte_cnt  <= '0;
      delay     <= '0;
      set_q     <= 1'b0;
      search_q  <= 1'b0;
      select_q  <= 1'b0;
    end else begin
      unique case (state)
        S_READY: if (rx_valid) begin
          case (rx_data)
            CMD_SET_COMPARAND: state <= S_SET_CMP_1;
            CMD_GET_COMPARAND: state <= S_GET_CMP;
            CMD_SET_MASK:      state <= S_SET_MASK_1;
            CMD_GET_MASK:      state <= S_GET_MASK;
            CMD_SELECT_FIRST:  state <= S_SELECT_1;
            CMD_GET_TAGS:      state <= S_GET_TAGS;
            CMD_SET_TAGS_HIGH: state <= S_SET_TAGS_HIGH;
            CMD_SET_TAGS_LOW:  state <= S_SET_TAGS_LOW;
            CMD_WRITE:         state <= S_WRITE;
            CMD_READ:          state <= S_READ;
            CMD_SEARCH:        state <= S_SEARCH_1;
            default:           state <= S_READY;
          endcase
        end
        S_SET_CMP_1: begin
          ret_state <= S_SET_CMP_2;
          byte_cnt  <= CNT_W'(WORD_BYTES);
          state     <= S_RECEIVE;
        end
        S_SET_MASK_1: begin
          ret_state <= S_SET_MASK_2;
          byte_cnt  <= CNT_W'(WORD_BYTES);
          state     <= S_RECEIVE;
        end
        S_RECEIVE: if (rx_valid) begin
          word     <= WIDTH'({word, rx_data});
          byte_cnt <= byte_cnt - 1'b1;
          if (byte_cnt == CNT_W'(1)) state <= ret_state;
        end
        S_SET_CMP_2, S_SET_MASK_2: state <= S_READY;
        S_GET_CMP: begin
          send_buf <= SBW'(comparand) << (SBW - WIDTH);
          byte_cnt <= CNT_W'(WORD_BYTES);
          state    <= S_SEND;
        end
        S_GET_MASK: begin
          send_buf <= SBW'(mask) << (SBW - WIDTH);
          byte_cnt <= CNT_W'(WORD_BYTES);
          state    <= S_SEND;
        end
        S_GET_TAGS: begin
          send_buf <= SBW'(tags) << (SBW - TAG_BYTES * 8);
          byte_cnt <= CNT_W'(TAG_BYTES);
          state    <= S_SEND;
        end
        S_SEND: if (tx_ready) begin
          send_buf <= send_buf << 8;
          byte_cnt <= byte_cnt - 1'b1;
          if (byte_cnt == CNT_W'(1)) state <= S_READY;
        end
        S_SET_TAGS_HIGH: begin
          set_q <= 1'b1;
          state <= S_READY;
        end
        S_SET_TAGS_LOW: begin
          set_q <= 1'b0;
          state <= S_READY;
        end
        S_WRITE, S_READ: state <= S_READY;
        S_SEARCH_1: begin
          search_q  <= 1'b1;
          delay     <= DLY_W'(SEARCH_DELAY);
          ret_state <= S_SEARCH_2;
          state     <= S_IDLE;
        end
        S_SEARCH_2: begin
          search_q <= 1'b0;
          state    <= S_READY;
        end
        S_SELECT_1: begin
          select_q  <= 1'b1;
          delay     <= DLY_W'(SELECT_DELAY);
          ret_state <= S_SELECT_2;
          state     <= S_IDLE;
        end
        S_SELECT_2: begin
          select_q <= 1'b0;
          state    <= S_READY;
        end
        S_IDLE: begin
          delay <= delay - 1'b1;
          if (delay == DLY_W'(1)) state <= ret_state;
        end
        default: state <= S_READY;
      endcase
    end
  end

  always_comb begin
    rx_ready = (state == S_READY) || (state == S_RECEIVE);
    tx_valid = (state == S_SEND);
    tx_data  = send_buf[SBW-1 -: 8];
    busy     = (state != S_READY);
    host_word = word;

    ctrl                = '0;
    ctrl.set_tags       = set_q;
    ctrl.select_first   = select_q;
    ctrl.perform_search = search_q;
    ctrl.perform_write  = (state == S_WRITE);
    ctrl.load_comparand = (state == S_SET_CMP_2) || (state == S_READ);
    ctrl.comparand_src  = (state == S_READ) ? CMP_FROM_READ : CMP_FROM_HOST;
    ctrl.load_mask      = (state == S_SET_MASK_2);
  end

  // A byte offered to the host stays offered, unchanged, until it is taken.
  a_tx_hold: assert property (@(posedge clk) disable iff (rst)
    tx_valid && !tx_ready |=> tx_valid && $stable(tx_data));
  // The SET line and a search are never active together.
  a_set_search: assert property (@(posedge clk) disable iff (rst)
    !(set_q && search_q));

endmodule
