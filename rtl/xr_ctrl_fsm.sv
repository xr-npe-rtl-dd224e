// xr_ctrl_fsm: FSM and control logic of the co-processor.
//
// Runs one output tile of a matrix product. On start it reads the IF banks
// (all rows at word if_base+k) and the Wt banks (all columns at wt_base+k)
// for k = 0..k_len-1, one step per cycle; one cycle later, when the bank
// words arrive, it strobes feed_valid to the array, with feed_clear on the
// first step and feed_last on the last. It then waits for the array's
// of_valid and drains the OF bank registers column by column: for column j
// every OF bank i is written at word of_base+j. busy is high from start to
// the end of the drain, done pulses once at the end, cycles counts the
// cycles of the run. k_len = 0 ends at once. A tile of K steps takes
// K + 7 + COLS cycles from start to done. The sequence is this design's own;
// the paper names an FSM with flags for sequential computation and data flow.
module xr_ctrl_fsm #(
  parameter int unsigned COLS = 8,
  parameter int unsigned CW   = (COLS > 1) ? $clog2(COLS) : 1
) (
  input  logic          clk,
  input  logic          rst,
  input  logic          start,
  input  logic [8:0]    k_len,
  input  logic [7:0]    if_base,
  input  logic [7:0]    wt_base,
  input  logic [7:0]    of_base,
  output logic          busy,
  output logic          done,
  output logic [31:0]   cycles,
  // bank read side (IF and Wt banks)
  output logic          rd_en,
  output logic [7:0]    if_addr,
  output logic [7:0]    wt_addr,
  // array control
  output logic          feed_valid,
  output logic          feed_clear,
  output logic          feed_last,
  input  logic          of_valid,
  output logic [CW-1:0] of_col,
  // OF bank write side
  output logic          of_we,
  output logic [7:0]    of_addr
);
  typedef enum logic [1:0] {S_IDLE, S_FEED, S_WAIT, S_DRAIN} state_e;
  state_e      state;
  logic [8:0]  k;
  logic [CW:0] j;

  assign busy    = (state != S_IDLE);
  assign rd_en   = (state == S_FEED);
  assign if_addr = if_base + k[7:0];
  assign wt_addr = wt_base + k[7:0];
  assign of_we   = (state == S_DRAIN);
  assign of_col  = j[CW-1:0];
  assign of_addr = of_base + 8'(j);

  always_ff @(posedge clk) begin
    if (rst) begin
      state      <= S_IDLE;
      k          <= '0;
      j          <= '0;
      done       <= 1'b0;
      cycles     <= '0;
      feed_valid <= 1'b0;
      feed_clear <= 1'b0;
      feed_last  <= 1'b0;
    end else begin
      done       <= 1'b0;
      feed_valid <= rd_en;
      feed_clear <= rd_en && (k == 0);
      feed_last  <= rd_en && (k == k_len - 9'd1);
      if (busy) cycles <= cycles + 32'd1;
      case (state)
        S_IDLE:
          if (start) begin
            cycles <= 32'd1;
            k      <= '0;
            if (k_len == 0) done <= 1'b1;
            else            state <= S_FEED;
          end
        S_FEED: begin
          k <= k + 9'd1;
          if (k == k_len - 9'd1) state <= S_WAIT;
        end
        S_WAIT:
          if (of_valid) begin
            j     <= '0;
            state <= S_DRAIN;
          end
        S_DRAIN: begin
          j <= j + 1'b1;
          if (32'(j) == COLS - 1) begin
            state <= S_IDLE;
            done  <= 1'b1;
          end
        end
        default: state <= S_IDLE;
      endcase
    end
  end
endmodule
