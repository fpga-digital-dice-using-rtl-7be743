// uart_tx: asynchronous serial transmitter.
//
// A state machine sends one frame per request: IDLE, START (line low for one
// bit), TRANSFER (eight data bits, least significant first), PARI (one even
// parity bit, only when the parity input is 1) and STOP (line high for one
// bit). Every bit lasts from one bit strobe to the next, so the bit rate is the
// strobe rate (1000 baud in the dice). In IDLE the line is high; a request is
// taken when ap_ready is high at a bit strobe, and data is captured then.
// ap_valid is high while the stop bit is on the line, marking the frame as
// sent. The line output is registered.
//
// The published design names the states (IDLE, START, TRANSFER, STOP and a
// parity state whose code was commented out), the ap_ready/ap_valid signals,
// the parity input and the synchronous reset, but gives no code. Bit order,
// even parity, the meaning of ap_valid and the timing above are this
// implementation's choices. Reset is synchronous, active low. Two assertions
// state the line rules above.
module uart_tx (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       tick,       // bit-rate strobe
  input  logic       ap_ready,   // request to send data
  output logic       ap_valid,   // stop bit on the line: frame complete
  output logic       tx,
  input  logic       parity,     // 1: insert an even parity bit
  input  logic [7:0] data
);
  typedef enum logic [2:0] {
    FSM_IDLE, FSM_STAR, FSM_TRAN, FSM_PARI, FSM_STOP
  } state_t;

  state_t     state;
  logic [7:0] buf_q;
  logic [2:0] idx;
  logic       par_en;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state    <= FSM_IDLE;
      tx       <= 1'b1;
      ap_valid <= 1'b0;
      buf_q    <= '0;
      idx      <= '0;
      par_en   <= 1'b0;
    end else if (tick) begin
      case (state)
        FSM_IDLE: begin
          tx       <= 1'b1;
          ap_valid <= 1'b0;
          if (ap_ready) begin
            buf_q  <= data;
            par_en <= parity;
            tx     <= 1'b0;
            state  <= FSM_STAR;
          end
        end
        FSM_STAR: begin
          idx   <= 3'd0;
          tx    <= buf_q[0];
          state <= FSM_TRAN;
        end
        FSM_TRAN: begin
          if (idx == 3'd7) begin
            if (par_en) begin
              tx    <= ^buf_q;
              state <= FSM_PARI;
            end else begin
              tx       <= 1'b1;
              ap_valid <= 1'b1;
              state    <= FSM_STOP;
            end
          end else begin
            idx <= idx + 1'b1;
            tx  <= buf_q[idx + 3'd1];
          end
        end
        FSM_PARI: begin
          tx       <= 1'b1;
          ap_valid <= 1'b1;
          state    <= FSM_STOP;
        end
        default: begin   // FSM_STOP
          tx       <= 1'b1;
          ap_valid <= 1'b0;
          state    <= FSM_IDLE;
        end
      endcase
    end
  end

  // Protocol rules: the line rests high between frames, and ap_valid marks
  // exactly the stop bit.
  a_idle_high: assert property (@(posedge clk) disable iff (!rst_n)
                                (state == FSM_IDLE) |-> tx);
  a_valid_stop: assert property (@(posedge clk) disable iff (!rst_n)
                                 ap_valid == (state == FSM_STOP));
endmodule
