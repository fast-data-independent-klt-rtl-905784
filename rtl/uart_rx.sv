// uart_rx: 8N1 serial receiver.
//
// The line is first passed through a two-flop synchronizer. A falling edge
// starts a frame; the start bit is re-checked half a bit later, then the
// eight data bits (least significant first) are sampled in the middle of
// each bit period and the stop bit is checked. A frame whose stop bit is low
// is dropped and flagged on frame_err for one cycle. A good byte is
// presented on data with a one-cycle valid pulse. CLKS_PER_BIT is the bit
// period in clock cycles.
module uart_rx #(
  parameter int CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       rxd,
  output logic       valid,
  output logic [7:0] data,
  output logic       frame_err
);

  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  typedef enum logic [1:0] {S_IDLE, S_START, S_DATA, S_STOP} state_e;

  state_e        state;
  logic [CW-1:0] cnt;
  logic [2:0]    bit_idx;
  logic [1:0]    sync;
  logic [7:0]    shreg;

  wire rx = sync[1];

  always_ff @(posedge clk) begin
    if (!rst_n) sync <= 2'b11;
    else        sync <= {sync[0], rxd};
  end

  always_ff @(posedge clk) begin
    valid     <= 1'b0;
    frame_err <= 1'b0;
    if (!rst_n) begin
      state   <= S_IDLE;
      cnt     <= '0;
      bit_idx <= '0;
      shreg   <= '0;
      data    <= '0;
    end else begin
      case (state)
        S_IDLE: begin
          cnt <= '0;
          if (!rx) state <= S_START;
        end
        S_START: begin
          if (cnt == CW'(CLKS_PER_BIT / 2 - 1)) begin
            cnt     <= '0;
            bit_idx <= '0;
            state   <= rx ? S_IDLE : S_DATA;  // glitch: back to idle
          end else cnt <= cnt + 1'b1;
        end
        S_DATA: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            shreg <= {rx, shreg[7:1]};
            if (bit_idx == 3'd7) state <= S_STOP;
            bit_idx <= bit_idx + 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        S_STOP: begin
          if (cnt == CW'(CLKS_PER_BIT - 1)) begin
            cnt   <= '0;
            state <= S_IDLE;
            if (rx) begin
              valid <= 1'b1;
              data  <= shreg;
            end else frame_err <= 1'b1;
          end else cnt <= cnt + 1'b1;
        end
        default: state <= S_IDLE;
      endcase
    end
  end

endmodule
