// uart_tx: 8N1 serial transmitter.
//
// When idle and start is high, the byte on data is loaded into a ten-bit
// frame {stop, data, start} and shifted out least significant bit first, one
// bit every CLKS_PER_BIT cycles. busy stays high from the cycle after start
// until the stop bit has been sent; the line rests high.
module uart_tx #(
  parameter int CLKS_PER_BIT = 868
) (
  input  logic       clk,
  input  logic       rst_n,
  input  logic       start,
  input  logic [7:0] data,
  output logic       busy,
  output logic       txd
);

  localparam int CW = $clog2(CLKS_PER_BIT + 1);

  logic [9:0]    frame;
  logic [3:0]    bits_left;
  logic [CW-1:0] cnt;

  assign busy = (bits_left != '0);
  assign txd  = frame[0];

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      frame     <= '1;
      bits_left <= '0;
      cnt       <= '0;
    end else if (!busy) begin
      if (start) begin
        frame     <= {1'b1, data, 1'b0};
        bits_left <= 4'd10;
        cnt       <= '0;
      end
    end else if (cnt == CW'(CLKS_PER_BIT - 1)) begin
      cnt       <= '0;
      frame     <= {1'b1, frame[9:1]};
      bits_left <= bits_left - 1'b1;
    end else begin
      cnt <= cnt + 1'b1;
    end
  end

endmodule
