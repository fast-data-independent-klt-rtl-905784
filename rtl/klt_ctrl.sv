// klt_ctrl: state machine that runs the testbed.
//
// Repeats one operation forever: collect an input vector from the host,
// push it through the transform, return the result to the host.
//   1. Poll the UART status register over AXI4-Lite until a received byte is
//      waiting, then read it; eight such bytes, in order, form the signed
//      8-bit input vector x0..x7.
//   2. Present the vector to the transform with a one-cycle x_valid pulse
//      and wait for y_valid.
//   3. Send the eight output coefficients back, each as a 16-bit two's
//      complement value split into two bytes, low byte first (16 bytes in
//      all); before every byte the status register is read and the byte is
//      held back while the UART transmit queue is full.
// The published testbed specifies the exchange (eight 8-bit input
// coefficients in, eight output coefficients back) but not the byte format
// of the wider outputs, the register map or the polling order; those are
// this design's choices. The register offsets are those of axil_uart.
//
// Interface: AXI4-Lite master port m; x[8]/x_valid towards the transform;
// y[8]/y_valid from it, sign-extended to 16 bits. The AXI response codes
// are not acted on; assertions flag any response other than OKAY. vec_count
// counts completed operations and tx_stalls counts status polls that found
// the transmit queue full.
module klt_ctrl (
  input  logic               clk,
  input  logic               rst_n,
  axil_if.master             m,
  output logic signed [7:0]  x [klt_pkg::N],
  output logic               x_valid,
  input  logic signed [15:0] y [klt_pkg::N],
  input  logic               y_valid,
  output logic [15:0]        vec_count,
  output logic [15:0]        tx_stalls
);

  localparam logic [3:0] A_RX = 4'h0, A_TX = 4'h4, A_STAT = 4'h8;
  localparam int NB_OUT = 2 * klt_pkg::N;

  typedef enum logic [3:0] {
    S_RX_STAT_AR, S_RX_STAT_R, S_RX_DATA_AR, S_RX_DATA_R,
    S_FIRE, S_WAIT,
    S_TX_STAT_AR, S_TX_STAT_R, S_TX_W, S_TX_B
  } state_e;

  state_e      state;
  logic [2:0]  rx_idx;
  logic [3:0]  tx_idx;
  logic [15:0] yq [klt_pkg::N];
  logic        aw_done, w_done;

  // Byte tx_idx of the result: coefficient tx_idx/2, low byte first.
  wire [15:0] tx_word = yq[tx_idx[3:1]];
  wire [7:0]  tx_byte = tx_idx[0] ? tx_word[15:8] : tx_word[7:0];

  // AXI4-Lite master signals follow the state.
  always_comb begin
    m.arvalid = (state == S_RX_STAT_AR) || (state == S_RX_DATA_AR) || (state == S_TX_STAT_AR);
    m.araddr  = (state == S_RX_DATA_AR) ? A_RX : A_STAT;
    m.rready  = (state == S_RX_STAT_R) || (state == S_RX_DATA_R) || (state == S_TX_STAT_R);
    m.awvalid = (state == S_TX_W) && !aw_done;
    m.awaddr  = A_TX;
    m.wvalid  = (state == S_TX_W) && !w_done;
    m.wdata   = {24'd0, tx_byte};
    m.bready  = (state == S_TX_B);
  end

  assign x_valid = (state == S_FIRE);

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      state     <= S_RX_STAT_AR;
      rx_idx    <= '0;
      tx_idx    <= '0;
      aw_done   <= 1'b0;
      w_done    <= 1'b0;
      vec_count <= '0;
      tx_stalls <= '0;
      for (int i = 0; i < klt_pkg::N; i++) begin
        x[i]  <= '0;
        yq[i] <= '0;
      end
    end else begin
      case (state)
        S_RX_STAT_AR: if (m.arready) state <= S_RX_STAT_R;
        S_RX_STAT_R:
          if (m.rvalid) state <= m.rdata[0] ? S_RX_DATA_AR : S_RX_STAT_AR;
        S_RX_DATA_AR: if (m.arready) state <= S_RX_DATA_R;
        S_RX_DATA_R:
          if (m.rvalid) begin
            x[rx_idx] <= m.rdata[7:0];
            rx_idx    <= rx_idx + 1'b1;
            state     <= (rx_idx == 3'd7) ? S_FIRE : S_RX_STAT_AR;
          end
        S_FIRE: state <= S_WAIT;
        S_WAIT:
          if (y_valid) begin
            for (int i = 0; i < klt_pkg::N; i++) yq[i] <= y[i];
            tx_idx <= '0;
            state  <= S_TX_STAT_AR;
          end
        S_TX_STAT_AR: if (m.arready) state <= S_TX_STAT_R;
        S_TX_STAT_R:
          if (m.rvalid) begin
            if (m.rdata[3]) begin
              tx_stalls <= tx_stalls + 1'b1;
              state     <= S_TX_STAT_AR;
            end else begin
              aw_done <= 1'b0;
              w_done  <= 1'b0;
              state   <= S_TX_W;
            end
          end
        S_TX_W: begin
          if (m.awready) aw_done <= 1'b1;
          if (m.wready)  w_done  <= 1'b1;
          if ((aw_done || m.awready) && (w_done || m.wready)) state <= S_TX_B;
        end
        S_TX_B:
          if (m.bvalid) begin
            tx_idx <= tx_idx + 1'b1;
            if (tx_idx == 4'(NB_OUT - 1)) begin
              vec_count <= vec_count + 1'b1;
              state     <= S_RX_STAT_AR;
            end else begin
              state <= S_TX_STAT_AR;
            end
          end
        default: state <= S_RX_STAT_AR;
      endcase
    end
  end

  // The UART core answers every access with OKAY; anything else is a bus fault.
  a_rresp_okay: assert property (@(posedge clk) disable iff (!rst_n)
    m.rvalid && m.rready |-> m.rresp == 2'b00);
  a_bresp_okay: assert property (@(posedge clk) disable iff (!rst_n)
    m.bvalid && m.bready |-> m.bresp == 2'b00);

endmodule
