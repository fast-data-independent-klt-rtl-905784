// tb_klt_image_2d: 8x8 two-dimensional block transform of an 8-bit image,
// the operation at the heart of the JPEG-like compression experiments the
// transforms were designed for.
//
// For every transform, a synthetic 64x64 8-bit greyscale image (a smooth,
// strongly correlated field plus noise, generated here) is cut into 8x8
// blocks A. Each block is level-shifted to signed values (p - 128) and passed
// row by row through a core built for 8-bit inputs; the testbench transposes
// the result and passes it column by column through a second core of the same
// transform built for the first core's output width. The result must equal
// B = T A T^T computed directly. The eight rows (and then the eight columns)
// of a block enter on consecutive cycles and the last result must appear
// exactly 7 + latency cycles after the first input, i.e. the pipeline takes a
// new vector every cycle. Level shift, transposition, coefficient selection,
// quantization and the inverse transform are not part of the hardware.
module tb_klt_image_2d;
  import tb_klt_ref_pkg::*;

  localparam int IMG = 64;
  localparam int NBLK = (IMG / 8) * (IMG / 8);

  logic clk = 1'b0, rst_n = 1'b0;
  int checks = 0, failures = 0;
  int done = 0;
  byte unsigned img [IMG][IMG];
  longint cycle = 0;

  always #5 clk = ~clk;
  always @(posedge clk) cycle <= cycle + 1;

  task automatic check(bit cond, string what);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", what);
    end
  endtask

  for (genvar t = 0; t < 6; t++) begin : g_t
    localparam klt_pkg::xform_e XF = klt_pkg::xform_e'(t);
    localparam int W1 = klt_pkg::out_width(XF, 8);
    localparam int W2 = klt_pkg::out_width(XF, W1);

    logic r_in_valid = 1'b0, r_out_valid, c_in_valid = 1'b0, c_out_valid;
    logic signed [7:0]    rx [8];
    logic signed [W1-1:0] ry [8];
    logic signed [W1-1:0] cx [8];
    logic signed [W2-1:0] cy [8];

    klt_transform #(.XFORM(XF), .IN_W(8))  u_row (
      .clk, .rst_n, .in_valid(r_in_valid), .x(rx), .out_valid(r_out_valid), .y(ry));
    klt_transform #(.XFORM(XF), .IN_W(W1)) u_col (
      .clk, .rst_n, .in_valid(c_in_valid), .x(cx), .out_valid(c_out_valid), .y(cy));

    // Collectors
    int rrow [8][8];
    int ccol [8][8];
    int nr = 0, nc = 0;
    longint r_last, c_last;

    always @(posedge clk) begin
      if (rst_n && r_out_valid) begin
        for (int k = 0; k < 8; k++) rrow[nr % 8][k] = int'(ry[k]);
        nr++;
        r_last = cycle;
      end
      if (rst_n && c_out_valid) begin
        for (int k = 0; k < 8; k++) ccol[nc % 8][k] = int'(cy[k]);
        nc++;
        c_last = cycle;
      end
    end

    initial begin
      int a [8][8];
      int rowres [8][8];
      int e [8][8];
      longint t0;
      for (int k = 0; k < 8; k++) begin
        rx[k] = '0;
        cx[k] = '0;
      end
      wait (rst_n);
      for (int b = 0; b < NBLK; b++) begin
        int bi, bj;
        bi = (b / (IMG / 8)) * 8;
        bj = (b % (IMG / 8)) * 8;
        for (int i = 0; i < 8; i++)
          for (int j = 0; j < 8; j++) a[i][j] = int'(img[bi + i][bj + j]) - 128;
        // Reference B = T A T^T.
        for (int i = 0; i < 8; i++)
          for (int j = 0; j < 8; j++) begin
            e[i][j] = 0;
            for (int k = 0; k < 8; k++)
              for (int l = 0; l < 8; l++)
                e[i][j] += TMAT[t][i][k] * a[k][l] * TMAT[t][j][l];
          end
        // Row pass: row i of A in, row i of A T^T out.
        @(negedge clk);
        t0 = cycle;
        for (int i = 0; i < 8; i++) begin
          for (int k = 0; k < 8; k++) rx[k] = 8'(a[i][k]);
          r_in_valid = 1'b1;
          @(negedge clk);
        end
        r_in_valid = 1'b0;
        wait (nr == 8 * (b + 1));
        check(r_last - t0 == longint'(7 + LATENCY[t]),
              $sformatf("T index %0d row pass took %0d cycles", t, r_last - t0));
        rowres = rrow;
        // Column pass: column j of (A T^T) in, column j of T A T^T out.
        @(negedge clk);
        t0 = cycle;
        for (int j = 0; j < 8; j++) begin
          for (int k = 0; k < 8; k++) cx[k] = W1'(rowres[k][j]);
          c_in_valid = 1'b1;
          @(negedge clk);
        end
        c_in_valid = 1'b0;
        wait (nc == 8 * (b + 1));
        check(c_last - t0 == longint'(7 + LATENCY[t]),
              $sformatf("T index %0d column pass took %0d cycles", t, c_last - t0));
        for (int j = 0; j < 8; j++)
          for (int i = 0; i < 8; i++)
            check(ccol[j][i] == e[i][j],
                  $sformatf("T index %0d block %0d B[%0d][%0d] = %0d expected %0d",
                            t, b, i, j, ccol[j][i], e[i][j]));
      end
      done++;
    end
  end

  initial begin
    // Synthetic image: smooth gradient and ripples plus a little noise.
    for (int i = 0; i < IMG; i++)
      for (int j = 0; j < IMG; j++) begin
        int v;
        v = 40 + 2 * i + j + ((i / 8 + j / 16) % 3) * 20 + int'($urandom_range(12));
        if (i >= 48 && j < 16) v = 250 - int'($urandom_range(6));  // bright patch
        if (v > 255) v = 255;
        img[i][j] = 8'(v);
      end
    repeat (3) @(negedge clk);
    rst_n = 1'b1;
    wait (done == 6);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (200000) @(posedge clk);
    failures++;
    $display("FAIL watchdog");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
