// tb_adip_array: self-checking test of the N x N PE array.
// For each precision mode a random stationary tile is shifted in through the
// column tops, then random activation rows are streamed with random bubbles
// and random stalls (en low). Each bottom psum lane is compared with
//   lane g of column c = psum_top + sum_r A[i][(c + r) mod N] * digit_g(Wst[r][c]),
// computed here from integers, where Wst is the stored tile and digit_g the
// g-th 2-bit weight digit, signed as the mode requires. The output must appear
// exactly N+1 enabled cycles after the row was presented.
module tb_adip_array;
  import adip_pkg::*;
  localparam int unsigned N      = 6;
  localparam int unsigned PSUM_W = psum_w(N);
  localparam int unsigned ROWS   = 40;

  logic clk = 0, rst_n = 0;
  mode_e mode;
  logic en, w_load;
  logic [7:0] in_i [N];
  logic [7:0] w_i  [N];
  logic signed [PSUM_W-1:0] psum_i [N][GROUPS];
  logic signed [PSUM_W-1:0] psum_o [N][GROUPS];
  int checks = 0, failures = 0;

  adip_array #(.N(N)) dut (.*);

  always #5 clk = ~clk;

  logic [7:0] wst [N][N];
  // model pipeline: expected lanes per stage
  typedef struct { bit v; int lane [N][GROUPS]; } exp_t;
  exp_t pipe [N+1];

  function automatic int digit(logic [7:0] w, int g, mode_e m);
    logic [1:0] d = w[2*g +: 2];
    logic s = (m == MODE_8X8) ? (g == 3) : (m == MODE_8X4) ? (g % 2 == 1) : 1'b1;
    return (s && d[1]) ? int'(d) - 4 : int'(d);
  endfunction

  function automatic int wrap(int v);
    return (v <<< (32 - PSUM_W)) >>> (32 - PSUM_W);
  endfunction


  initial begin
    en = 0; w_load = 0; mode = MODE_8X8;
    foreach (in_i[c]) in_i[c] = 0;
    foreach (w_i[c]) w_i[c] = 0;
    foreach (psum_i[c, g]) psum_i[c][g] = 0;
    foreach (pipe[k]) pipe[k].v = 0;
    repeat (2) @(posedge clk);
    rst_n = 1;
    for (int m = 0; m < 3; m++) begin
      mode = mode_e'(m);
      foreach (wst[r, c]) wst[r][c] = 8'($urandom);
      // shift in: bottom row first
      for (int r = N - 1; r >= 0; r--) begin
        @(negedge clk);
        w_load = 1;
        foreach (w_i[c]) w_i[c] = wst[r][c];
      end
      @(negedge clk);
      w_load = 0;
      // stream rows; drain at the end
      for (int cyc = 0; cyc < ROWS + 3 * N; cyc++) begin
        bit stall, bubble;
        logic [7:0] a [N];
        stall  = ($urandom_range(0, 9) == 0);
        bubble = (cyc >= ROWS) || ($urandom_range(0, 5) == 0);
        en = !stall;
        foreach (a[c]) a[c] = 8'($urandom);
        foreach (in_i[c]) in_i[c] = a[c];
        @(posedge clk);
        #1;
        if (en) begin
          for (int k = N; k > 0; k--) pipe[k] = pipe[k-1];
          pipe[0].v = !bubble;
          foreach (a[c]) for (int g = 0; g < GROUPS; g++) begin
            int s, top;
            top = int'($urandom_range(0, 400)) - 200;
            psum_i[c][g] = PSUM_W'(top);
            s = top;
            for (int r = 0; r < N; r++)
              s += int'($signed(a[(c + r) % N])) * digit(wst[r][c], g, mode);
            pipe[0].lane[c][g] = wrap(s);
          end
          if (pipe[N].v)
            foreach (psum_o[c, g]) begin
              checks++;
              if (int'(psum_o[c][g]) != pipe[N].lane[c][g]) begin
                failures++;
                if (failures < 10)
                  $display("FAIL mode %0d col %0d lane %0d: got %0d exp %0d", m, c, g,
                           psum_o[c][g], pipe[N].lane[c][g]);
              end
            end
        end
        @(negedge clk);
      end
      en = 0;
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
