// tb_adip_core: self-checking test of one ADiP core (D = 16) in all three modes.
// A random weight tile is permuted (column j rotated by j: PE row i holds
// W[(j-i) mod D][j]), loaded row by row, and 40 random activation rows are
// streamed one per cycle. Each output row must equal the matrix product computed
// here, and must leave exactly D+1 cycles after its input row (TFU = D plus the
// output register). A deactivated core must produce zeros.
module tb_adip_core;
  import dlegion_pkg::*;
  localparam int D = 16, NR = 40;
  logic clk = 0, rst_n = 0, en = 0, core_on = 1, w_wr = 0;
  mode_e mode;
  logic [D-1:0][7:0] a_in = '0, w_in = '0;
  logic [$clog2(D)-1:0] w_row = 0;
  logic [D-1:0][NACC-1:0][LANE_W-1:0] y;
  int checks = 0, failures = 0;
  int wv [4][D][D];             // logical weights per sub-tile g
  logic [7:0] wb [D][D];        // packed weight bytes
  int av [NR][D];

  adip_core #(.D(D)) dut (.*);
  always #5 clk = ~clk;
  initial begin #2000000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end

  task automatic run(mode_e md, logic on);
    int r;
    mode = md; core_on = on;
    for (int k = 0; k < D; k++) for (int j = 0; j < D; j++) begin
      case (md)
        MODE_PROJ2: begin
          for (int g = 0; g < 4; g++) wv[g][k][j] = $urandom_range(0, 3) - 2;
          wb[k][j] = {2'(wv[3][k][j]), 2'(wv[2][k][j]), 2'(wv[1][k][j]), 2'(wv[0][k][j])};
        end
        MODE_PROJ4: begin
          for (int g = 0; g < 2; g++) wv[g][k][j] = $urandom_range(0, 15) - 8;
          wb[k][j] = {4'(wv[1][k][j]), 4'(wv[0][k][j])};
        end
        default: begin
          wv[0][k][j] = $urandom_range(0, 255) - 128;
          wb[k][j] = 8'(wv[0][k][j]);
        end
      endcase
    end
    for (int i = 0; i < D; i++) begin
      @(negedge clk); en = 1; w_wr = 1; w_row = i[$clog2(D)-1:0];
      for (int j = 0; j < D; j++) w_in[j] = wb[(j - i + D) % D][j];
    end
    @(negedge clk); w_wr = 0;
    for (int m = 0; m < NR; m++) for (int k = 0; k < D; k++) av[m][k] = $urandom_range(0, 255) - 128;
    r = 0;
    for (int t = 0; t < NR + D + 1; t++) begin
      for (int k = 0; k < D; k++) a_in[k] = (t < NR) ? 8'(av[t][k]) : 8'h0;
      @(negedge clk);
      // the row that entered at t-D is on y now (D+1 edges after it was sampled)
      if (t >= D && t - D < NR) begin
        int m; m = t - D;
        for (int j = 0; j < D; j++) begin
          longint s [4];
          for (int g = 0; g < 4; g++) begin
            s[g] = 0;
            if (on) for (int k = 0; k < D; k++) s[g] += av[m][k] * wv[g][k][j];
          end
          checks++;
          case (md)
            MODE_PROJ2: if (y[j] !== {16'(s[3]), 16'(s[2]), 16'(s[1]), 16'(s[0])}) failures++;
            MODE_PROJ4: if (y[j] !== {32'h0, 16'(s[1]), 16'(s[0])}) failures++;
            default:    if (y[j] !== {32'h0, 32'(s[0])}) begin
              failures++; if (failures < 5) $display("FAIL row %0d col %0d got %h exp %0d", m, j, y[j], s[0]);
            end
          endcase
        end
      end
    end
    en = 0;
  endtask

  initial begin
    repeat (2) @(negedge clk); rst_n = 1;
    run(MODE_DENSE, 1); run(MODE_PROJ4, 1); run(MODE_PROJ2, 1);
    run(MODE_DENSE, 1); run(MODE_PROJ2, 0);
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
