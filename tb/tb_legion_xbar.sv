// tb_legion_xbar: self-checking test of the Legion crossbar: lane-to-accumulator
// routing, accumulator-to-bank routing (sign extension in projection modes, the
// {acc1, acc0} pair in dense mode) and bank-to-accumulator read-back.
module tb_legion_xbar;
  import dlegion_pkg::*;
  localparam int D = 16, C = 8;
  mode_e mode; logic [NACC-1:0] bank_sel;
  logic [C-1:0][D-1:0][NACC-1:0][LANE_W-1:0] core_y;
  logic [NACC-1:0][C-1:0][D-1:0][LANE_W-1:0] acc_in;
  logic [NACC-1:0][D-1:0][LANE_W-1:0] acc_sum, acc_psum;
  logic [NACC-1:0][D-1:0][ELEM_W-1:0] bank_wdata, bank_rdata;
  int checks = 0, failures = 0;
  legion_xbar #(.D(D), .C(C)) dut (.*);
  initial begin #100000; failures++; $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish; end
  initial begin
    for (int t = 0; t < 300; t++) begin
      int sb;
      mode = mode_e'($urandom_range(0, 2)); sb = $urandom_range(0, 3);
      bank_sel = (mode == MODE_DENSE) ? 4'(1 << sb) : (mode == MODE_PROJ2 ? 4'hf : 4'h3);
      for (int c = 0; c < C; c++) for (int j = 0; j < D; j++) for (int g = 0; g < 4; g++) core_y[c][j][g] = 16'($urandom);
      for (int b = 0; b < 4; b++) for (int j = 0; j < D; j++) begin acc_sum[b][j] = 16'($urandom); bank_rdata[b][j] = $urandom; end
      #1;
      for (int c = 0; c < C; c++) for (int j = 0; j < D; j++) for (int g = 0; g < 4; g++) begin
        checks++; if (acc_in[g][c][j] !== core_y[c][j][g]) failures++;
      end
      for (int b = 0; b < 4; b++) for (int j = 0; j < D; j++) begin
        logic [31:0] ew; logic [15:0] ep;
        if (mode == MODE_DENSE) begin
          ew = {acc_sum[1][j], acc_sum[0][j]};
          ep = (b == 0) ? bank_rdata[sb][j][15:0] : (b == 1) ? bank_rdata[sb][j][31:16] : 16'h0;
        end else begin
          ew = {{16{acc_sum[b][j][15]}}, acc_sum[b][j]};
          ep = bank_rdata[b][j][15:0];
        end
        checks += 2;
        if (bank_wdata[b][j] !== ew) failures++;
        if (acc_psum[b][j] !== ep) begin failures++; if (failures < 5) $display("FAIL psum b%0d mode %0d", b, mode); end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
