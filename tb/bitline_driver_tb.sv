// bitline_driver_tb: random cell states and column addresses; checks the
// one-hot column enable and the {M1,M2} drive of every row against the
// weight encoding (+1 -> 10, -1 -> 01, 0_0 -> 00, 0_1 -> 11).
module bitline_driver_tb;
  import tcim_pkg::*;
  localparam int R = 64, C = 64;
  logic wr_en;
  logic [5:0] wr_col;
  cell_e cells [R];
  logic [C-1:0] col_we;
  logic [R-1:0][1:0] wdata;
  int checks = 0, failures = 0;

  bitline_driver #(.ROWS(R), .COLS(C)) dut (.wr_en, .wr_col, .cells, .col_we, .wdata);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    logic [1:0] exp;
    for (int t = 0; t < 200; t++) begin
      wr_en = 1'($urandom); wr_col = 6'($urandom);
      for (int r = 0; r < R; r++) cells[r] = cell_e'($urandom_range(0, 3));
      #1;
      checks++;
      if (col_we !== (wr_en ? (64'd1 << wr_col) : 64'd0)) begin
        failures++; $display("FAIL col_we t=%0d", t);
      end
      for (int r = 0; r < R; r++) begin
        case (int'(cells[r]))
          0: exp = 2'b00;   // 0_0
          1: exp = 2'b01;   // -1
          2: exp = 2'b10;   // +1
          default: exp = 2'b11;  // 0_1
        endcase
        checks++;
        if (wdata[r] !== exp) begin
          failures++; $display("FAIL wdata t=%0d r=%0d", t, r);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
