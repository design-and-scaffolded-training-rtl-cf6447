// tb_weight_broadcast_mux: checks the per-row weight bank selection.
//
// Applies channels-first (row r <- bank r), spatial-first (all rows <- one
// bank), a hybrid grouping (pairs of rows share a bank) and random selections
// with random bank data, and compares every row output with the selected bank
// word. With bc_en low every row must carry zero.
module tb_weight_broadcast_mux;
  localparam int R  = 16;
  localparam int B  = 16;
  localparam int DW = 8;

  logic          bc_en;
  logic [3:0]    sel    [R];
  logic [DW-1:0] wt_in  [B];
  logic [DW-1:0] bc_out [R];

  int checks = 0, failures = 0;

  weight_broadcast_mux #(.ROWS(R), .BANKS(B), .DATA_W(DW)) dut (.*);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    #1;
    for (int r = 0; r < R; r++) begin
      checks++;
      if (bc_out[r] != (bc_en ? wt_in[sel[r]] : '0)) begin
        failures++;
        $display("FAIL row %0d sel %0d en %0d got %0h", r, sel[r], bc_en, bc_out[r]);
      end
    end
  endtask

  initial begin
    for (int i = 0; i < 200; i++) begin
      for (int b = 0; b < B; b++) wt_in[b] = DW'($urandom);
      bc_en = (i % 10) != 9;
      for (int r = 0; r < R; r++)
        case (i % 4)
          0: sel[r] = 4'(r);             // channels-first
          1: sel[r] = 4'(i % B);         // spatial-first
          2: sel[r] = 4'(r / 2);         // hybrid: two rows per filter
          default: sel[r] = 4'($urandom);
        endcase
      check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
