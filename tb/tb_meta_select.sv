// Testbench for meta_select, the metadata-driven B selector.
//
// Drives random B columns and random metadata in both modes and compares each
// selected element with the B element at position 4*(j/2) + meta[j] (sparse)
// or j (dense), computed here from the index arithmetic alone. Every metadata
// value 0..3 is also driven into every slot at least once.
module tb_meta_select;
  import sparse_pkg::*;

  localparam int unsigned KH = 16;
  localparam int unsigned DW = 8;

  logic                      sparse;
  logic [KH-1:0][META_W-1:0] meta;
  logic [2*KH-1:0][DW-1:0]   b_col;
  logic [KH-1:0][DW-1:0]     b_sel;

  meta_select #(.KH(KH), .DW(DW)) dut (.*);

  int checks = 0, failures = 0;

  initial begin : watchdog
    #100000;
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  task automatic check_all();
    for (int j = 0; j < KH; j++) begin
      int src = sparse ? 4*(j/2) + int'(meta[j]) : j;
      checks++;
      if (b_sel[j] !== b_col[src]) begin
        failures++;
        if (failures < 10)
          $display("mismatch mode=%0d slot %0d meta %0d: got %h want %h",
                   sparse, j, meta[j], b_sel[j], b_col[src]);
      end
    end
  endtask

  initial begin
    // B element i holds the value i+1, so every selection is distinguishable.
    for (int i = 0; i < 2*KH; i++) b_col[i] = DW'(i + 1);
    for (int m = 0; m < 4; m++) begin
      sparse = 1'b1;
      for (int j = 0; j < KH; j++) meta[j] = META_W'((m + j) % 4);
      #1 check_all();
    end
    for (int it = 0; it < 500; it++) begin
      sparse = 1'($urandom);
      for (int j = 0; j < KH; j++) meta[j] = META_W'($urandom);
      for (int i = 0; i < 2*KH; i++) b_col[i] = DW'($urandom);
      #1 check_all();
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
