// tb_local_write_control: exhaustive check of the per-block write enables:
// a write reaches the block only when selected and CALCE is low.
module tb_local_write_control;
  logic calce, blk_sel, lwe, twe, lut_we, thr_we;
  int checks = 0, failures = 0;
  local_write_control dut (.*);
  initial begin
    #100000; failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
  initial begin
    for (int i = 0; i < 16; i++) begin
      {calce, blk_sel, lwe, twe} = 4'(i); #1;
      checks++; if (lut_we != (!calce && blk_sel && lwe)) begin failures++; $display("lut_we %b for %b", lut_we, 4'(i)); end
      checks++; if (thr_we != (!calce && blk_sel && twe)) begin failures++; $display("thr_we %b for %b", thr_we, 4'(i)); end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures); $finish;
  end
endmodule
