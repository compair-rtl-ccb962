// tb_col_decoder - the decoupled 8:1 + 4:1 column decoder. For random 1 KB
// rows and every (sel8, sel4) it checks that col128 is the 128-byte group
// sel8 and col32 is the 32-byte word sel4 within it. It also checks that a
// 32-byte or 128-byte write changes exactly the selected bits of the row.
// The decoder is combinational (zero cycles).
module tb_col_decoder;
  logic [8191:0] row, row_wr;
  logic [2:0] sel8;
  logic [1:0] sel4;
  logic [1023:0] col128, wdata128;
  logic [255:0] col32, wdata;
  logic we32, we128;
  int checks = 0, failures = 0;
  col_decoder dut (.*);
  task automatic chk(input string w, input logic ok);
    checks++; if (!ok) begin failures++; $display("FAIL %s", w); end
  endtask
  initial begin
    logic [8191:0] e;
    for (int it = 0; it < 20; it++) begin
      for (int i = 0; i < 256; i++) row[i*32 +: 32] = $urandom;
      for (int i = 0; i < 8; i++) wdata[i*32 +: 32] = $urandom;
      for (int i = 0; i < 32; i++) wdata128[i*32 +: 32] = $urandom;
      for (int s8 = 0; s8 < 8; s8++) for (int s4 = 0; s4 < 4; s4++) begin
        sel8 = 3'(s8); sel4 = 2'(s4);
        we32 = 0; we128 = 0;
        #1;
        chk("col128", col128 == row[s8*1024 +: 1024]);
        chk("col32", col32 == row[s8*1024 + s4*256 +: 256]);
        chk("no write", row_wr == row);
        we32 = 1; #1;
        e = row; e[s8*1024 + s4*256 +: 256] = wdata;
        chk("write 32B", row_wr == e);
        we32 = 0; we128 = 1; #1;
        e = row; e[s8*1024 +: 1024] = wdata128;
        chk("write 128B", row_wr == e);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
