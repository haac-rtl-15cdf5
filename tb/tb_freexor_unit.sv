// tb_freexor_unit: checks that the FreeXOR unit returns the XOR of its input labels one
// cycle after an enabled input, with its side-band, and that it holds its result while
// disabled.
module tb_freexor_unit;
  import tb_ref_pkg::*;
  logic clk = 0, rst_n = 0, en = 1, in_valid = 0, out_valid;
  logic [127:0] wa, wb, wc, ewc;
  logic [7:0] meta_in, meta_out, emeta;
  int checks = 0, failures = 0;

  freexor_unit #(.META_W(8)) dut (.clk, .rst_n, .en, .in_valid, .wa, .wb, .meta_in,
    .out_valid, .wc, .meta_out);

  always #5 clk = ~clk;

  initial begin
    repeat (10000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    bit ev;
    wa = '0; wb = '0; meta_in = '0;
    repeat (2) @(negedge clk);
    rst_n = 1;
    ev = 0; ewc = '0; emeta = '0;
    for (int i = 0; i < 300; i++) begin
      en = ($urandom % 4) != 0;
      wa = rand128(); wb = rand128(); meta_in = 8'($urandom);
      in_valid = 1'($urandom);
      if (en) begin ev = in_valid; ewc = wa ^ wb; emeta = meta_in; end
      @(negedge clk);
      checks++;
      if (out_valid !== ev || (ev && (wc !== ewc || meta_out !== emeta))) begin
        failures++;
        $display("mismatch at %0d", i);
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
