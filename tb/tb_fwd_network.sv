// tb_fwd_network: checks that every query matching a valid broadcast address gets that
// broadcast's label and that no other query hits.
module tb_fwd_network;
  import tb_ref_pkg::*;
  localparam int NS = 4, NQ = 6, AW = 5;
  logic [NS-1:0] bc_valid;
  logic [AW-1:0] bc_addr [NS];
  logic [127:0]  bc_data [NS];
  logic [AW-1:0] q_addr [NQ];
  logic [NQ-1:0] q_hit;
  logic [127:0]  q_data [NQ];
  int checks = 0, failures = 0, hits = 0;

  fwd_network #(.NS(NS), .NQ(NQ), .AW(AW)) dut (.bc_valid, .bc_addr, .bc_data, .q_addr,
    .q_hit, .q_data);

  initial begin
    #100000;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    for (int i = 0; i < 2000; i++) begin
      // distinct broadcast addresses, as a correct program guarantees
      for (int s = 0; s < NS; s++) begin
        bc_valid[s] = 1'($urandom);
        bc_addr[s]  = AW'(s * 8 + ($urandom % 8));
        bc_data[s]  = rand128();
      end
      for (int q = 0; q < NQ; q++) q_addr[q] = AW'($urandom);
      #1;
      for (int q = 0; q < NQ; q++) begin
        bit eh;
        logic [127:0] ed;
        eh = 0; ed = '0;
        for (int s = 0; s < NS; s++)
          if (bc_valid[s] && bc_addr[s] == q_addr[q]) begin eh = 1; ed = bc_data[s]; end
        checks++;
        if (q_hit[q] !== eh || (eh && q_data[q] !== ed)) begin
          failures++; $display("query %0d mismatch", q);
        end
        if (eh) hits++;
      end
      #1;
    end
    checks++;
    if (hits == 0) begin failures++; $display("no hits exercised"); end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
