// tb_ccu: the CCU of node 2 sees bus words addressed to every identifier,
// idle included; SEL must rise only for its own identifier and the three
// fields must reach the RM, WAG and CNT/CMP outputs unchanged when selected
// and read zero otherwise.
`timescale 1ns/1ps
module tb_ccu;
  import ldpc_pkg::*;
  cfg_bus_t bus;
  logic sel;
  logic [RM_W-1:0] rm_word;
  logic [MEM_AW-1:0] wag_word;
  logic [CNT_W-1:0] cnt_word;
  logic [ID_W-1:0] my_id = 3'd2;
  int checks = 0, failures = 0;

  ccu dut (.*);

  initial begin
    for (int i = 0; i < 400; i++) begin
      bus.node_id = ID_W'(i % 8);
      bus.wag = MEM_AW'($urandom);
      bus.rm  = RM_W'($urandom);
      bus.cnt = CNT_W'($urandom);
      my_id = ID_W'((i / 8) % 5);
      #1;
      checks++;
      if (sel != (bus.node_id == my_id)) begin
        failures++; $display("id %0d bus %0d sel %0d", my_id, bus.node_id, sel);
      end
      checks++;
      if (sel ? (rm_word != bus.rm || wag_word != bus.wag || cnt_word != bus.cnt)
              : (rm_word != '0 || wag_word != '0 || cnt_word != '0)) begin
        failures++; $display("field mismatch");
      end
    end
    // the idle identifier never selects
    bus.node_id = ID_IDLE; my_id = ID_IDLE; #1;
    checks++;
    if (sel) begin failures++; $display("idle id selected"); end
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
