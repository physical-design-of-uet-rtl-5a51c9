// tb_dbus2peri: address decode and response routing of the interconnect.
//
// Six slave models answer every request one cycle later with a tag naming
// themselves and the address they saw. The testbench sends requests to
// addresses inside and at the edges of each slave's window and to unmapped
// addresses, and checks that exactly the right slave saw valid, that the
// returned data is that slave's answer one cycle later, and that unmapped
// addresses read zero and reach no slave.
`timescale 1ns/1ps
module tb_dbus2peri;
  import rvmcu_pkg::*;

  logic clk = 0, rst = 1;
  dbus_req_t m_req = '0;
  dbus_rsp_t m_rsp;
  dbus_req_t s_req [N_SLAVES];
  dbus_rsp_t s_rsp [N_SLAVES];
  int checks = 0, failures = 0;
  always #5 clk = ~clk;

  dbus2peri dut (.*);

  for (genvar g = 0; g < N_SLAVES; g++) begin : g_slave
    always_ff @(posedge clk) begin
      s_rsp[g].valid <= s_req[g].valid;
      s_rsp[g].rdata <= {4'(g + 1), s_req[g].addr[27:0]};
    end
  end

  task automatic check(string what, logic [31:0] got, logic [31:0] exp);
    checks++;
    if (got !== exp) begin
      failures++;
      if (failures < 20) $display("FAIL %s: got %08x exp %08x", what, got, exp);
    end
  endtask

  task automatic access(logic [31:0] a, int exp_slave);
    logic [N_SLAVES-1:0] seen;
    @(negedge clk);
    m_req = '{valid: 1'b1, we: 1'($urandom), strb: 4'hF, addr: a, wdata: $urandom};
    #1;
    for (int i = 0; i < N_SLAVES; i++) seen[i] = s_req[i].valid;
    check($sformatf("slave select for %08x", a), 32'(seen), (exp_slave < 0) ? 0 : 32'(1 << exp_slave));
    @(negedge clk);
    m_req = '0;
    check("response valid", 32'(m_rsp.valid), 1);
    check($sformatf("response data for %08x", a), m_rsp.rdata,
          (exp_slave < 0) ? 32'h0 : {4'(exp_slave + 1), a[27:0]});
  endtask

  initial begin
    repeat (2) @(negedge clk);
    rst = 0;
    access(32'h8000_0000, 0); access(32'h8000_0ffc, 0); access(32'h8fff_fffc, 0);
    access(32'h0200_0000, 1); access(32'h0200_bff8, 1); access(32'h0200_fffc, 1);
    access(32'h0C00_0004, 2); access(32'h0C20_0004, 2); access(32'h0C3f_fffc, 2);
    access(32'h9000_0000, 3); access(32'h9000_0ffc, 3);
    access(32'h9000_1000, 4); access(32'h9000_100c, 4);
    access(32'h9000_2000, 5); access(32'h9000_2104, 5);
    access(32'h0000_0000, -1); access(32'h0201_0000, -1); access(32'h0C40_0000, -1);
    access(32'h9000_3000, -1); access(32'h7fff_fffc, -1); access(32'hA000_0000, -1);
    for (int n = 0; n < 200; n++) begin
      int s;
      s = $urandom_range(0, 5);
      case (s)
        0: access(32'h8000_0000 | ($urandom & 32'h0fff_fffc), 0);
        1: access(32'h0200_0000 | ($urandom & 32'h0000_fffc), 1);
        2: access(32'h0C00_0000 | ($urandom & 32'h003f_fffc), 2);
        3: access(32'h9000_0000 | ($urandom & 32'h0000_0ffc), 3);
        4: access(32'h9000_1000 | ($urandom & 32'h0000_0ffc), 4);
        default: access(32'h9000_2000 | ($urandom & 32'h0000_0ffc), 5);
      endcase
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (5000) @(posedge clk);
    failures++;
    $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
