// tb_i2c_target: the slow-control target on a 40 MHz system clock, driven by
// the bus master model at 1 MHz SCL.  A register array in the testbench
// answers reads.  Checks: single and burst writes reach the right
// addresses with auto-increment; single and burst reads return the array;
// another device address is not acknowledged and writes nothing; every byte
// to the target is acknowledged.
module tb_i2c_target;
  timeunit 1ps;
  timeprecision 1ps;

  logic clk = 0, rst_n = 1;
  logic scl, sda_low, sda_oe, sda, wr_en;
  logic [15:0] wr_addr, rd_addr;
  logic [7:0] wr_data, rd_data;
  logic [7:0] mem [logic [15:0]];
  int checks = 0, failures = 0, n_wr = 0;

  always #12500 clk = ~clk;
  assign sda = ~(sda_low | sda_oe);
  i2c_target dut (.clk, .rst_n, .scl, .sda_in(sda), .sda_oe, .wr_en, .wr_addr, .wr_data,
                  .rd_addr, .rd_data);
  i2c_master_model u_m (.scl, .sda_low, .sda);

  assign rd_data = mem.exists(rd_addr) ? mem[rd_addr] : 8'hEE;
  always @(posedge clk) if (wr_en) begin mem[wr_addr] = wr_data; n_wr++; end

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s at %t", what, $time); end
  endtask

  initial begin
    logic [7:0] d [], r [];
    logic ack;
    int nw;
    #1 rst_n = 0;
    #100000 rst_n = 1;
    #1000000;
    for (int t = 0; t < 12; t++) begin
      logic [15:0] a;
      int n;
      a = 16'($urandom);
      n = (t < 4) ? 1 : int'($urandom_range(8, 2));
      d = new[n];
      foreach (d[i]) d[i] = 8'($urandom);
      nw = n_wr;
      u_m.write(a, d, n);
      check(n_wr - nw == n, $sformatf("%0d writes for %0d bytes", n_wr - nw, n));
      for (int i = 0; i < n; i++)
        check(mem.exists(16'(a + i)) && mem[16'(a + i)] == d[i], "written byte at ptr + i");
      u_m.read(a, n, r);
      for (int i = 0; i < n; i++) check(r[i] == d[i], $sformatf("read back byte %0d", i));
    end
    // preset contents, read across them
    for (int i = 0; i < 6; i++) mem[16'h4000 + 16'(i)] = 8'(8'h30 + i);
    u_m.read(16'h4000, 6, r);
    for (int i = 0; i < 6; i++) check(r[i] == 8'(8'h30 + i), "burst read of preset bytes");
    // other address
    nw = n_wr;
    u_m.probe(7'h15, ack);
    check(!ack, "other device address not acknowledged");
    u_m.probe(7'h2A, ack);
    check(ack, "own address acknowledged");
    check(n_wr == nw, "no write from address-only accesses");
    check(u_m.n_nack == 0, "all bytes acknowledged");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #10ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
