// tb_rot_tree: the combinational readout tree at its default size, 256
// pixels of two caches each.  Random patterns of full caches (from one
// to all); the tree must select the lowest-numbered full cache, give its
// pixel address and data, and grant exactly that cache only when `take` is
// high.
module tb_rot_tree;
  import ts1_pkg::*;
  timeunit 1ps;
  timeprecision 1ps;

  localparam int N_PIX = 256, N = 2 * N_PIX;
  logic [N-1:0] leaf_valid, grant;
  tdc_ts_t      leaf_data [N];
  logic take, any_valid;
  logic [PIX_ADDR_W-1:0] addr;
  tdc_ts_t data;
  int checks = 0, failures = 0;

  rot_tree dut (.*);

  task automatic check(input bit ok, input string what);
    checks++;
    if (!ok) begin failures++; $display("FAIL %s", what); end
  endtask

  initial begin
    for (int t = 0; t < 3000; t++) begin
      int lo, dens;
      dens = (t % 4 == 0) ? 1 : (t % 4 == 1) ? 10 : (t % 4 == 2) ? 200 : 1000;
      lo = -1;
      for (int i = 0; i < N; i++) begin
        leaf_valid[i] = ($urandom_range(999) < dens) || (t % 50 == 7 && i == (t * 13) % N);
        leaf_data[i]  = tdc_ts_t'({i[8:0], 23'($urandom)});
        if (leaf_valid[i] && lo < 0) lo = i;
      end
      if (t % 97 == 3) begin leaf_valid = '0; lo = -1; end
      take = t[0];
      #10;
      check(any_valid == (lo >= 0), "any_valid");
      if (lo >= 0) begin
        check(int'(addr) == lo / 2, $sformatf("addr %0d exp %0d", addr, lo / 2));
        check(data == leaf_data[lo], "data of the selected cache");
        if (take) check(grant == (N'(1) << lo), "grant of the selected cache only");
        else      check(grant == '0, "no grant without take");
      end else begin
        check(grant == '0, "no grant when empty");
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  initial begin
    #1ms;
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
