// i2c_master_model: bus master used by the testbenches.  It drives SCL and
// pulls SDA low (sda_low), and sees the wired-AND bus level `sda`.  The bit
// period is 4 * QUARTER_PS (default 1 us, 1 MHz SCL).  Tasks:
//   write(ptr, data, n)      S addr+W ptr_hi ptr_lo data[0..n-1] P
//   read(ptr, n, data)       S addr+W ptr_hi ptr_lo Sr addr+R d0..d(n-1) P
//   probe(addr7, ack)        S addr+W P, returns whether the target acked
// Every byte the master sends must be acknowledged; n_nack counts the
// bytes that were not.
module i2c_master_model #(
  parameter logic [6:0] DEV_ADDR   = 7'h2A,
  parameter int         QUARTER_PS = 250000
) (
  output logic scl,
  output logic sda_low,
  input  logic sda
);
  timeunit 1ps;
  timeprecision 1ps;

  int n_nack = 0;
  initial begin scl = 1'b1; sda_low = 1'b0; end

  task automatic q(); #(QUARTER_PS); endtask

  task automatic start_c();          // from idle or after an ACK with SCL low
    sda_low = 1'b0; q(); scl = 1'b1; q();
    sda_low = 1'b1; q(); scl = 1'b0; q();
  endtask

  task automatic stop_c();
    sda_low = 1'b1; q(); scl = 1'b1; q(); sda_low = 1'b0; q(); q();
  endtask

  task automatic put_bit(input logic b);
    sda_low = ~b; q(); scl = 1'b1; q(); q(); scl = 1'b0; q();
  endtask

  task automatic get_bit(output logic b);
    sda_low = 1'b0; q(); scl = 1'b1; q(); b = sda; q(); scl = 1'b0; q();
  endtask

  task automatic put_byte(input logic [7:0] d, output logic ack);
    logic a;
    for (int i = 7; i >= 0; i--) put_bit(d[i]);
    get_bit(a);
    ack = ~a;
    if (!ack) n_nack++;
  endtask

  task automatic get_byte(input logic last, output logic [7:0] d);
    for (int i = 7; i >= 0; i--) get_bit(d[i]);
    put_bit(last);                    // ACK = 0, NACK = 1
  endtask

  task automatic write(input logic [15:0] ptr, input logic [7:0] data [], input int n);
    logic ack;
    start_c();
    put_byte({DEV_ADDR, 1'b0}, ack);
    put_byte(ptr[15:8], ack);
    put_byte(ptr[7:0], ack);
    for (int i = 0; i < n; i++) put_byte(data[i], ack);
    stop_c();
  endtask

  task automatic write1(input logic [15:0] ptr, input logic [7:0] d);
    logic [7:0] a [];
    a = new[1];
    a[0] = d;
    write(ptr, a, 1);
  endtask

  task automatic read(input logic [15:0] ptr, input int n, output logic [7:0] data []);
    logic ack;
    data = new[n];
    start_c();
    put_byte({DEV_ADDR, 1'b0}, ack);
    put_byte(ptr[15:8], ack);
    put_byte(ptr[7:0], ack);
    start_c();                        // repeated start
    put_byte({DEV_ADDR, 1'b1}, ack);
    for (int i = 0; i < n; i++) get_byte(i == n - 1, data[i]);
    stop_c();
  endtask

  task automatic probe(input logic [6:0] a7, output logic ack);
    start_c();
    put_byte({a7, 1'b0}, ack);
    if (!ack) n_nack--;               // an expected refusal is not an error
    stop_c();
  endtask
endmodule
