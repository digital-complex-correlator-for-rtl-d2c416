// tb_isa_interface -- plays ISA I/O read cycles against the bus interface.
// A read puts the address on A[11:0], lowers /IORD for 8 clk cycles with AEN
// low and checks the byte and the output enable while /IORD is low. Checks the
// register map (MSB then LSB of I, Q, U, V, the status byte, zero for unused
// offsets), no drive for another base address, for AEN high and outside /IORD,
// and the READY / OVERRUN flags and their clearing by a status read.
module tb_isa_interface;
  import gem_pkg::*;

  localparam logic [7:0] K = 8'h30;

  logic clk = 0, rst_n = 0;
  stokes_int_t result;
  logic result_valid = 0;
  logic [11:0] isa_a = '0;
  logic isa_iord_n = 1, isa_aen = 0;
  logic [7:0] isa_d, status;
  logic isa_d_oe;
  int checks = 0, failures = 0;

  isa_interface #(.BASE_ADDR(K)) dut (.clk, .rst_n, .result, .result_valid,
    .isa_a, .isa_iord_n, .isa_aen, .isa_d, .isa_d_oe, .status);

  always #5 clk = ~clk;

  task automatic check(input bit cond, input string msg);
    checks++;
    if (!cond) begin
      failures++;
      if (failures < 20) $display("FAIL: %s", msg);
    end
  endtask

  // One I/O read cycle, asynchronous to clk; returns the byte seen on the bus.
  task automatic isa_read(input logic [11:0] addr, input bit aen, output logic [7:0] d,
                          output bit driven);
    #3 isa_a = addr; isa_aen = aen;
    #7 check(!isa_d_oe, "bus driven before /IORD");
    isa_iord_n = 0;
    #2 driven = isa_d_oe;
    d = isa_d;
    #75 check(isa_d_oe == driven && isa_d == d, "byte changed during /IORD");
    isa_iord_n = 1;
    #2 check(!isa_d_oe, "bus driven after /IORD");
    #40;
  endtask

  task automatic post_result(input stokes_int_t r);
    @(negedge clk);
    result = r; result_valid = 1;
    @(negedge clk);
    result_valid = 0;
  endtask

  function automatic logic [7:0] expected_byte(input stokes_int_t r, input int off, input logic [7:0] st);
    case (off)
      0: return r.i[15:8];  1: return r.i[7:0];
      2: return r.q[15:8];  3: return r.q[7:0];
      4: return r.u[15:8];  5: return r.u[7:0];
      6: return r.v[15:8];  7: return r.v[7:0];
      8: return st;
      default: return 8'h00;
    endcase
  endfunction

  initial begin
    logic [7:0] d;
    bit driven;
    stokes_int_t r;
    result = '0;
    repeat (3) @(posedge clk);
    #1 rst_n = 1;
    #20;
    isa_read({K, 4'h8}, 0, d, driven);
    check(driven && d == 8'h00, "status after reset");

    for (int round = 0; round < 20; round++) begin
      r = stokes_int_t'({$urandom, $urandom});
      post_result(r);
      #20 check(status[ST_READY] && !status[ST_OVERRUN], "READY after a result");
      // Read the whole window, status first.
      for (int off = 0; off < 16; off++) begin
        int o;
        o = (off + 8) % 16;
        isa_read({K, 4'(o)}, 0, d, driven);
        check(driven, $sformatf("offset %0d not driven", o));
        check(d == expected_byte(r, o, 8'h01),
              $sformatf("offset %0d read %h expected %h", o, d, expected_byte(r, o, 8'h01)));
      end
      check(status == 8'h00, "flags not cleared by the status read");
      // Other I/O addresses and DMA cycles must not be answered.
      isa_read({K ^ 8'(1 << (round % 8)), 4'(round % 9)}, 0, d, driven);
      check(!driven, "answered another base address");
      isa_read({K, 4'(round % 9)}, 1, d, driven);
      check(!driven, "answered with AEN high");
    end

    // Overrun: two results without a status read.
    r = stokes_int_t'({$urandom, $urandom});
    post_result(r);
    post_result(~r);
    #20 check(status == 8'h03, "OVERRUN after two unread results");
    isa_read({K, 4'h0}, 0, d, driven);
    check(d == expected_byte(~r, 0, 0), "newest result readable");
    check(status == 8'h03, "data read must not clear the flags");
    isa_read({K, 4'h8}, 0, d, driven);
    check(d == 8'h03, "status byte shows READY and OVERRUN");
    check(status == 8'h00, "status read clears both flags");

    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
