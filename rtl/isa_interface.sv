// isa_interface -- 8-bit ISA I/O read slave for the integrated Stokes values.
//
// The PC104 host reads the four 16-bit parameters as eight bytes, most
// significant byte first, plus a status byte, from a 16-byte window of the
// I/O space. A comparator matches the address lines A[11:4] against the base K
// (BASE_ADDR); A[3:0] drives the multiplexer:
//   0/1 I MSB/LSB, 2/3 Q, 4/5 U, 6/7 V, 8 status, 9..15 read as zero.
// The data bus buffer is enabled while the window is addressed, /IORD is low
// and AEN is low (AEN high marks a DMA cycle on ISA). The data path is
// combinational, so the byte follows A[3:0] within the read strobe; the pad's
// tri-state driver is outside, controlled by isa_d_oe.
//
// Status byte: bit 0 READY is set when a new I, Q, U, V set is latched
// (result_valid) and bit 1 OVERRUN when a set is latched while READY is still
// set. Both are cleared at the end of an ISA read of the status byte; setting
// wins over clearing in the same cycle. /IORD and AEN are asynchronous to clk
// and pass a two-flop synchroniser; the status read is recognised at the
// synchronised falling edge of /IORD and the flags cleared at the rising edge,
// so the byte does not change under the host while it reads it.
//
// Follows the original design: 8-bit bus, A[11:4] comparator, A[3:0] multiplexer,
// /IORD and AEN control, MSB and LSB byte per parameter, a status register.
// This RTL's own choices: the byte order in the map, the base address 0x300,
// the status bits and their clearing rule.
module isa_interface
  import gem_pkg::*;
#(
  parameter logic [7:0] BASE_ADDR = 8'h30   // K: window at I/O 0x300-0x30F
) (
  input  logic        clk,
  input  logic        rst_n,
  input  stokes_int_t result,        // integrated I, Q, U, V
  input  logic        result_valid,  // strobe: result just updated
  input  logic [11:0] isa_a,         // ISA address lines A[11:0]
  input  logic        isa_iord_n,    // /IORD
  input  logic        isa_aen,       // AEN
  output logic [7:0]  isa_d,         // data bus value
  output logic        isa_d_oe,      // drive the data bus
  output logic [7:0]  status         // status register
);

  logic sel;
  logic iord_n_s1, iord_n_s2, iord_n_s3;
  logic st_addr_s;
  logic status_read_pending;
  logic read_start, read_end, status_clear;
  logic ready, overrun;

  always_comb begin
    status              = '0;   // bits 7..2 read as zero
    status[ST_READY]    = ready;
    status[ST_OVERRUN]  = overrun;
  end

  assign sel      = (isa_a[11:4] == BASE_ADDR) && !isa_aen;
  assign isa_d_oe = sel && !isa_iord_n;

  always_comb begin
    unique case (isa_a[3:0])
      REG_I_MSB:  isa_d = result.i[15:8];
      REG_I_LSB:  isa_d = result.i[7:0];
      REG_Q_MSB:  isa_d = result.q[15:8];
      REG_Q_LSB:  isa_d = result.q[7:0];
      REG_U_MSB:  isa_d = result.u[15:8];
      REG_U_LSB:  isa_d = result.u[7:0];
      REG_V_MSB:  isa_d = result.v[15:8];
      REG_V_LSB:  isa_d = result.v[7:0];
      REG_STATUS: isa_d = status;
      default:    isa_d = 8'h00;
    endcase
  end

  // Synchroniser for the read strobe and the status-address decode.
  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      iord_n_s1 <= 1'b1;
      iord_n_s2 <= 1'b1;
      iord_n_s3 <= 1'b1;
      st_addr_s <= 1'b0;
    end else begin
      iord_n_s1 <= isa_iord_n;
      iord_n_s2 <= iord_n_s1;
      iord_n_s3 <= iord_n_s2;
      st_addr_s <= sel && (isa_a[3:0] == REG_STATUS);
    end

  assign read_start   = iord_n_s3 && !iord_n_s2;   // synchronised falling edge of /IORD
  assign read_end     = !iord_n_s3 && iord_n_s2;   // synchronised rising edge
  assign status_clear = read_end && status_read_pending;

  always_ff @(posedge clk or negedge rst_n)
    if (!rst_n) begin
      status_read_pending <= 1'b0;
      ready               <= 1'b0;
      overrun             <= 1'b0;
    end else begin
      // Start of a read: remember whether it addresses the status byte.
      if (read_start) status_read_pending <= st_addr_s;
      // End of a status read: the host has taken the byte, clear the flags.
      if (status_clear) begin
        status_read_pending <= 1'b0;
        ready               <= 1'b0;
        overrun             <= 1'b0;
      end
      if (result_valid) begin
        ready <= 1'b1;
        if (ready && !status_clear) overrun <= 1'b1;
      end
    end

  // The bus is driven only inside a CPU I/O read of this window.
  a_oe_only_in_read: assert property (@(posedge clk) disable iff (!rst_n)
    isa_d_oe |-> !isa_iord_n && !isa_aen && isa_a[11:4] == BASE_ADDR);

endmodule
