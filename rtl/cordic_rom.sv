// cordic_rom -- constant memory of the CORDIC.
//
// Holds the 16 elementary rotation angles atan(2^-i), i = 0..15, and the
// one-time scaling factor K^-1 = prod_i (1 + 2^-2i)^-1/2 = 0.607253 for 16
// iterations.  Every word is Q1.15, rounded to nearest:
//   word[i]  = round(atan(2^-i) * 2^15),   i = 0..15
//   word[16] = round(2^15 / prod_{i=0..15} sqrt(1 + 2^-2i))
// Addresses 17..31 read 0.  Keeping both kinds of constant in memory is what
// the published design does; packing them into one 17-word table and the
// read-only, combinational (asynchronous) read are this design's choices.
// A stage that reads a fixed address lets synthesis fold the table away.
module cordic_rom
  import cordic_pkg::*;
(
  input  logic [ROM_AW-1:0]  addr,
  output logic [CONST_W-1:0] data
);

  always_comb begin
    unique case (addr)
      5'd0:    data = 16'd25736;  // atan(1)    = 0.785398
      5'd1:    data = 16'd15193;  // atan(1/2)  = 0.463648
      5'd2:    data = 16'd8027;   // atan(1/4)  = 0.244979
      5'd3:    data = 16'd4075;
      5'd4:    data = 16'd2045;
      5'd5:    data = 16'd1024;
      5'd6:    data = 16'd512;
      5'd7:    data = 16'd256;
      5'd8:    data = 16'd128;
      5'd9:    data = 16'd64;
      5'd10:   data = 16'd32;
      5'd11:   data = 16'd16;
      5'd12:   data = 16'd8;
      5'd13:   data = 16'd4;
      5'd14:   data = 16'd2;
      5'd15:   data = 16'd1;
      5'd16:   data = 16'd19898;  // K^-1 = 0.607253
      default: data = '0;
    endcase
  end

endmodule
