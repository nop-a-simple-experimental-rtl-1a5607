// nop_boot_rom: the boot program every processing unit runs after reset.
//
// The ROM answers word addresses BOOT_ADDR (0x3fc0) up to the end of the
// 16K-word memory; addr is the offset from BOOT_ADDR (6 bits). Only the
// first five words hold code; the rest read as zero. The program, four
// opcodes per word, least significant first:
//
//   0 IN          read the word position to jump to when loading is done
//   -64           memory reference of the first word to load (dp-64 = ld0)
//   0 INMORE      has the message on port 0 ended?
//   10 FJP        yes: go to POP
//   DUP 0 IN      read a word
//   EXCH ST       store it at the memory reference
//   1 ADD         next memory reference
//   -12 UJP       back to "0 INMORE"
//   POP           drop the memory reference
//   4 MUL JUMP    ip = position * 4 + code base: run the loaded code
//
// The listing and the address follow the processor description; the
// opcode values are its instruction encodings. That the unused words read
// as zero is this design's choice. The ROM is combinational: the
// processing unit registers its output like a memory read.
module nop_boot_rom (
  input  logic [5:0]  addr,
  output logic [31:0] data
);

  always_comb begin
    unique case (addr)
      //                 byte3  byte2  byte1  byte0
      6'd0:    data = 32'h00_C0_A6_00; // 0 IN -64 0
      6'd1:    data = 32'h8A_95_0A_A7; // INMORE 10 FJP DUP
      6'd2:    data = 32'h98_8B_A6_00; // 0 IN EXCH ST
      6'd3:    data = 32'h94_F4_81_01; // 1 ADD -12 UJP
      6'd4:    data = 32'h9E_83_04_89; // POP 4 MUL JUMP
      default: data = 32'h0;
    endcase
  end

endmodule
