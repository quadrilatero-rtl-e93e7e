// quad_decoder: decodes an offloaded 32-bit matrix instruction.
//
// Purely combinational. It recognises the four instructions of the matrix
// extension the coprocessor implements (mz, mld.w, mst.w, mmac with four data
// types), extracts the register fields, picks the execution unit (permutation
// unit for mz, load-store unit for mld.w/mst.w, systolic array for mmac) and
// attaches the scalar operands rs1/rs2 and the instruction id. Anything else
// decodes as not valid, which the controller reports back to the core as not
// accepted. The paper names the decoder and the instructions; the bit-level
// encoding is this design's own (see quad_pkg).
module quad_decoder
  import quad_pkg::*;
(
  input  logic [31:0] instr_i,
  input  logic [31:0] rs1_i,
  input  logic [31:0] rs2_i,
  input  id_t         id_i,
  output instr_t      dec_o
);

  always_comb begin
    logic [2:0] f3;
    logic legal;
    f3 = instr_i[14:12];
    legal = (instr_i[6:0] == OPC_MATRIX) && (instr_i[31:27] == 5'd0) && (f3 <= 3'd3);

    dec_o          = '0;
    dec_o.valid    = legal;
    dec_o.op       = funct3_e'(f3);
    dec_o.md       = instr_i[9:7];
    dec_o.ms1      = instr_i[17:15];
    dec_o.ms2      = instr_i[22:20];
    dec_o.dtype    = dtype_e'(instr_i[26:25]);
    dec_o.is_store = (f3 == F3_MST);
    dec_o.rs1      = rs1_i;
    dec_o.rs2      = rs2_i;
    dec_o.id       = id_i;
    unique case (f3)
      F3_MZ:          dec_o.unit = UNIT_PU;
      F3_MLD, F3_MST: dec_o.unit = UNIT_LSU;
      F3_MMAC:        dec_o.unit = UNIT_SA;
      default:        dec_o.unit = UNIT_NONE;
    endcase
    if (!legal) dec_o.unit = UNIT_NONE;
  end

endmodule
