// genetek_pkg: constants and helpers shared by the GeneTEK accelerator.
//
// The accelerator compares every query of a set against every target of a
// set with Myers's bit-vector edit-distance algorithm. This package holds the
// default template parameters (maximum sequence length, query buffer size,
// number of workers), the 2-bit nucleotide code, the ASCII-to-code function
// and the AXI limits that the memory-side blocks share.
//
// From the paper: the 2-bit code (A=00, C=01, T=10, G=11), the 360 bp /
// 42-worker / 10240-entry configuration, the 32-bit AXI data width, the
// burst length of 16 and the 16 read / 32 write outstanding transactions.
// Own choices: lower-case letters are accepted, 'U' maps like 'T', and any
// other character (for example 'N') maps to the code of 'A'.
package genetek_pkg;

  // Template defaults (360 bp instance of the accelerator)
  localparam int unsigned LMAX_DEF = 360;    // maximum sequence length in bases
  localparam int unsigned W_DEF    = 42;     // number of parallel workers
  localparam int unsigned BQ_DEF   = 10240;  // query buffer entries

  // AXI master settings
  localparam int unsigned AXI_DATA_W     = 32;
  localparam int unsigned AXI_ADDR_W     = 32;
  localparam int unsigned AXI_MAX_BURST  = 16;  // beats per burst
  localparam int unsigned RD_OUTSTANDING = 16;  // read bursts in flight
  localparam int unsigned WR_OUTSTANDING = 32;  // write transactions in flight

  // Width of the comparison index carried with every pair and result
  localparam int unsigned ID_W = 32;

  typedef enum logic [1:0] {
    NT_A = 2'b00,
    NT_C = 2'b01,
    NT_T = 2'b10,
    NT_G = 2'b11
  } nt_e;

  function automatic nt_e ascii_to_nt(input logic [7:0] c);
    unique case (c)
      8'h43, 8'h63: return NT_C;                 // 'C' 'c'
      8'h54, 8'h74, 8'h55, 8'h75: return NT_T;   // 'T' 't' 'U' 'u'
      8'h47, 8'h67: return NT_G;                 // 'G' 'g'
      default: return NT_A;                      // 'A' 'a' and anything else
    endcase
  endfunction

  // Words of a sequence record in memory: one length word, then the ASCII
  // characters packed four to a word.
  function automatic int unsigned record_words(input int unsigned lmax);
    return 1 + (lmax + 3) / 4;
  endfunction

endpackage
