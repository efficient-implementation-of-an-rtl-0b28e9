// memory_bank: on-chip parameter memory of the accelerator.
//
// Holds the weights and biases of all specialised models side by side:
//  * encoder memory: five segments (S1, S21, S22, S31, S32), one per encoder
//    layer of each scenario, ENC_WORDS words each, words of up to 64 Q8.8
//    lanes. Weight matrices are stored transposed: word j of a matrix region
//    is column j of the matrix, so a vector engine gets a whole column per
//    read. Layout within a segment is given by OFF_* in loc_pkg.
//  * FCNN memory: one region of FC_WORDS words (32 lanes) per scenario.
//  * router memory: SLP weights W[c][t] as word t (3 lanes), bias at word 128.
// The control unit chooses the segment (`seg`) and scenario (`scen`); readers
// give addresses relative to their region. The encoder memory has two read
// ports (attention and FFN), all reads are synchronous (data one cycle after
// the address). A host loads everything through the write port, with
// absolute word addresses (segment * ENC_WORDS + offset, scenario * FC_WORDS
// + offset) before inference starts.
//
// Concatenated per-scenario storage, the five segments and the selection by
// the control unit are the accelerator's; word widths, layout and the host
// port are this design's choices.
//
// Lint note: cfg_addr is 16 bits wide for a uniform host port; the widest
// memory needs 13, so the top three bits are ignored.
module memory_bank
  import loc_pkg::*;
(
  input  logic              clk,
  // host write port
  input  logic              cfg_we,
  input  mem_sel_e          cfg_sel,
  input  logic [15:0]       cfg_addr,
  input  q_t                cfg_data [MAX_LANES],
  // selection from the control unit
  input  logic [2:0]        seg,
  input  scen_e             scen,
  // encoder read ports
  input  logic [8:0]        a_addr,
  output q_t                a_data [MAX_LANES],
  input  logic [8:0]        b_addr,
  output q_t                b_data [MAX_LANES],
  // FCNN read port
  input  logic [10:0]       f_addr,
  output q_t                f_data [D_HID],
  // router read port
  input  logic [7:0]        s_addr,
  output q_t                s_data [N_SCEN]
);
  localparam int unsigned ENC_DEPTH = N_SEG * ENC_WORDS;
  localparam int unsigned FC_DEPTH  = N_SCEN * FC_WORDS;

  q_t enc_mem [ENC_DEPTH][MAX_LANES];
  q_t fc_mem  [FC_DEPTH][D_HID];
  q_t slp_mem [SLP_WORDS][N_SCEN];

  logic [ENC_AW-1:0] seg_base;
  logic [FC_AW-1:0]  fc_base;
  assign seg_base = ENC_AW'(seg) * ENC_AW'(ENC_WORDS);
  assign fc_base  = FC_AW'(scen) * FC_AW'(FC_WORDS);

  always_ff @(posedge clk) begin
    if (cfg_we) begin
      case (cfg_sel)
        MEM_ENC: enc_mem[cfg_addr[ENC_AW-1:0]] <= cfg_data;
        MEM_FC:  for (int k = 0; k < int'(D_HID); k++) fc_mem[cfg_addr[FC_AW-1:0]][k] <= cfg_data[k];
        default: for (int k = 0; k < int'(N_SCEN); k++) slp_mem[cfg_addr[7:0]][k] <= cfg_data[k];
      endcase
    end
    a_data <= enc_mem[seg_base + ENC_AW'(a_addr)];
    b_data <= enc_mem[seg_base + ENC_AW'(b_addr)];
    f_data <= fc_mem[fc_base + FC_AW'(f_addr)];
    s_data <= slp_mem[s_addr];
  end
endmodule
