// tb_memory_bank: fills the three parameter memories through the host port
// with random words, then reads back random addresses through every read
// port under random segment and scenario selections. Each read must return,
// one cycle later, the word written at segment * 297 + offset (encoder),
// scenario * 1570 + offset (FCNN) or the router word itself.
`timescale 1ns/1ps
module tb_memory_bank;
  import loc_pkg::*;
  import tb_ref_pkg::*;
  logic clk = 0;
  always #5 clk = ~clk;
  logic cfg_we;
  mem_sel_e cfg_sel;
  logic [15:0] cfg_addr;
  q_t cfg_data [MAX_LANES];
  logic [2:0] seg;
  scen_e scen;
  logic [8:0] a_addr, b_addr;
  q_t a_data [MAX_LANES], b_data [MAX_LANES];
  logic [10:0] f_addr;
  q_t f_data [D_HID];
  logic [7:0] s_addr;
  q_t s_data [N_SCEN];
  memory_bank dut (.*);
  int checks = 0, failures = 0;
  int enc [N_SEG*ENC_WORDS][MAX_LANES];
  int fc  [N_SCEN*FC_WORDS][D_HID];
  int sl  [SLP_WORDS][N_SCEN];
  initial begin
    repeat (100000) @(posedge clk);
    failures++;
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
  task automatic wr(mem_sel_e s, int addr, int lanes, output int row [MAX_LANES]);
    @(negedge clk);
    cfg_we = 1; cfg_sel = s; cfg_addr = 16'(addr);
    for (int k = 0; k < MAX_LANES; k++) begin
      row[k] = (k < lanes) ? rnd(-32768, 32767) : 0;
      cfg_data[k] = q_t'(row[k]);
    end
  endtask
  initial begin
    int row [MAX_LANES];
    cfg_we = 0; cfg_sel = MEM_ENC; cfg_addr = 0; seg = 0; scen = SCEN_S1;
    a_addr = 0; b_addr = 0; f_addr = 0; s_addr = 0;
    for (int k = 0; k < MAX_LANES; k++) cfg_data[k] = '0;
    for (int a = 0; a < N_SEG*ENC_WORDS; a++) begin wr(MEM_ENC, a, MAX_LANES, row); enc[a] = row; end
    for (int a = 0; a < N_SCEN*FC_WORDS; a++) begin
      wr(MEM_FC, a, D_HID, row);
      for (int k = 0; k < D_HID; k++) fc[a][k] = row[k];
    end
    for (int a = 0; a < SLP_WORDS; a++) begin
      wr(MEM_SLP, a, N_SCEN, row);
      for (int k = 0; k < N_SCEN; k++) sl[a][k] = row[k];
    end
    @(negedge clk);
    cfg_we = 0;
    for (int n = 0; n < 2000; n++) begin
      int sg, sc, aa, ba, fa, sa;
      sg = rnd(0, N_SEG-1); sc = rnd(0, N_SCEN-1);
      aa = rnd(0, ENC_WORDS-1); ba = rnd(0, ENC_WORDS-1);
      fa = rnd(0, FC_WORDS-1); sa = rnd(0, SLP_WORDS-1);
      seg = 3'(sg); scen = scen_e'(sc);
      a_addr = 9'(aa); b_addr = 9'(ba); f_addr = 11'(fa); s_addr = 8'(sa);
      @(negedge clk);
      checks += 4;
      for (int k = 0; k < MAX_LANES; k++) if (int'(a_data[k]) != enc[sg*ENC_WORDS+aa][k]) begin failures++; $display("port a seg %0d addr %0d", sg, aa); break; end
      for (int k = 0; k < MAX_LANES; k++) if (int'(b_data[k]) != enc[sg*ENC_WORDS+ba][k]) begin failures++; $display("port b seg %0d addr %0d", sg, ba); break; end
      for (int k = 0; k < D_HID; k++) if (int'(f_data[k]) != fc[sc*FC_WORDS+fa][k]) begin failures++; $display("fc scen %0d addr %0d", sc, fa); break; end
      for (int k = 0; k < N_SCEN; k++) if (int'(s_data[k]) != sl[sa][k]) begin failures++; $display("slp addr %0d", sa); break; end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
