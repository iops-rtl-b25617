// tb_group_buffer: fills both banks of a group buffer with different
// random contents (elements, lengths, list entries, list length), writing
// one bank while the other is selected for reading, then reads every
// location of both banks back through the read port and compares.
module tb_group_buffer;
  import iops_pkg::*;
  localparam int G = GNA;
  localparam int GAW = $clog2(GRP_DEPTH);
  localparam int LAW = $clog2(LIST_DEPTH);
  localparam int NE = 64;   // entries per group and list entries exercised
  logic clk = 1'b0;
  always #5 clk = ~clk;

  logic wbank, rbank, el_we, list_we, all_len_we;
  logic [2:0] el_grp; logic [GAW-1:0] el_addr; logic [63:0] el_val; logic [15:0] el_idx;
  logic [G-1:0] len_we; logic [G-1:0][GAW-1:0] len_addr; logic [G-1:0][7:0] len_val;
  logic [LAW-1:0] list_addr, list_raddr; logic [15:0] list_idx, list_ridx;
  logic [G-1:0] list_bm, list_rbm; logic [LAW:0] all_len, all_len_r;
  logic [G-1:0][GAW-1:0] len_raddr, el_raddr; logic [G-1:0][7:0] len_r;
  logic [G-1:0][63:0] el_rval; logic [G-1:0][15:0] el_ridx;

  group_buffer dut (.*);

  int checks = 0, failures = 0;
  task automatic chk(input string what, input longint got, input longint exp);
    checks++;
    if (got != exp) begin failures++; if (failures < 20) $display("%s: got %0d expected %0d", what, got, exp); end
  endtask

  logic [63:0] m_val [2][G][NE]; logic [15:0] m_idx [2][G][NE]; logic [7:0] m_len [2][G][NE];
  logic [15:0] m_list [2][NE]; logic [G-1:0] m_bm [2][NE]; int m_all [2];

  initial begin
    repeat (20000) @(posedge clk);
    failures++; $display("watchdog expired");
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end

  initial begin
    el_we = 0; list_we = 0; all_len_we = 0; len_we = 0; el_grp = 0; el_addr = 0; el_val = 0;
    el_idx = 0; len_addr = '0; len_val = '0; list_addr = 0; list_idx = 0; list_bm = 0; all_len = 0;
    list_raddr = 0; len_raddr = '0; el_raddr = '0;
    for (int b = 0; b < 2; b++) begin
      @(negedge clk); wbank = b[0]; rbank = ~b[0];
      for (int g = 0; g < G; g++)
        for (int i = 0; i < NE; i++) begin
          m_val[b][g][i] = {$urandom, $urandom}; m_idx[b][g][i] = 16'($urandom);
          el_we = 1; el_grp = 3'(g); el_addr = GAW'(i); el_val = m_val[b][g][i]; el_idx = m_idx[b][g][i];
          @(negedge clk);
        end
      el_we = 0;
      for (int i = 0; i < NE; i++) begin
        len_we = '1;
        for (int g = 0; g < G; g++) begin
          m_len[b][g][i] = 8'($urandom); len_addr[g] = GAW'(i); len_val[g] = m_len[b][g][i];
        end
        m_list[b][i] = 16'($urandom); m_bm[b][i] = G'($urandom);
        list_we = 1; list_addr = LAW'(i); list_idx = m_list[b][i]; list_bm = m_bm[b][i];
        @(negedge clk);
      end
      len_we = 0; list_we = 0;
      m_all[b] = $urandom_range(1, NE); all_len_we = 1; all_len = (LAW+1)'(m_all[b]);
      @(negedge clk); all_len_we = 0;
    end
    for (int b = 0; b < 2; b++) begin
      rbank = b[0]; wbank = ~b[0]; #1;
      chk("all_len", all_len_r, m_all[b]);
      for (int i = 0; i < NE; i++) begin
        list_raddr = LAW'(i);
        for (int g = 0; g < G; g++) begin len_raddr[g] = GAW'(i); el_raddr[g] = GAW'((i + g) % NE); end
        #1;
        chk("list idx", list_ridx, m_list[b][i]); chk("list bm", list_rbm, m_bm[b][i]);
        for (int g = 0; g < G; g++) begin
          chk("len", len_r[g], m_len[b][g][i]);
          chk("val", el_rval[g], m_val[b][g][(i + g) % NE]);
          chk("idx", el_ridx[g], m_idx[b][g][(i + g) % NE]);
        end
      end
    end
    $display("TB_RESULT checks=%0d failures=%0d", checks, failures);
    $finish;
  end
endmodule
