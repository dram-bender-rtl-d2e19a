// ddr4_phy_model: behavioural model (not synthesizable) of a DDR4 PHY with
// a DRAM module behind it, for testbenches.
//
// It watches the four DFI command phases every fabric cycle and decodes
// DDR4 commands from CS_n/ACT_n/RAS_n/CAS_n/WE_n and the address pins.  It
// tracks the open row of each of the 16 banks and stores written 512-bit
// transfers in an associative array indexed by bank, row and column/8.  A
// READ returns the stored transfer (or a fixed function of its address if
// never written) RD_LAT fabric cycles later; several READs in one cycle are
// returned on consecutive cycles.  It checks no DRAM timing: the tests
// check timing on the command stream themselves.  Counters of every command
// type and a command log (cycle and phase) are kept for the testbench.
module ddr4_phy_model #(
  parameter int unsigned RD_LAT = 6
) (
  input  logic              clk,
  input  logic              rst,
  input  logic [3:0]        dfi_cs_n,
  input  logic [3:0]        dfi_act_n,
  input  logic [3:0]        dfi_ras_n,
  input  logic [3:0]        dfi_cas_n,
  input  logic [3:0]        dfi_we_n,
  input  logic [3:0][1:0]   dfi_bg,
  input  logic [3:0][1:0]   dfi_ba,
  input  logic [3:0][13:0]  dfi_addr,
  input  logic [3:0]        dfi_cke,
  input  logic [3:0]        dfi_wrdata_en,
  input  logic [511:0]      dfi_wrdata,
  output logic              phy_rd_valid,
  output logic [511:0]      phy_rd_data
);
  typedef enum int {K_ACT, K_PRE, K_RD, K_WR, K_REF, K_ZQS, K_SRE, K_SRX, K_OTHER} kind_e;
  typedef struct { int unsigned cycle; int unsigned phase; kind_e kind; int unsigned bank; int unsigned addr; } ev_t;

  logic [511:0] mem [logic [31:0]];
  logic [16:0]  open_row [16];
  bit           is_open  [16];
  int unsigned  n_act, n_pre, n_rd, n_wr, n_ref, n_zqs, n_sre, n_srx;
  int unsigned  cycle;
  ev_t          log_q [$];
  logic [511:0] rq [$];
  int unsigned  rq_due [$];
  logic         cke_prev;

  function automatic logic [511:0] default_data(input logic [31:0] key);
    logic [511:0] d;
    for (int i = 0; i < 16; i++) d[32*i +: 32] = key ^ (32'h9e37_79b9 * (i + 1));
    return d;
  endfunction

  function automatic logic [31:0] key_of(input int unsigned b, input logic [16:0] r, input logic [9:0] c);
    return {b[3:0], r, c[9:3], 4'h0};
  endfunction

  always @(posedge clk) begin
    if (rst) begin
      cycle = 0;
      n_act = 0; n_pre = 0; n_rd = 0; n_wr = 0; n_ref = 0; n_zqs = 0; n_sre = 0; n_srx = 0;
      for (int b = 0; b < 16; b++) is_open[b] = 0;
      cke_prev = 1'b1;
      log_q.delete(); rq.delete(); rq_due.delete();
      phy_rd_valid <= 1'b0;
    end else begin
      for (int p = 0; p < 4; p++) begin
        int unsigned b;
        ev_t e;
        b = {dfi_bg[p], dfi_ba[p]};
        e.cycle = cycle; e.phase = p; e.bank = b; e.addr = 0; e.kind = K_OTHER;
        if (cke_prev && !dfi_cke[p]) begin n_sre++; e.kind = K_SRE; log_q.push_back(e); end
        if (!cke_prev && dfi_cke[p]) begin n_srx++; e.kind = K_SRX; log_q.push_back(e); end
        if (!dfi_cs_n[p]) begin
          if (!dfi_act_n[p]) begin
            logic [16:0] row;
            row = {dfi_ras_n[p], dfi_cas_n[p], dfi_we_n[p], dfi_addr[p]};
            open_row[b] = row; is_open[b] = 1; n_act++;
            e.kind = K_ACT; e.addr = row;
          end else begin
            unique case ({dfi_ras_n[p], dfi_cas_n[p], dfi_we_n[p]})
              3'b001: if (dfi_cke[p]) begin n_ref++; e.kind = K_REF; end
              3'b010: begin
                n_pre++; e.kind = K_PRE; e.addr = dfi_addr[p][10];
                if (dfi_addr[p][10]) for (int i = 0; i < 16; i++) is_open[i] = 0;
                else is_open[b] = 0;
              end
              3'b100: begin
                n_wr++; e.kind = K_WR; e.addr = dfi_addr[p][9:0];
                mem[key_of(b, open_row[b], dfi_addr[p][9:0])] = dfi_wrdata;
              end
              3'b101: begin
                logic [31:0] k;
                n_rd++; e.kind = K_RD; e.addr = dfi_addr[p][9:0];
                k = key_of(b, open_row[b], dfi_addr[p][9:0]);
                rq.push_back(mem.exists(k) ? mem[k] : default_data(k));
                rq_due.push_back(cycle + RD_LAT);
              end
              3'b110: begin n_zqs++; e.kind = K_ZQS; end
              default: ;
            endcase
          end
          log_q.push_back(e);
        end
        cke_prev = dfi_cke[p];
      end
      if (rq.size() > 0 && rq_due[0] <= cycle) begin
        phy_rd_valid <= 1'b1;
        phy_rd_data  <= rq.pop_front();
        void'(rq_due.pop_front());
      end else begin
        phy_rd_valid <= 1'b0;
      end
      cycle++;
    end
  end
endmodule
