// dram_model: behavioural model of the device DDR memory for simulation only.
//
// It stands in for the DRAM devices and PHY behind the controller's command bus.
// Storage is sparse (associative array of 64-byte lines, unwritten lines read 0).
// ACT opens a row in a bank, PRE closes it, RD returns the addressed line
// T_CL + BURST cycles after the command, WR stores the line at once.  The model
// counts protocol violations: a column command to a closed bank or to a row other
// than the open one, a column command earlier than T_RCD after ACT, an ACT to a bank
// that is already open.
module dram_model
  import trace_pkg::*;
#(
  parameter int unsigned T_RCD = 27,
  parameter int unsigned T_CL  = 27,
  parameter int unsigned BURST = 4
) (
  input  logic                 clk,
  input  logic                 rst_n,
  input  logic                 cmd_valid,
  input  dram_cmd_e            cmd,
  input  logic [BANK_W-1:0]    bank,
  input  logic [ROW_W-1:0]     row,
  input  logic [COL_W-1:0]     col,
  input  logic [LINE_BITS-1:0] wdata,
  output logic                 rvalid,
  output logic [LINE_BITS-1:0] rdata,
  output int                   violations,
  output int                   reads,
  output int                   writes
);

  logic [LINE_BITS-1:0] mem [logic [PADDR_W-1:0]];
  logic [NBANKS-1:0]    open_b;
  logic [ROW_W-1:0]     orow [NBANKS];
  longint               act_t [NBANKS];
  longint               now;

  typedef struct { longint t; logic [LINE_BITS-1:0] d; } rd_t;
  rd_t pend[$];

  function automatic logic [PADDR_W-1:0] la(input logic [ROW_W-1:0] r,
                                            input logic [BANK_W-1:0] b,
                                            input logic [COL_W-1:0] c);
    return {r, b, c};
  endfunction

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      open_b <= '0; now <= 0; rvalid <= 1'b0; rdata <= '0;
      violations <= 0; reads <= 0; writes <= 0;
      pend.delete();
    end else begin
      now <= now + 1;
      rvalid <= 1'b0;
      if (pend.size() > 0 && pend[0].t <= now) begin
        rvalid <= 1'b1;
        rdata  <= pend[0].d;
        void'(pend.pop_front());
      end
      if (cmd_valid) begin
        case (cmd)
          DCMD_ACT: begin
            if (open_b[bank]) violations <= violations + 1;
            open_b[bank] <= 1'b1;
            orow[bank]   <= row;
            act_t[bank]  <= now;
          end
          DCMD_PRE: open_b[bank] <= 1'b0;
          DCMD_RD, DCMD_WR: begin
            if (!open_b[bank] || orow[bank] != row || now - act_t[bank] < T_RCD)
              violations <= violations + 1;
            if (cmd == DCMD_WR) begin
              mem[la(row, bank, col)] = wdata;
              writes <= writes + 1;
            end else begin
              rd_t r;
              r.t = now + T_CL + BURST - 1;
              r.d = mem.exists(la(row, bank, col)) ? mem[la(row, bank, col)] : '0;
              pend.push_back(r);
              reads <= reads + 1;
            end
          end
          default: ;
        endcase
      end
    end
  end

endmodule
