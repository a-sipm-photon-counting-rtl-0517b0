// axi_mem_model: behavioural AXI4 write-only memory standing in for the
// processor's DDR behind its AXI port. Testbench use only.
//
// Accepts one address phase, then the burst's data beats, then returns one
// response. 'stall' holds awready and wready low; when 'random_stall' is set
// each ready is also dropped at random about one clock in four. 'bad_resp'
// makes every response SLVERR. The model checks the master's side of the
// protocol and counts violations in proto_errors: address and length stable
// while awvalid waits, wlast on exactly the last beat, INCR bursts of full
// beats that do not cross a 4 kB boundary, and writes inside the memory.
// The same stability rules are also stated as concurrent assertions.
// Memory is an array of words, readable by hierarchical reference (mem[i]).
module axi_mem_model #(
  parameter int unsigned ADDR_W = 32,
  parameter int unsigned DATA_W = 64,
  parameter int unsigned WORDS  = 65536
) (
  input  logic                clk,
  input  logic                rst_n,
  input  logic                stall,
  input  logic                random_stall,
  input  logic                bad_resp,
  input  logic [ADDR_W-1:0]   awaddr,
  input  logic [7:0]          awlen,
  input  logic [2:0]          awsize,
  input  logic [1:0]          awburst,
  input  logic                awvalid,
  output logic                awready,
  input  logic [DATA_W-1:0]   wdata,
  input  logic [DATA_W/8-1:0] wstrb,
  input  logic                wlast,
  input  logic                wvalid,
  output logic                wready,
  output logic [1:0]          bresp,
  output logic                bvalid,
  input  logic                bready,
  output int unsigned         proto_errors,
  output int unsigned         bursts,
  output int unsigned         beats
);

  localparam int unsigned BYTES = DATA_W / 8;

  logic [DATA_W-1:0] mem [WORDS];
  typedef enum logic [1:0] {M_ADDR, M_DATA, M_RESP} mstate_e;
  mstate_e           st;
  logic [ADDR_W-1:0] waddr;
  int unsigned       left;
  logic              rnd_a, rnd_w;
  logic              aw_wait;
  logic [ADDR_W-1:0] aw_prev_addr;
  logic [7:0]        aw_prev_len;

  always_ff @(posedge clk) begin
    rnd_a <= random_stall && ($urandom_range(3) == 0);
    rnd_w <= random_stall && ($urandom_range(3) == 0);
  end

  assign awready = (st == M_ADDR) && !stall && !rnd_a;
  assign wready  = (st == M_DATA) && !stall && !rnd_w;
  assign bvalid  = (st == M_RESP);
  assign bresp   = bad_resp ? 2'b10 : 2'b00;

  // AXI4 handshake rules on the master's side: a valid, once raised, stays
  // raised with the same payload until the matching ready.
  a_aw_stable: assert property (@(posedge clk) disable iff (!rst_n)
    awvalid && !awready |=> awvalid && $stable(awaddr) && $stable(awlen));
  a_w_stable: assert property (@(posedge clk) disable iff (!rst_n)
    wvalid && !wready |=> wvalid && $stable(wdata) && $stable(wlast));

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st           <= M_ADDR;
      waddr        <= '0;
      left         <= 0;
      proto_errors <= 0;
      bursts       <= 0;
      beats        <= 0;
      aw_wait      <= 1'b0;
      aw_prev_addr <= '0;
      aw_prev_len  <= '0;
    end else begin
      // address and length must stay put while awvalid waits for awready
      aw_wait      <= awvalid && !awready;
      aw_prev_addr <= awaddr;
      aw_prev_len  <= awlen;
      if (aw_wait && (!awvalid || awaddr != aw_prev_addr || awlen != aw_prev_len))
        proto_errors <= proto_errors + 1;
      unique case (st)
        M_ADDR: if (awvalid && awready) begin
          if (awburst != 2'b01 || (32'd1 << awsize) != BYTES ||
              (32'(awaddr[11:0]) + (32'(awlen) + 1) * BYTES) > 4096 ||
              (32'(awaddr) / BYTES + 32'(awlen) + 1) > WORDS)
            proto_errors <= proto_errors + 1;
          waddr  <= awaddr;
          left   <= 32'(awlen) + 1;
          bursts <= bursts + 1;
          st     <= M_DATA;
        end
        M_DATA: if (wvalid && wready) begin
          mem[32'(waddr) / BYTES % WORDS] <= wdata;
          if (wlast != (left == 1) || wstrb != '1) proto_errors <= proto_errors + 1;
          waddr <= waddr + ADDR_W'(BYTES);
          left  <= left - 1;
          beats <= beats + 1;
          if (left == 1) st <= M_RESP;
        end
        M_RESP: if (bready) st <= M_ADDR;
        default: st <= M_ADDR;
      endcase
    end
  end

endmodule
