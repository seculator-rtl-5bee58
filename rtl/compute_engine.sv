// compute_engine: the PE array and its controller.
//
// Computes one matrix-multiply tile C += A * B out of the global buffer, where
// A is ROWS x K (pixels), B is K x COLS (weights) and C is ROWS x COLS (partial
// sums of the ofmap). A convolution reaches the array already lowered to this
// form by the instruction stream (rows = output pixels, columns = output
// channels, K = input channels x filter taps).
//
// Dataflow: output-stationary systolic array. PE(i,j) keeps C[i][j]. For each
// k the controller reads the column A[.][k] and the row B[k][.] from the
// buffer and injects them at the left and top edges, row i delayed by i clocks
// and column j by j clocks, so that A[i][k] and B[k][j] meet in PE(i,j).
// After the last k and a drain of ROWS+COLS+2 clocks, each column of C is
// read from the buffer, the accumulators are added (if `accumulate`) and the
// column is written back, so a later tile with another slice of K continues
// the same partial sums; without `accumulate` the old contents are replaced.
//
// Buffer layout (16 four-byte words per 64-byte line, word w at bits
// [32w+31:32w]): step k of A occupies LA = ceil(ROWS/16) lines from
// a_line + k*LA, step k of B LB = ceil(COLS/16) lines from b_line + k*LB, and
// column j of C LA lines from c_line + j*LA. C is thus stored output channel
// by output channel, in the same layout as A: one layer's ofmap is directly
// the next layer's ifmap.
//
// Interface: `start` with `cmd` (when not `busy`); `done` pulses at the end.
// Latency from start to done: 1 + K*(LA+LB) + (ROWS+COLS+2) + 2*COLS*LA + 2
// clocks (325 for the 32x32 array and K = 32). While one tile runs, the array
// is busy K*(LA+LB) clocks: with one buffer port it takes LA+LB = 4 clocks to
// fetch the operands of one k, so the array does 1024 MACs every 4 clocks.
//
// From the paper: the 32x32 array and the four-byte pixel. Own choices: the
// output-stationary systolic dataflow, the lowering to matrix multiply, the
// buffer layout and integer arithmetic.
module compute_engine
  import seculator_pkg::*;
#(
  parameter int unsigned ROWS = 32,
  parameter int unsigned COLS = 32,
  parameter int unsigned DW   = PIX_W
) (
  input  logic               clk,
  input  logic               rst_n,
  input  logic               start,
  input  ce_cmd_t            cmd,
  output logic               busy,
  output logic               done,
  output logic               gb_en,
  output logic               gb_we,
  output logic [GADDR_W-1:0] gb_addr,
  output block_t             gb_wdata,
  input  block_t             gb_rdata
);

  localparam int unsigned WPL = BLOCK_BITS / DW;           // words per line
  localparam int unsigned LA  = (ROWS + WPL - 1) / WPL;
  localparam int unsigned LB  = (COLS + WPL - 1) / WPL;
  localparam int unsigned LT  = LA + LB;
  localparam int unsigned DRAIN = ROWS + COLS + 2;
  localparam int unsigned CIW   = (COLS > 1) ? $clog2(COLS) : 1;

  typedef enum logic [2:0] {C_IDLE, C_CLR, C_FEED, C_DRAIN, C_WB_RD, C_WB_WR, C_DONE} cstate_e;
  cstate_e st;

  ce_cmd_t cmd_q;
  logic [15:0] ki;               // k of the line being issued
  logic [7:0]  li;               // line within step k
  logic [15:0] dcnt;
  logic [15:0] wr_col;
  logic [7:0]  wr_l;

  // captured operand vectors
  logic [DW-1:0] a_vec [ROWS];
  logic [DW-1:0] b_vec [COLS];
  logic          cap_v, fire;
  logic [7:0]    cap_li;

  // ---------------- array
  logic [DW-1:0] a_h [ROWS][COLS+1];   // horizontal operand wires
  logic [DW-1:0] b_v [ROWS+1][COLS];   // vertical operand wires
  logic [DW-1:0] acc [ROWS][COLS];
  logic          clr;

  assign clr = (st == C_CLR);

  for (genvar i = 0; i < ROWS; i++) begin : g_row
    // row i enters i clocks late
    logic [DW-1:0] edge_in;
    assign edge_in = fire ? a_vec[i] : '0;
    if (i == 0) begin : g_nodly
      assign a_h[i][0] = edge_in;
    end else begin : g_dly
      logic [DW-1:0] sk [i];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int d = 0; d < i; d++) sk[d] <= '0;
        else begin
          sk[0] <= edge_in;
          for (int d = 1; d < i; d++) sk[d] <= sk[d-1];
        end
      end
      assign a_h[i][0] = sk[i-1];
    end
  end

  for (genvar j = 0; j < COLS; j++) begin : g_col
    logic [DW-1:0] edge_in;
    assign edge_in = fire ? b_vec[j] : '0;
    if (j == 0) begin : g_nodly
      assign b_v[0][j] = edge_in;
    end else begin : g_dly
      logic [DW-1:0] sk [j];
      always_ff @(posedge clk or negedge rst_n) begin
        if (!rst_n) for (int d = 0; d < j; d++) sk[d] <= '0;
        else begin
          sk[0] <= edge_in;
          for (int d = 1; d < j; d++) sk[d] <= sk[d-1];
        end
      end
      assign b_v[0][j] = sk[j-1];
    end
  end

  for (genvar i = 0; i < ROWS; i++) begin : g_pr
    for (genvar j = 0; j < COLS; j++) begin : g_pc
      pe #(.DW(DW)) u_pe (
        .clk   (clk),
        .rst_n (rst_n),
        .clr   (clr),
        .a_in  (a_h[i][j]),
        .b_in  (b_v[i][j]),
        .a_out (a_h[i][j+1]),
        .b_out (b_v[i+1][j]),
        .acc   (acc[i][j])
      );
    end
  end

  // ---------------- buffer reads of operands
  logic [GADDR_W-1:0] feed_addr;
  always_comb begin
    if (li < 8'(LA)) feed_addr = cmd_q.a_line + GADDR_W'(ki * LA) + GADDR_W'(li);
    else             feed_addr = cmd_q.b_line + GADDR_W'(ki * LB) + GADDR_W'(li - 8'(LA));
  end

  // ---------------- write-back data: old line (+) accumulators of one column
  block_t wb_data;
  always_comb begin
    for (int w = 0; w < WPL; w++) begin
      int row;
      row = int'(wr_l) * WPL + w;
      wb_data[DW*w +: DW] = gb_rdata[DW*w +: DW];
      if (row < ROWS)
        wb_data[DW*w +: DW] = (cmd_q.accumulate ? gb_rdata[DW*w +: DW] : '0) + acc[row][wr_col[CIW-1:0]];
    end
  end

  always_comb begin
    gb_en    = 1'b0;
    gb_we    = 1'b0;
    gb_addr  = '0;
    gb_wdata = wb_data;
    unique case (st)
      C_FEED:  begin gb_en = 1'b1; gb_addr = feed_addr; end
      C_WB_RD: begin gb_en = 1'b1; gb_addr = cmd_q.c_line + GADDR_W'(wr_col * LA) + GADDR_W'(wr_l); end
      C_WB_WR: begin gb_en = 1'b1; gb_we = 1'b1;
                     gb_addr = cmd_q.c_line + GADDR_W'(wr_col * LA) + GADDR_W'(wr_l); end
      default: ;
    endcase
  end

  // capture of operand lines (one cycle after the read)
  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      cap_v  <= 1'b0;
      cap_li <= '0;
      fire   <= 1'b0;
      for (int i = 0; i < ROWS; i++) a_vec[i] <= '0;
      for (int j = 0; j < COLS; j++) b_vec[j] <= '0;
    end else begin
      cap_v  <= (st == C_FEED);
      cap_li <= li;
      fire   <= cap_v && (cap_li == 8'(LT - 1));
      if (cap_v) begin
        for (int w = 0; w < WPL; w++) begin
          if (cap_li < 8'(LA)) begin
            if (int'(cap_li) * WPL + w < ROWS)
              a_vec[int'(cap_li) * WPL + w] <= gb_rdata[DW*w +: DW];
          end else begin
            if ((int'(cap_li) - LA) * WPL + w < COLS)
              b_vec[(int'(cap_li) - LA) * WPL + w] <= gb_rdata[DW*w +: DW];
          end
        end
      end
    end
  end

  always_ff @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      st     <= C_IDLE;
      cmd_q  <= '0;
      ki     <= '0;
      li     <= '0;
      dcnt   <= '0;
      wr_col <= '0;
      wr_l   <= '0;
      done   <= 1'b0;
    end else begin
      done <= 1'b0;
      unique case (st)
        C_IDLE: if (start) begin
          cmd_q <= cmd;
          st    <= C_CLR;
        end
        C_CLR: begin
          ki <= '0;
          li <= '0;
          st <= C_FEED;
        end
        C_FEED: begin
          if (li == 8'(LT - 1)) begin
            li <= '0;
            if (ki == cmd_q.k_len - 16'd1) begin
              st   <= C_DRAIN;
              dcnt <= 16'(DRAIN - 1);
            end
            ki <= ki + 16'd1;
          end else begin
            li <= li + 8'd1;
          end
        end
        C_DRAIN: begin
          if (dcnt == '0) begin
            st     <= C_WB_RD;
            wr_col <= '0;
            wr_l   <= '0;
          end else dcnt <= dcnt - 16'd1;
        end
        C_WB_RD: st <= C_WB_WR;
        C_WB_WR: begin
          st <= C_WB_RD;
          if (wr_l == 8'(LA - 1)) begin
            wr_l <= '0;
            if (wr_col == 16'(COLS - 1)) st <= C_DONE;
            wr_col <= wr_col + 16'd1;
          end else wr_l <= wr_l + 8'd1;
        end
        C_DONE: begin
          done <= 1'b1;
          st   <= C_IDLE;
        end
        default: st <= C_IDLE;
      endcase
    end
  end

  assign busy = (st != C_IDLE);

  a_klen: assert property (@(posedge clk) disable iff (!rst_n) start && !busy |-> cmd.k_len != '0);

endmodule
