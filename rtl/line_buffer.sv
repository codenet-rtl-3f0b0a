// line_buffer: 15 line memories with one write port and three read ports.
//
// The deformable convolution's offsets are bounded to [0, 7], so every sample
// an output pixel needs lies within 7 rows of its centre row: 15 rows cover
// all of them, and every input word is fetched from DRAM only once.  Each of
// the LINES rows is a separate memory of ROW_WORDS 16-channel words, so the
// three rows of a square sampling pattern (centre row - d, centre row,
// centre row + d) can be read in the same cycle through the three ports.
//
// Ports: one write port (wr_line picks the row memory, wr_addr the word).
// Read port p reads word rd_addr[p] of row memory rd_line[p]; the data is on
// rd_data[p] one cycle after rd_en[p].  Each row memory has a single read
// address, so two enabled ports may name the same row only with the same
// address (the case of offset 0); the assertion below checks this.  A read
// returns the word stored before a write to the same address in the same
// cycle.  The number of lines, the split into separate line memories and
// the three parallel ports follow the paper; the row size and the
// one-cycle read latency are this design's choices.
module line_buffer
  import codenet_pkg::*;
#(
  parameter int LINES     = LB_LINES,
  parameter int ROW_WORDS = 1024,
  parameter int WIDTH     = WORD_W,
  parameter int NPORTS    = 3
) (
  input  logic                                    clk,
  input  logic                                    wr_en,
  input  logic [$clog2(LINES)-1:0]                wr_line,
  input  logic [$clog2(ROW_WORDS)-1:0]            wr_addr,
  input  logic [WIDTH-1:0]                        wr_data,
  input  logic [NPORTS-1:0]                       rd_en,
  input  logic [NPORTS-1:0][$clog2(LINES)-1:0]    rd_line,
  input  logic [NPORTS-1:0][$clog2(ROW_WORDS)-1:0] rd_addr,
  output logic [NPORTS-1:0][WIDTH-1:0]            rd_data
);
  localparam int LW = $clog2(LINES);
  localparam int AW = $clog2(ROW_WORDS);

  logic [WIDTH-1:0]            line_q [LINES];  // registered output of each line
  logic [NPORTS-1:0][LW-1:0]   sel_q;    // line each port read last

  for (genvar l = 0; l < LINES; l++) begin : g_line
    logic [WIDTH-1:0] mem [ROW_WORDS];
    logic             ren;
    logic [AW-1:0]    raddr;

    // the lowest-numbered port that selects this line drives its address
    always_comb begin
      ren   = 1'b0;
      raddr = '0;
      for (int p = NPORTS - 1; p >= 0; p--) begin
        if (rd_en[p] && int'(rd_line[p]) == l) begin
          ren   = 1'b1;
          raddr = rd_addr[p];
        end
      end
    end

    always_ff @(posedge clk) begin
      if (wr_en && int'(wr_line) == l) mem[wr_addr] <= wr_data;
      if (ren) line_q[l] <= mem[raddr];
    end
  end

  always_ff @(posedge clk) begin
    for (int p = 0; p < NPORTS; p++)
      if (rd_en[p]) sel_q[p] <= rd_line[p];
  end

  always_comb begin
    for (int p = 0; p < NPORTS; p++) rd_data[p] = line_q[sel_q[p]];
  end

  // two ports on one line must read the same word
  for (genvar p = 0; p < NPORTS; p++) begin : g_chk
    for (genvar r = p + 1; r < NPORTS; r++) begin : g_pair
      a_one_addr_per_line: assert property (@(posedge clk)
        (rd_en[p] && rd_en[r] && rd_line[p] == rd_line[r]) |-> rd_addr[p] == rd_addr[r])
        else $error("line_buffer: ports %0d and %0d conflict on one line", p, r);
    end
  end

endmodule
