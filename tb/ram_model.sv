// ram_model: behavioural stand-in for the external memory (DDR and its controller) seen by
// the GDN core in simulation. Not synthesizable design content.
//
// Word-addressed, 32-bit. A request (req, we, addr, wdata) is granted on a clock edge where
// gnt is high; gnt is withheld on random cycles (about one in STALL_ONE_IN) to exercise the
// requester's hold behaviour. A granted read returns its word LAT cycles later on
// rvalid/rdata, in order; a granted write updates the array at once. Testbenches preload and
// inspect `mem` hierarchically. stall_count counts cycles where a request waited.
module ram_model #(
  parameter int unsigned WORDS        = 65536,
  parameter int unsigned LAT          = 3,
  parameter int unsigned STALL_ONE_IN = 5
) (
  input  logic        clk,
  input  logic        rst_n,
  input  logic        req,
  input  logic        we,
  input  logic [31:0] addr,
  input  logic [31:0] wdata,
  output logic        gnt,
  output logic        rvalid,
  output logic [31:0] rdata
);
  logic [31:0] mem [WORDS];
  logic [LAT-1:0]   pv;
  logic [31:0]      pd [LAT];
  int unsigned      stall_count;
  logic             gnt_en;

  always_ff @(posedge clk) begin
    if (!rst_n) gnt_en <= 1'b1;
    else        gnt_en <= (STALL_ONE_IN == 0) ? 1'b1 : ($urandom_range(STALL_ONE_IN - 1, 0) != 0);
  end
  assign gnt = req && gnt_en;

  always_ff @(posedge clk) begin
    if (!rst_n) begin
      pv <= '0;
      stall_count <= 0;
    end else begin
      if (req && !gnt) stall_count <= stall_count + 1;
      pv[0] <= gnt && !we;
      pd[0] <= mem[addr % WORDS];
      for (int i = 1; i < LAT; i++) begin
        pv[i] <= pv[i-1];
        pd[i] <= pd[i-1];
      end
      if (gnt && we) mem[addr % WORDS] <= wdata;
    end
  end
  assign rvalid = pv[LAT-1];
  assign rdata  = pd[LAT-1];
endmodule
