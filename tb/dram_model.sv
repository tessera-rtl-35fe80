// dram_model: behavioural DRAM controller for the testbenches (not
// synthesizable). Serves AXI INCR read bursts of 16-byte beats from a sparse
// memory filled by the testbench (write_beat). Each read becomes ready a
// random LAT_MIN..LAT_MAX cycles after its address was taken; with REORDER
// set a random ready read is served next, so bursts come back out of order.
// lat_min / lat_max start at LAT_MIN / LAT_MAX and may be changed by the
// testbench at run time; with lat_sd > 0 the latency is drawn from a normal
// distribution of mean lat_min and standard deviation lat_sd. Beats of one burst are not interleaved with another's. RVALID gaps are
// inserted with probability GAP_PCT percent. ARREADY drops at random with
// probability ARSTALL_PCT percent.
module dram_model #(
  parameter int ID_W        = 6,
  parameter int LAT_MIN     = 20,
  parameter int LAT_MAX     = 60,
  parameter bit REORDER     = 1,
  parameter int GAP_PCT     = 0,
  parameter int ARSTALL_PCT = 0
) (
  input  logic            clk,
  input  logic            rst_n,
  input  logic            arvalid,
  output logic            arready,
  input  logic [39:0]     araddr,
  input  logic [ID_W-1:0] arid,
  input  logic [7:0]      arlen,
  output logic            rvalid,
  input  logic            rready,
  output logic [ID_W-1:0] rid,
  output logic [127:0]    rdata,
  output logic [1:0]      rresp,
  output logic            rlast
);

  typedef struct { logic [39:0] addr; logic [ID_W-1:0] id; int len; longint ready_at; } rd_t;

  logic [127:0] mem [logic [39:0]];
  rd_t          pend [$];
  longint       now = 0;
  int           ar_count = 0;
  int           lat_min = LAT_MIN;    // the testbench may change these
  int           lat_max = LAT_MAX;
  int           lat_sd  = 0;          // > 0: normal latency, mean lat_min

  int           reordered = 0;

  function automatic void write_beat(input logic [39:0] a, input logic [127:0] d);
    mem[{a[39:4], 4'b0}] = d;
  endfunction

  function automatic logic [127:0] read_beat(input logic [39:0] a);
    if (mem.exists({a[39:4], 4'b0})) return mem[{a[39:4], 4'b0}];
    return '0;
  endfunction

  // uniform lat_min..lat_max, or (lat_sd > 0) approximately normal with mean
  // lat_min and standard deviation lat_sd (sum of 12 uniforms), at least 1
  function automatic int draw_latency();
    int acc, l;
    if (lat_sd <= 0) return int'($urandom_range(lat_min, lat_max));
    acc = 0;
    for (int i = 0; i < 12; i++) acc += int'($urandom_range(0, 999));
    l = lat_min + ((acc - 5994) * lat_sd) / 1000;
    return (l < 1) ? 1 : l;
  endfunction

  bit    act = 0;
  rd_t   cur;
  int    beat;

  always @(posedge clk) now <= now + 1;

  always @(posedge clk or negedge rst_n) begin
    if (!rst_n) begin
      arready <= 1'b1;
      rvalid  <= 1'b0;
      rid     <= '0;
      rdata   <= '0;
      rresp   <= '0;
      rlast   <= 1'b0;
      act = 0;
    end else begin
      if (arvalid && arready) begin
        rd_t r;
        r.addr = araddr; r.id = arid; r.len = int'(arlen) + 1;
        r.ready_at = now + longint'(draw_latency());
        pend.push_back(r);
        ar_count++;
      end
      arready <= (int'($urandom_range(0, 99)) >= int'(ARSTALL_PCT));
      if (rvalid && rready) begin
        beat++;
        if (beat == cur.len) act = 0;
      end
      if (!act) begin
        int pick; int n;
        pick = -1; n = 0;
        foreach (pend[i]) if (pend[i].ready_at <= now) begin
          if (pick < 0) pick = i;
          else if (REORDER && $urandom_range(0, n) == 0) begin pick = i; end
          n++;
        end
        if (pick >= 0) begin
          if (pick != 0) reordered++;
          cur = pend[pick]; pend.delete(pick); act = 1; beat = 0;
        end
      end
      if (act) begin
        if (rvalid && !rready) begin
          // hold the beat on the bus
        end else if (int'($urandom_range(0, 99)) < int'(GAP_PCT)) begin
          rvalid <= 1'b0;
        end else begin
          rvalid <= 1'b1;
          rid    <= cur.id;
          rdata  <= read_beat(cur.addr + 40'(16 * beat));
          rlast  <= (beat == cur.len - 1);
          rresp  <= 2'b00;
        end
      end else if (!(rvalid && !rready)) begin
        rvalid <= 1'b0;
        rlast  <= 1'b0;
      end
    end
  end

endmodule
