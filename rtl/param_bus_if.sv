// param_bus_if: the parameter load bus shared by all layer stages.
//
// A host writes one quantized weight or bias per clock: when we is high,
// data is stored at the flat parameter address addr (map in qctl_pkg). Every
// layer's param_store watches the same bus and keeps only the addresses of
// its own range, so the bus has no ready or response. The bus and its
// one-write-per-cycle timing are this design's choice; the published design
// compiles its parameters into the logic.
interface param_bus_if #(
  parameter int AW = 11,
  parameter int DW = 5
);
  logic          we;
  logic [AW-1:0] addr;
  logic [DW-1:0] data;

  modport src (output we, addr, data);
  modport dst (input  we, addr, data);
endinterface
