80000000
8feacc96
9f597ea7
addea7bd
bb26a7af
c6fd1fab
d14c8f95
da19942e
e17bead4
e7972d6f
ec948eee
f09e294b
f3dbe5e2
f671bec0
f87efe60
fa1e27b4
fb654178
fc66537e
fd2ff5b1
fdcdddad
fe496098
fea9e4d3
fef5426c
ff301337
ff5df444
ff81bac2
ff9d9e57
ffb35ae0
ffc44b19
ffd17db5
ffdbc5ea
ffe3c873
