ff
fe
fd
fc
fb
fa
f9
f8
f7
f6
f5
f4
f3
f2
f1
f0
f0
ef
ee
ed
ec
eb
ea
e9
e8
e7
e6
e5
e5
e4
e3
e2
e1
e0
df
de
de
dd
dc
db
da
d9
d8
d8
d7
d6
d5
d4
d3
d3
d2
d1
d0
cf
cf
ce
cd
cc
cb
cb
ca
c9
c8
c7
