a5a5
3b92
99cb
7f00
dd79
b2b6
10ef
f624
541d
2a4a
8b83
69f8
cf31
ad6e
02a7
e09c
46d5
2402
ba7b
1bb0
f9e9
5f26
3d1f
9354
708d
d6fa
b433
0a68
eba1
499e
2fd7
8d0c
6345
c0b2
a6eb
0420
9a19
7856
d98f
bfc4
1d3d
f36a
50a3
3698
94d1
6a0e
c847
a9bc
0ff5
ed22
431b
2150
8689
64c6
fa3f
5874
39ad
9f9a
7dd3
d308
b141
16be
f4f7
4a2c
2865
8e52
6f8b
cdc0
a339
0176
e6af
44e4
dadd
b80a
1e43
ffb8
5df1
332e
9167
775c
d495
aac2
083b
ee70
4fa9
2de6
83df
6114
c74d
a4ba
3af3
9828
7e61
dc5e
bd97
13cc
f105
5772
34ab
8ae0
68d9
ce16
ac4f
0d84
e3fd
412a
2763
8558
1a91
f8ce
5e07
3c7c
9db5
73e2
d1db
b710
1549
ea86
48ff
2e34
8c6d
625a
c393
a1c8
0701
e57e
7ab7
d8ec
be25
1c12
f24b
5380
31f9
9736
756f
caa4
a89d
0eca
ec03
4278
23b1
81ee
6727
c51c
5b55
3882
9efb
7c30
d269
b3a6
119f
f7d4
550d
2b7a
88b3
6ee8
cc21
a21e
0057
e18c
47c5
2532
bb6b
18a0
fe99
5cd6
320f
9044
71bd
d7ea
b523
0b18
e951
4e8e
2cc7
823c
6075
c1a2
a79b
05d0
9b09
7946
debf
bcf4
122d
f01a
5653
3788
95c1
6b3e
c977
aeac
0ce5
e2d2
400b
2640
87b9
65f6
fb2f
5964
3f5d
9c8a
72c3
d038
b671
17ae
f5e7
4bdc
2915
8f42
6cbb
c2f0
a029
0666
e45f
4594
dbcd
b93a
1f73
fca8
52e1
30de
9617
744c
d585
abf2
092b
ef60
4d59
2296
80cf
6604
c47d
a5aa
3be3
99d8
7f11
dd4e
b287
10fc
f635
5462
2a5b
8b90
69c9
cf06
ad7f
02b4
e0ed
46da
2413
ba48
1b81
f9fe
5f37
3d6c
