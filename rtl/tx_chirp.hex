9a8cc559
9a353a0f
fe4a752d
63c53d7a
6825ca46
08488b1b
a0c9bbaf
93b52cc8
ec4e7385
56f84e8c
7112e135
23a7905e
b622a506
8b5f0b6b
c8b36751
36b367a4
74710d30
4ce8a794
e3548e60
928bd625
9e86410d
fc19751f
5c9847d4
70a0dfa0
28d59228
c0539d9f
8b1bf7b8
b2ae5810
16cc72f3
68d43462
69d9cdb6
1a258dc4
b6fda456
8ad0ff62
b59b5a8b
16cc72f3
670f37c9
6ce9d4be
253790e1
c3949b97
8c7bec4e
a55f4a4a
fc19751f
551c508f
74c7f638
46f5a2bd
ead28cbe
9cd0c198
8eca1e44
c8b36751
25166f2a
6a0631eb
6d82d646
2e6c9466
d3b99380
93c2d317
93b52cc8
d2966c08
2b426ce9
6af02fed
6e45d854
3462972c
de0c8fd7
9a8cc559
8dbc1a03
bd7a607a
0fc5741f
597e4ba9
7525fcc8
5594aff1
0b8e8b62
bc3ea063
8e46e3ba
971c3443
d1946b9a
216d7052
6166412a
74a1f495
534cad93
0d308b8f
c1b69cbd
9198d8b7
90d62516
bed66166
079974f1
4ccd5883
7297188a
6a8bcf33
38bf9978
f1518bbc
aff1aa6c
8d14e912
95012fcd
c3ee649f
082574e7
49035baa
6ff6229b
7029de0c
4a65a575
0c198b70
ca4697db
9a46c5d2
8af705f5
a06343c2
d3176c3e
130673a2
4ccd5883
6fa223a7
7204e4ec
5411ae5b
1eed8ef7
e1bc8eca
ad2fad16
8ef7e113
8e601cac
aacc5075
dc596fa2
1642730e
4a4a5aa1
6c3e2ce9
74aff521
6261c053
3a2e9a46
058b8af2
d0339501
a575b59b
8de4e553
8dbc1a03
a4564903
cc9a6950
fe4a752d
2fcd6aff
58104d52
701f2215
7444f151
6469c394
43dea077
188a8d69
e9be8cf2
bef39e86
9e9abed6
8d30e889
8cbe152e
9cbd3e4a
ba5b5e40
e1137109
0b6b74a1
33c56922
551c508f
6b9a2e6c
74f80730
70a0dfa0
5f9dbc3e
4451a0c9
22158fe1
fcc88adb
d85491bb
b848a352
9f86bd7a
900add65
8ad0ffee
8fd721f4
9e394098
b457597e
d0136af0
ef0273f3
0eaf7444
2cc86c4b
47495d03
5c9847d4
6b9a2e6c
73b3129e
74c7f638
6f2adaea
638dc22d
52eaad2f
3e689cd0
27499198
0ed28bc1
f6388b39
de938fae
c8d2989e
b5b6a55f
a5ceb52e
9978c741
90e1dac9
8c0def02
8adb0338
8d0d16cc
924d2937
9a353a0f
a4564903
b03e55dc
bd7a607a
cb9e68d4
da446ef2
e91272ec
f7b874e5
05f57509
1390738b
206070a0
2c476c80
372e6762
410d617a
49de5afa
51a55411
586c4ce8
5e4045a5
63303e68
6751374d
6ab7306d
6d7529db
6fa223a7
71511dde
7297188a
738513b2
742d0f5d
749e0b8e
74e50848
750e058b
7524035b
752d01b6
7530009e
75300012
75300012
7530009e
752d01b6
7524035b
750e058b
74e50848
749e0b8e
742d0f5d
738513b2
7297188a
71511dde
6fa223a7
6d7529db
6ab7306d
6751374d
63303e68
5e4045a5
586c4ce8
51a55411
49de5afa
410d617a
372e6762
2c476c80
206070a0
1390738b
05f57509
f7b874e5
e91272ec
da446ef2
cb9e68d4
bd7a607a
b03e55dc
a4564903
9a353a0f
924d2937
8d0d16cc
8adb0338
8c0def02
90e1dac9
9978c741
a5ceb52e
b5b6a55f
c8d2989e
de938fae
f6388b39
0ed28bc1
27499198
3e689cd0
52eaad2f
638dc22d
6f2adaea
74c7f638
73b3129e
6b9a2e6c
5c9847d4
47495d03
2cc86c4b
0eaf7444
ef0273f3
d0136af0
b457597e
9e394098
8fd721f4
8ad0ffee
900add65
9f86bd7a
b848a352
d85491bb
fcc88adb
22158fe1
4451a0c9
5f9dbc3e
70a0dfa0
74f80730
6b9a2e6c
551c508f
33c56922
0b6b74a1
e1137109
ba5b5e40
9cbd3e4a
8cbe152e
8d30e889
9e9abed6
bef39e86
e9be8cf2
188a8d69
43dea077
6469c394
7444f151
701f2215
58104d52
2fcd6aff
fe4a752d
cc9a6950
a4564903
8dbc1a03
8de4e553
a575b59b
d0339501
058b8af2
3a2e9a46
6261c053
74aff521
6c3e2ce9
4a4a5aa1
1642730e
dc596fa2
aacc5075
8e601cac
8ef7e113
ad2fad16
e1bc8eca
1eed8ef7
5411ae5b
7204e4ec
6fa223a7
4ccd5883
130673a2
d3176c3e
a06343c2
8af705f5
9a46c5d2
ca4697db
0c198b70
4a65a575
7029de0c
6ff6229b
49035baa
082574e7
c3ee649f
95012fcd
8d14e912
aff1aa6c
f1518bbc
38bf9978
6a8bcf33
7297188a
4ccd5883
079974f1
bed66166
90d62516
9198d8b7
c1b69cbd
0d308b8f
534cad93
74a1f495
6166412a
216d7052
d1946b9a
971c3443
8e46e3ba
bc3ea063
0b8e8b62
5594aff1
7525fcc8
597e4ba9
0fc5741f
bd7a607a
8dbc1a03
9a8cc559
de0c8fd7
3462972c
6e45d854
6af02fed
2b426ce9
d2966c08
93b52cc8
93c2d317
d3b99380
2e6c9466
6d82d646
6a0631eb
25166f2a
c8b36751
8eca1e44
9cd0c198
ead28cbe
46f5a2bd
74c7f638
551c508f
fc19751f
a55f4a4a
8c7bec4e
c3949b97
253790e1
6ce9d4be
670f37c9
16cc72f3
b59b5a8b
8ad0ff62
b6fda456
1a258dc4
69d9cdb6
68d43462
16cc72f3
b2ae5810
8b1bf7b8
c0539d9f
28d59228
70a0dfa0
5c9847d4
fc19751f
9e86410d
928bd625
e3548e60
4ce8a794
74710d30
36b367a4
c8b36751
8b5f0b6b
b622a506
23a7905e
7112e135
56f84e8c
ec4e7385
93b52cc8
a0c9bbaf
08488b1b
6825ca46
63c53d7a
fe4a752d
9a353a0f
9a8cc559
